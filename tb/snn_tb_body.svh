// snn_tb_body.svh: body shared by the end-to-end testbenches of
// snn_accelerator. The including module declares NL (layers), LN (sizes),
// T_MAX (length of the input trains in time steps), N_INF (inferences),
// W_LO/W_HI (weight range per layer), P_OVF (percent overflow symbols),
// P_GATE (percent of cycles an input offers a symbol), P_RDY (percent of
// cycles the output is ready), CYC_MAX (cycles one inference may take),
// WATCHDOG (cycles) and instantiates the
// accelerator as `dut` on the signals declared here.
//
// The bench loads random weights through the weight port, drives random
// input trains with random gaps, and checks the spikes of every layer
// against snn_ref_pkg, in absolute time, inference by inference. It also
// counts how often each mechanism of the design happened and fails when one
// never did.

  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int M  = LN[0];
  localparam int OW = (LN[NL] > 1) ? $clog2(LN[NL]) : 1;

  logic                          clk = 1'b0;
  logic                          rst_n;
  logic [M-1:0]                  in_valid;
  logic [M-1:0][DT_W-1:0]        in_code;
  logic [M-1:0]                  in_eos;
  logic [M-1:0]                  in_ready;
  logic                          out_valid;
  dtok_t                         out_tok;
  logic [OW-1:0]                 out_idx;
  logic                          out_ready;
  logic                          wr_en;
  logic [7:0]                    wr_layer;
  logic [7:0]                    wr_bank;
  logic [$clog2(SRAM_DEPTH)-1:0] wr_addr;
  logic [SRAM_WIDTH-1:0]         wr_data;
  logic [NL-1:0]                 stall;

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Weights, flattened per layer: w[l][i*n_out + n].
  int w [NL][];

  // Input trains of the current inference.
  int     code_q [M][$];     // symbol values; -1 = end of train
  int     ptr    [M];
  logic   gate   [M];
  logic   running = 1'b0;

  for (genvar j = 0; j < M; j++) begin : g_drv
    assign in_valid[j] = running && gate[j] && (ptr[j] < code_q[j].size());
    assign in_code[j]  = (ptr[j] < code_q[j].size() && code_q[j][ptr[j]] >= 0) ?
                         DT_W'(code_q[j][ptr[j]]) : '0;
    assign in_eos[j]   = (ptr[j] < code_q[j].size()) && (code_q[j][ptr[j]] < 0);
  end

  always @(posedge clk) begin
    for (int j = 0; j < M; j++) begin
      if (in_valid[j] && in_ready[j]) ptr[j] <= ptr[j] + 1;
      gate[j] <= ($urandom_range(99) < P_GATE);
    end
    out_ready <= ($urandom_range(99) < P_RDY);
  end

  // Mechanism counters.
  int n_in_ovf = 0, n_in_spk = 0, n_in_same = 0;
  int n_stall [NL];
  int n_spk   [NL];
  int n_idle  [NL];
  int n_same  [NL];   // output spikes with dt = 0 (several spikes in one step)
  int n_end   [NL];

  // Per layer: observed spikes of the current inference in absolute time.
  ev_q_t obs [NL];
  int    t_obs [NL];

  for (genvar l = 0; l < NL; l++) begin : g_mon
    always @(posedge clk) begin
      if (!rst_n) begin
        n_stall[l] = 0; n_spk[l] = 0; n_idle[l] = 0; n_same[l] = 0; n_end[l] = 0;
        t_obs[l] = 0;
      end else begin
        if (stall[l]) n_stall[l]++;
        if (dut.g_layer[l].o_valid && dut.g_layer[l].o_ready) begin
          case (dut.g_layer[l].o_tok.kind)
            TK_SPIKE: begin
              t_obs[l] += int'(dut.g_layer[l].o_tok.dt);
              obs[l].push_back('{t: t_obs[l], idx: int'(dut.g_layer[l].o_idx)});
              n_spk[l]++;
              if (dut.g_layer[l].o_tok.dt == 0 && obs[l].size() > 1) n_same[l]++;
            end
            TK_IDLE: begin
              t_obs[l] += int'(dut.g_layer[l].o_tok.dt);
              n_idle[l]++;
            end
            default: begin
              n_end[l]++;
              t_obs[l] = 0;
            end
          endcase
        end
      end
    end
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  task automatic load_weights();
    wr_en = 1'b0;
    for (int l = 0; l < NL; l++) begin
      int n_in = LN[l];
      int n_out = LN[l+1];
      int nb = (n_out * W_W + SRAM_WIDTH - 1) / SRAM_WIDTH;
      w[l] = new[n_in * n_out];
      for (int i = 0; i < n_in; i++) begin
        logic [SRAM_WIDTH*64-1:0] row;
        row = '0;
        for (int n = 0; n < n_out; n++) begin
          int v = W_LO[l] + int'($urandom_range(W_HI[l] - W_LO[l]));
          w[l][i*n_out + n] = v;
          row[n*W_W +: W_W] = W_W'(v);
        end
        for (int b = 0; b < nb; b++) begin
          @(negedge clk);
          wr_en    = 1'b1;
          wr_layer = 8'(l);
          wr_bank  = 8'(b);
          wr_addr  = 10'(i);
          wr_data  = row[b*SRAM_WIDTH +: SRAM_WIDTH];
        end
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic run_inference(int inf);
    ev_q_t in_ev, exp_ev;
    longint c0;
    int t;
    // Random input trains in the b-bit code.
    for (int j = 0; j < M; j++) begin
      code_q[j].delete();
      t = 0;
      while (1) begin
        int c;
        if ($urandom_range(99) < P_OVF) c = int'(DT_OVF);
        else                            c = int'($urandom_range(int'(DT_OVF) - 1));
        if (t + c > T_MAX) break;
        t += c;
        code_q[j].push_back(c);
        if (c == int'(DT_OVF)) n_in_ovf++;
        else begin
          if (c == 0 && in_ev.size() > 0 && in_ev[$].idx == j && in_ev[$].t == t) n_in_same++;
          in_ev.push_back('{t: t, idx: j});
          n_in_spk++;
        end
      end
      code_q[j].push_back(-1);
    end
    // Reference, layer by layer.
    exp_ev = sort_events(in_ev);
    for (int l = 0; l < NL; l++) obs[l].delete();
    @(negedge clk);
    for (int j = 0; j < M; j++) ptr[j] = 0;
    running = 1'b1;
    c0 = cycle;
    fork
      begin
        while (n_end[NL-1] < inf + 1) @(posedge clk);
      end
    join
    @(negedge clk);
    running = 1'b0;
    $display("inference %0d: %0d input spikes, %0d cycles", inf, in_ev.size(), cycle - c0);
    check(cycle - c0 <= longint'(CYC_MAX), $sformatf("inference took %0d cycles, more than %0d", cycle - c0, CYC_MAX));
    for (int l = 0; l < NL; l++) begin
      ev_q_t e;
      e = lif_layer(w[l], LN[l], LN[l+1], exp_ev);
      $display("  layer %0d: expected %0d spikes, observed %0d", l, e.size(), obs[l].size());
      check(e.size() == obs[l].size(), $sformatf("layer %0d spike count %0d != %0d", l, obs[l].size(), e.size()));
      for (int k = 0; k < e.size() && k < obs[l].size(); k++)
        check(e[k].t == obs[l][k].t && e[k].idx == obs[l][k].idx,
              $sformatf("layer %0d spike %0d: (%0d,%0d) expected (%0d,%0d)", l, k,
                        obs[l][k].t, obs[l][k].idx, e[k].t, e[k].idx));
      check(n_end[l] == inf + 1, $sformatf("layer %0d end count", l));
      exp_ev = e;
    end
  endtask

  initial begin
    for (int j = 0; j < M; j++) begin
      ptr[j] = 0;
      gate[j] = 1'b0;
    end
    out_ready = 1'b0;
    wr_en = 1'b0; wr_layer = '0; wr_bank = '0; wr_addr = '0; wr_data = '0;
    rst_n = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    load_weights();
    for (int inf = 0; inf < N_INF; inf++) run_inference(inf);
    // Every mechanism must have happened.
    check(n_in_ovf > 0, "no overflow symbol on the inputs");
    for (int l = 0; l < NL; l++) begin
      $display("layer %0d: spikes %0d, idle tokens %0d, same-step spikes %0d, stall cycles %0d, ends %0d",
               l, n_spk[l], n_idle[l], n_same[l], n_stall[l], n_end[l]);
      check(n_spk[l] > 0, $sformatf("layer %0d never spiked", l));
    end
    begin
      automatic int s = 0, i = 0, q = 0;
      for (int l = 0; l < NL; l++) begin s += n_stall[l]; i += n_idle[l]; q += n_same[l]; end
      check(s > 0, "no layer ever stalled");
      check(i > 0, "no layer ever sent an idle token");
      check(q > 0, "no layer ever sent two spikes in one time step");
    end
    $display("input: %0d spikes, %0d overflow symbols", n_in_spk, n_in_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


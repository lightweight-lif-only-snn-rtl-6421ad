// tb_snn_layer: one 9-input, 13-neuron layer (2 SRAM blocks). Random weights
// are loaded through the write port; random token streams (spikes with
// dt 0..3, idle tokens, end) are offered with random gaps and random output
// back-pressure. The output spikes, in absolute time, must equal the LIF
// reference model fed with the input spikes in arrival order. A directed case
// checks the timing: a spike whose weight reaches theta, followed by a token
// that moves time on, gives an output spike two cycles after that token is
// accepted.
module tb_snn_layer;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int N_IN = 9;
  localparam int N_OUT = 13;
  localparam int NB = (N_OUT * W_W + SRAM_WIDTH - 1) / SRAM_WIDTH;
  localparam int IW = $clog2(N_IN);
  localparam int OW = $clog2(N_OUT);

  logic clk = 1'b0;
  logic rst_n, in_valid, in_ready, out_valid, out_ready, wr_en, stall;
  dtok_t in_tok, out_tok;
  logic [IW-1:0] in_idx;
  logic [OW-1:0] out_idx;
  logic [$clog2(NB)-1:0] wr_bank;
  logic [9:0] wr_addr;
  logic [63:0] wr_data;

  snn_layer #(.N_IN(N_IN), .N_OUT(N_OUT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int w[];
  typedef struct { tok_kind_e kind; int dt; int idx; } tk_t;
  tk_t q [$];
  int p_in, p_gate, p_rdy, t_out, n_end, n_stall;
  logic gate, go;
  ev_q_t obs;
  longint cycle = 0, acc_cycle, out_cycle;

  assign in_valid = go && gate && (p_in < q.size());
  assign in_tok   = (p_in < q.size()) ? '{kind: q[p_in].kind, dt: DT_W'(q[p_in].dt)} : '{kind: TK_END, dt: '0};
  assign in_idx   = (p_in < q.size()) ? IW'(q[p_in].idx) : '0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (in_valid && in_ready) p_in <= p_in + 1;
    gate <= ($urandom_range(99) < p_gate);
    out_ready <= ($urandom_range(99) < p_rdy);
    if (stall) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      if (out_tok.kind == TK_END) n_end++;
      else begin
        t_out += int'(out_tok.dt);
        if (out_tok.kind == TK_SPIKE) begin
          obs.push_back('{t: t_out, idx: int'(out_idx)});
          if (out_cycle < 0) out_cycle = cycle;
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

  task automatic load(int lo, int hi);
    w = new[N_IN * N_OUT];
    for (int i = 0; i < N_IN; i++) begin
      logic [NB*64-1:0] row;
      row = '0;
      for (int n = 0; n < N_OUT; n++) begin
        w[i*N_OUT + n] = lo + int'($urandom_range(hi - lo));
        row[n*W_W +: W_W] = W_W'(w[i*N_OUT + n]);
      end
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = $clog2(NB)'(b); wr_addr = 10'(i); wr_data = row[b*64 +: 64];
      end
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic send_and_check();
    ev_q_t ev, exp_ev;
    int t = 0;
    foreach (q[k]) begin
      t += q[k].dt;
      if (q[k].kind == TK_SPIKE) ev.push_back('{t: t, idx: q[k].idx});
    end
    exp_ev = lif_layer(w, N_IN, N_OUT, ev);
    obs.delete(); t_out = 0; n_end = 0;
    @(negedge clk);
    p_in = 0; go = 1'b1;
    while (n_end == 0) @(posedge clk);
    @(negedge clk);
    go = 1'b0;
    check(obs.size() == exp_ev.size(), $sformatf("spike count %0d != %0d", obs.size(), exp_ev.size()));
    for (int k = 0; k < obs.size() && k < exp_ev.size(); k++)
      check(obs[k].t == exp_ev[k].t && obs[k].idx == exp_ev[k].idx,
            $sformatf("spike %0d: (%0d,%0d) expected (%0d,%0d)", k, obs[k].t, obs[k].idx, exp_ev[k].t, exp_ev[k].idx));
  endtask

  initial begin
    go = 0; p_in = 0; gate = 0; out_ready = 0; n_stall = 0; out_cycle = -1;
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0;
    p_gate = 100; p_rdy = 100;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // Directed timing case: all weights theta.
    load(1 << W_FRAC, 1 << W_FRAC);
    q.delete();
    q.push_back('{TK_SPIKE, 1, 3});
    q.push_back('{TK_IDLE,  2, 0});
    q.push_back('{TK_END,   0, 0});
    send_and_check();
    begin
      // Second token accepted one cycle after the first (no back-pressure).
      // Find its accept cycle by replaying with a probe.
      longint c_acc = -1;
      obs.delete(); t_out = 0; n_end = 0; out_cycle = -1;
      @(negedge clk);
      p_in = 0; go = 1'b1;
      while (n_end == 0) begin
        @(posedge clk);
        if (c_acc < 0 && in_valid && in_ready && p_in == 1) c_acc = cycle;
      end
      @(negedge clk);
      go = 1'b0;
      $display("closing token accepted in cycle %0d, first spike out in cycle %0d", c_acc, out_cycle);
      check(out_cycle - c_acc == 2, "output spike not two cycles after the closing token");
      check(obs.size() == N_OUT && obs[0].t == 1, "all neurons spike at t=1");
    end
    // Random streams.
    p_gate = 70; p_rdy = 50;
    for (int r = 0; r < 30; r++) begin
      load(-10, 12);
      q.delete();
      for (int k = 0; k < int'($urandom_range(60)); k++) begin
        tk_t x;
        x.kind = ($urandom_range(4) == 0) ? TK_IDLE : TK_SPIKE;
        x.dt = int'($urandom_range(3));
        if ($urandom_range(1) == 0) x.dt = 0;
        x.idx = int'($urandom_range(N_IN - 1));
        q.push_back(x);
      end
      q.push_back('{TK_END, 0, 0});
      send_and_check();
    end
    check(n_stall > 0, "the layer never stalled");
    $display("stall cycles: %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

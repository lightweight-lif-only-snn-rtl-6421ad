// tb_spike_merger_tree: checks the merger tree with M = 11 input trains
// (not a power of two, so pass-through nodes are exercised). Random trains in
// the b-bit code (overflow symbol 3 included) are offered with random gaps
// and output back-pressure; the output, turned back into absolute time, must
// hold every input spike once, ordered by time and then by train number,
// with the train number as synapse index. With all inputs valid and the
// output ready, the first token must leave after ceil(log2 M) cycles and the
// tree must then send one token per cycle.
module tb_spike_merger_tree;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int M = 11;
  localparam int IDX_W = $clog2(M);

  logic clk = 1'b0;
  logic rst_n;
  logic [M-1:0] in_valid, in_eos, in_ready;
  logic [M-1:0][DT_W-1:0] in_code;
  logic y_valid, y_ready;
  dtok_t y_tok;
  logic [IDX_W-1:0] y_idx;

  spike_merger_tree #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int code_q [M][$];
  int ptr [M];
  logic gate [M];
  logic go = 1'b0;
  int p_gate = 60, p_rdy = 70;
  ev_q_t obs;
  int t_out = 0, n_end = 0, n_out = 0;
  longint cycle = 0;
  longint first_out = -1;

  for (genvar j = 0; j < M; j++) begin : g_drv
    assign in_valid[j] = go && gate[j] && (ptr[j] < code_q[j].size());
    assign in_code[j]  = (ptr[j] < code_q[j].size() && code_q[j][ptr[j]] >= 0) ? DT_W'(code_q[j][ptr[j]]) : '0;
    assign in_eos[j]   = (ptr[j] < code_q[j].size()) && (code_q[j][ptr[j]] < 0);
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int j = 0; j < M; j++) begin
      if (in_valid[j] && in_ready[j]) ptr[j] <= ptr[j] + 1;
      gate[j] <= ($urandom_range(99) < p_gate);
    end
    y_ready <= ($urandom_range(99) < p_rdy);
    if (rst_n && y_valid && y_ready) begin
      n_out++;
      if (first_out < 0) first_out = cycle;
      if (y_tok.kind == TK_END) n_end++;
      else begin
        t_out += int'(y_tok.dt);
        if (y_tok.kind == TK_SPIKE) obs.push_back('{t: t_out, idx: int'(y_idx)});
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

  task automatic run(int len, output int n_tok);
    ev_q_t ev, exp_ev;
    n_tok = 0;
    for (int j = 0; j < M; j++) begin
      int t = 0;
      int n_sym = int'($urandom_range(len));
      code_q[j].delete();
      for (int k = 0; k < n_sym; k++) begin
        int c = int'($urandom_range(3));
        t += c;
        code_q[j].push_back(c);
        if (c != 3) ev.push_back('{t: t, idx: j});
      end
      code_q[j].push_back(-1);
    end
    exp_ev = sort_events(ev);
    obs.delete();
    t_out = 0; n_end = 0; n_out = 0; first_out = -1;
    @(negedge clk);
    for (int j = 0; j < M; j++) ptr[j] = 0;
    go = 1'b1;
    while (n_end == 0) @(posedge clk);
    @(negedge clk);
    go = 1'b0;
    n_tok = n_out;
    check(obs.size() == exp_ev.size(), $sformatf("spike count %0d != %0d", obs.size(), exp_ev.size()));
    for (int k = 0; k < obs.size() && k < exp_ev.size(); k++)
      check(obs[k].t == exp_ev[k].t && obs[k].idx == exp_ev[k].idx,
            $sformatf("spike %0d: (%0d,%0d) expected (%0d,%0d)", k, obs[k].t, obs[k].idx, exp_ev[k].t, exp_ev[k].idx));
  endtask

  initial begin
    int n;
    longint c0;
    for (int j = 0; j < M; j++) begin ptr[j] = 0; gate[j] = 1'b0; end
    y_ready = 1'b0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 20; r++) run(25, n);
    // Latency and rate.
    p_gate = 100; p_rdy = 100;
    repeat (3) @(posedge clk);
    c0 = cycle + 1;
    run(60, n);
    $display("first token after %0d cycles, %0d tokens in %0d cycles", first_out - c0, n, cycle - c0);
    check(first_out - c0 == $clog2(M), "latency is not ceil(log2 M) cycles");
    check(n >= (cycle - c0) - $clog2(M) - 3, "tree does not send one token per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

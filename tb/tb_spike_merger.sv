// tb_spike_merger: checks the two-input merger element.
// Random differential-time trains (spikes, idle tokens, end) are offered on
// both inputs with random gaps and random output back-pressure. The merged
// output is turned back into absolute time and compared with the two input
// trains merged in absolute time (ties: input a first). The synapse index
// must carry the input's index plus bit LEVEL for input b. A last phase with
// both inputs always valid and the output always ready checks the rate of one
// token per cycle.
module tb_spike_merger;
  import snn_pkg::*;

  localparam int IDX_W = 4;
  localparam int LEVEL = 2;

  logic clk = 1'b0;
  logic rst_n;
  logic a_valid, b_valid, a_ready, b_ready, y_valid, y_ready;
  dtok_t a_tok, b_tok, y_tok;
  logic [IDX_W-1:0] a_idx, b_idx, y_idx;

  spike_merger #(.IDX_W(IDX_W), .LEVEL(LEVEL)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  typedef struct { int kind; int dt; int idx; } tk_t;
  typedef struct { int t; int src; int idx; } ev_t;
  tk_t qa[$], qb[$];
  int pa, pb;
  logic ga, gb, go;
  ev_t exp_q[$], obs_q[$];
  int t_out, n_end, n_out;

  assign a_valid = go && ga && (pa < qa.size());
  assign b_valid = go && gb && (pb < qb.size());
  assign a_tok   = (pa < qa.size()) ? '{kind: tok_kind_e'(qa[pa].kind), dt: DT_W'(qa[pa].dt)} : '{kind: TK_END, dt: '0};
  assign b_tok   = (pb < qb.size()) ? '{kind: tok_kind_e'(qb[pb].kind), dt: DT_W'(qb[pb].dt)} : '{kind: TK_END, dt: '0};
  assign a_idx   = (pa < qa.size()) ? IDX_W'(qa[pa].idx) : '0;
  assign b_idx   = (pb < qb.size()) ? IDX_W'(qb[pb].idx) : '0;

  int p_gate = 70, p_rdy = 70;
  always @(posedge clk) begin
    if (a_valid && a_ready) pa <= pa + 1;
    if (b_valid && b_ready) pb <= pb + 1;
    ga <= ($urandom_range(99) < p_gate);
    gb <= ($urandom_range(99) < p_gate);
    y_ready <= ($urandom_range(99) < p_rdy);
    if (rst_n && y_valid && y_ready) begin
      n_out++;
      if (y_tok.kind == TK_END) n_end++;
      else begin
        t_out += int'(y_tok.dt);
        if (y_tok.kind == TK_SPIKE) obs_q.push_back('{t: t_out, src: int'(y_idx[LEVEL]), idx: int'(y_idx)});
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

  // Build a random train; returns its spikes in absolute time.
  task automatic make_train(ref tk_t q[$], input int src, input int len, ref ev_t ev[$]);
    int t = 0;
    q.delete();
    for (int k = 0; k < len; k++) begin
      tk_t x;
      x.kind = ($urandom_range(3) == 0) ? int'(TK_IDLE) : int'(TK_SPIKE);
      x.dt   = int'($urandom_range(3));
      x.idx  = int'($urandom_range((1 << LEVEL) - 1));
      t += x.dt;
      if (x.kind == int'(TK_SPIKE))
        ev.push_back('{t: t, src: src, idx: x.idx | (src << LEVEL)});
      q.push_back(x);
    end
    q.push_back('{kind: int'(TK_END), dt: 0, idx: 0});
  endtask

  task automatic run(int len_a, int len_b);
    ev_t ea[$], eb[$];
    int i = 0, j = 0;
    make_train(qa, 0, len_a, ea);
    make_train(qb, 1, len_b, eb);
    exp_q.delete();
    // Merge in absolute time; ties: a first.
    while (i < ea.size() || j < eb.size()) begin
      if (j >= eb.size() || (i < ea.size() && ea[i].t <= eb[j].t)) exp_q.push_back(ea[i++]);
      else exp_q.push_back(eb[j++]);
    end
    obs_q.delete();
    t_out = 0;
    n_end = 0;
    @(negedge clk);
    pa = 0; pb = 0; go = 1'b1;
    while (n_end == 0) @(posedge clk);
    @(negedge clk);
    go = 1'b0;
    check(obs_q.size() == exp_q.size(), $sformatf("spike count %0d != %0d", obs_q.size(), exp_q.size()));
    for (int k = 0; k < exp_q.size() && k < obs_q.size(); k++)
      check(obs_q[k].t == exp_q[k].t && obs_q[k].idx == exp_q[k].idx,
            $sformatf("spike %0d: t=%0d idx=%0d, expected t=%0d idx=%0d", k,
                      obs_q[k].t, obs_q[k].idx, exp_q[k].t, exp_q[k].idx));
    check(pa == qa.size() && pb == qb.size(), "inputs not fully consumed");
  endtask

  initial begin
    int c0, n0;
    go = 1'b0; pa = 0; pb = 0; ga = 0; gb = 0; y_ready = 0; n_out = 0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 40; r++) run(int'($urandom_range(30)), int'($urandom_range(30)));
    run(0, 10);
    run(10, 0);
    // Rate: inputs always valid, output always ready -> one token per cycle.
    p_gate = 100; p_rdy = 100;
    repeat (2) @(posedge clk);
    c0 = 0;
    begin
      ev_t ea[$], eb[$];
      make_train(qa, 0, 200, ea);
      make_train(qb, 1, 200, eb);
    end
    @(negedge clk);
    n0 = n_out; n_end = 0; pa = 0; pb = 0; go = 1'b1;
    while (n_end == 0) begin @(posedge clk); c0++; end
    @(negedge clk);
    go = 1'b0;
    $display("rate: %0d tokens in %0d cycles", n_out - n0, c0);
    check(n_out - n0 >= c0 - 3, "merger does not send one token per cycle");
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

// tb_layer_controller: directed test of the layer controller with the neuron
// cores and the LOPD replaced by a counter of waiting spikes. A fixed token
// script (spikes in one step, spikes and idle tokens that move time on, the
// end of the train) is sent twice, once with the output always ready and once
// with random back-pressure. Checked: the weight read at every accepted
// spike, the core controls (close, shift, add, clear) of every executed
// token, the output tokens with the differential time held back by the delay
// register, and that a token closing a step waits while spikes are pending.
module tb_layer_controller;
  import snn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid, in_ready, mem_rd_en, core_en, core_close, core_add_en, core_clear;
  dtok_t in_tok, out_tok;
  logic [3:0] in_idx, mem_rd_addr;
  logic [DT_W-1:0] core_shift;
  logic any_fire, spk_any, spk_ack, out_valid, out_ready, stall;

  layer_controller #(.IN_IDX_W(4)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endfunction

  // Script: kind, dt, idx, number of neurons that fire when this token
  // closes the open step.
  typedef struct { tok_kind_e kind; int dt; int idx; int fires; } in_t;
  // Expected core controls per executed token.
  typedef struct { bit close; int shift; bit add; bit clr; } ctl_t;
  typedef struct { tok_kind_e kind; int dt; } out_t;

  in_t  script [$];
  ctl_t exp_ctl [$];
  out_t exp_out [$];
  int   p_in, n_ctl, n_out, waiting, stall_cnt, p_rdy;
  logic go;

  assign in_valid = go && (p_in < script.size());
  assign in_tok   = (p_in < script.size()) ? '{kind: script[p_in].kind, dt: DT_W'(script[p_in].dt)} : '{kind: TK_END, dt: '0};
  assign in_idx   = (p_in < script.size()) ? 4'(script[p_in].idx) : '0;
  assign spk_any  = (waiting > 0);

  // any_fire belongs to the token in the execute stage.
  int x_fires;
  assign any_fire = (x_fires > 0);

  always @(posedge clk) begin
    if (!rst_n) begin
      x_fires <= 0;
    end else begin
      if (in_valid && in_ready) begin
        check(mem_rd_en == (script[p_in].kind == TK_SPIKE), $sformatf("mem_rd_en at token %0d", p_in));
        if (script[p_in].kind == TK_SPIKE) check(mem_rd_addr == 4'(script[p_in].idx), "mem_rd_addr");
      end else begin
        check(!mem_rd_en, "mem_rd_en without an accepted spike");
      end
      if (stall) stall_cnt++;
      if (stall) check(!in_ready && !core_en && (spk_any || out_valid), "stall while nothing is pending");
      if (core_en) begin
        check(n_ctl < exp_ctl.size(), "extra core operation");
        if (n_ctl < exp_ctl.size())
          check(core_close == exp_ctl[n_ctl].close && int'(core_shift) == exp_ctl[n_ctl].shift &&
                core_add_en == exp_ctl[n_ctl].add && core_clear == exp_ctl[n_ctl].clr,
                $sformatf("core controls of token %0d: close %0d shift %0d add %0d clear %0d", n_ctl,
                          core_close, core_shift, core_add_en, core_clear));
        n_ctl++;
      end
      if (out_valid && out_ready) begin
        check(n_out < exp_out.size(), "extra output token");
        if (n_out < exp_out.size())
          check(out_tok.kind == exp_out[n_out].kind && int'(out_tok.dt) == exp_out[n_out].dt,
                $sformatf("output %0d: kind %0d dt %0d, expected kind %0d dt %0d", n_out,
                          out_tok.kind, out_tok.dt, exp_out[n_out].kind, exp_out[n_out].dt));
        n_out++;
      end
      waiting <= waiting - int'(spk_ack) + ((core_en && core_close && any_fire) ? x_fires : 0);
      // The token moving into the execute stage brings its fire count.
      if (in_valid && in_ready) x_fires <= script[p_in].fires;
      else if (core_en) x_fires <= 0;
      if (in_valid && in_ready) p_in <= p_in + 1;
      out_ready <= ($urandom_range(99) < p_rdy);
    end
  end

  task automatic run(int rdy);
    script.delete(); exp_ctl.delete(); exp_out.delete();
    //                kind      dt idx fires(at close)
    script.push_back('{TK_SPIKE, 0, 5, 0});  // t=0, opens the step
    script.push_back('{TK_SPIKE, 0, 7, 0});  // t=0, same step
    script.push_back('{TK_SPIKE, 2, 1, 3});  // t=2, closes t=0: 3 spikes
    script.push_back('{TK_SPIKE, 0, 2, 0});  // t=2
    script.push_back('{TK_IDLE,  3, 0, 0});  // t=5, closes t=2: none fire
    script.push_back('{TK_IDLE,  0, 0, 0});  // nothing
    script.push_back('{TK_SPIKE, 1, 9, 0});  // t=6, no open step
    script.push_back('{TK_SPIKE, 1, 3, 2});  // t=7, closes t=6: 2 spikes
    script.push_back('{TK_END,   0, 0, 1});  // end, closes t=7: 1 spike
    exp_ctl.push_back('{0, 0, 1, 0});
    exp_ctl.push_back('{0, 0, 1, 0});
    exp_ctl.push_back('{1, 2, 1, 0});
    exp_ctl.push_back('{0, 0, 1, 0});
    exp_ctl.push_back('{1, 3, 0, 0});
    exp_ctl.push_back('{0, 0, 0, 0});
    exp_ctl.push_back('{0, 1, 1, 0});
    exp_ctl.push_back('{1, 1, 1, 0});
    exp_ctl.push_back('{1, 0, 0, 1});
    // Output: spikes at t=0 (3), idle to t=2, idle to t=5, spikes at t=6 (2),
    // spike at t=7 (1), end.
    exp_out.push_back('{TK_SPIKE, 0});
    exp_out.push_back('{TK_SPIKE, 0});
    exp_out.push_back('{TK_SPIKE, 0});
    exp_out.push_back('{TK_IDLE,  2});
    exp_out.push_back('{TK_IDLE,  3});
    exp_out.push_back('{TK_SPIKE, 1});
    exp_out.push_back('{TK_SPIKE, 0});
    exp_out.push_back('{TK_SPIKE, 1});
    exp_out.push_back('{TK_END,   0});
    p_rdy = rdy;
    @(negedge clk);
    p_in = 0; n_ctl = 0; n_out = 0; go = 1'b1;
    while (n_out < exp_out.size()) @(posedge clk);
    repeat (3) @(posedge clk);
    @(negedge clk);
    go = 1'b0;
    check(n_ctl == exp_ctl.size(), $sformatf("%0d core operations, expected %0d", n_ctl, exp_ctl.size()));
    check(n_out == exp_out.size(), "output token count");
    check(waiting == 0, "spikes left waiting");
  endtask

  initial begin
    go = 1'b0; p_in = 0; waiting = 0; stall_cnt = 0; out_ready = 1'b0; p_rdy = 100;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    run(100);
    check(stall_cnt > 0, "a closing token never waited for pending spikes");
    for (int r = 0; r < 10; r++) run(40);
    $display("stall cycles: %0d", stall_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

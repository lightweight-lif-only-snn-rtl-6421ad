// tb_neuron_core: random control sequences against a model of the LIF update
// (threshold with reset by subtraction, decay by arithmetic shift, saturating
// weight add, clear), plus directed cases: a spike at exactly theta, a
// potential just below theta, and saturation at both limits.
module tb_neuron_core;
  import snn_pkg::*;

  logic clk = 1'b0;
  logic rst_n, en, close, add_en, clear, spk_clr, fire, spike;
  logic [DT_W-1:0] shift;
  logic signed [W_W-1:0] weight;
  logic signed [P_W-1:0] potential;

  neuron_core dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int p_m = 0;
  bit s_m = 0;
  localparam int THETA = 1 << W_FRAC;
  localparam int PMAX = (1 << (P_W - 1)) - 1;
  localparam int PMIN = -(1 << (P_W - 1));

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  task automatic step(bit e, bit c, int sh, bit a, int w, bit clr, bit sc);
    int p;
    @(negedge clk);
    en = e; close = c; shift = DT_W'(sh); add_en = a; weight = W_W'(w); clear = clr; spk_clr = sc;
    check(fire == (p_m >= THETA), "fire flag");
    // model
    if (e) begin
      p = p_m;
      if (c && p >= THETA) p -= THETA;
      p = p >>> sh;
      if (a) p += w;
      if (p > PMAX) p = PMAX;
      if (p < PMIN) p = PMIN;
      if (clr) p = 0;
      if (c && p_m >= THETA) s_m = 1;
      else if (sc) s_m = 0;
      p_m = p;
    end else if (sc) s_m = 0;
    @(posedge clk);
    #1;
    check(int'(potential) == p_m, $sformatf("potential %0d expected %0d", potential, p_m));
    check(spike == s_m, "spike bit");
  endtask

  initial begin
    en = 0; close = 0; shift = 0; add_en = 0; weight = 0; clear = 0; spk_clr = 0;
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // Directed: reach exactly theta with adds, then close: spike, P -> 0.
    step(1, 0, 0, 1, THETA / 2, 0, 0);
    step(1, 0, 0, 1, THETA / 2, 0, 0);
    check(fire == 1'b1, "fire at P = theta");
    step(1, 1, 0, 0, 0, 0, 0);
    check(spike && potential == 0, "spike and reset by subtraction");
    step(0, 0, 0, 0, 0, 0, 1);
    // Just below theta: no spike.
    step(1, 0, 0, 1, THETA - 1, 0, 0);
    step(1, 1, 1, 0, 0, 0, 0);
    check(!spike && potential == (THETA - 1) >>> 1, "no spike below theta, then decay");
    // Saturation high and low.
    for (int k = 0; k < 400; k++) step(1, 0, 0, 1, (1 << (W_W - 1)) - 1, 0, 0);
    check(potential == PMAX, "saturates at the maximum");
    step(1, 0, 0, 0, 0, 1, 0);
    for (int k = 0; k < 400; k++) step(1, 0, 0, 1, -(1 << (W_W - 1)), 0, 0);
    check(potential == PMIN, "saturates at the minimum");
    step(1, 0, 0, 0, 0, 1, 0);
    // Random.
    for (int k = 0; k < 5000; k++) begin
      bit c = ($urandom_range(3) == 0);
      bit sc = s_m && ($urandom_range(1) == 0);
      if (c && s_m) sc = 1;   // the layer only closes once the spike is sent
      step($urandom_range(7) != 0, c, int'($urandom_range(3)), $urandom_range(1),
           int'($urandom_range((1 << W_W) - 1)) - (1 << (W_W - 1)),
           ($urandom_range(63) == 0), sc);
    end
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

// tb_snn_accelerator: end-to-end test of the accelerator at a reduced size
// (12 input trains, layers of 16, 12, 8 and 4 neurons) with random weights,
// random input trains, random input gaps and output back-pressure. Three
// inferences are run; every layer's spikes are checked against the reference
// model in absolute time.
module tb_snn_accelerator;
  localparam int NL = 4;
  localparam int unsigned LN [NL+1] = '{12, 16, 12, 8, 4};
  localparam int T_MAX = 40;
  localparam int N_INF = 3;
  localparam int W_LO [NL] = '{-8, -10, -10, -10};
  localparam int W_HI [NL] = '{9, 10, 10, 11};
  localparam int P_OVF = 30;
  localparam int P_GATE = 70;
  localparam int P_RDY = 60;
  localparam int CYC_MAX = 2000;
  localparam int WATCHDOG = 200000;

  `include "snn_tb_body.svh"

  // Watchdog: a hung pipeline ends the run as a failure.
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  snn_accelerator #(.NUM_LAYERS(NL), .LAYER_N(LN)) dut (.*);

endmodule

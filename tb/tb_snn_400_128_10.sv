// tb_snn_400_128_10: the accelerator built for the 400-128-10 network used
// in the study of the differential-time bit width (400 input trains of one
// 9x9 patch each, 81 time steps). One inference with random weights and
// random input trains; every layer's spikes are checked against the reference
// model.
module tb_snn_400_128_10;
  localparam int NL = 2;
  localparam int unsigned LN [NL+1] = '{400, 128, 10};
  localparam int T_MAX = 81;
  localparam int N_INF = 2;
  localparam int W_LO [NL] = '{-5, -6};
  localparam int W_HI [NL] = '{4, 6};
  localparam int P_OVF = 75;
  localparam int P_GATE = 90;
  localparam int P_RDY = 80;
  localparam int CYC_MAX = 89000;
  localparam int WATCHDOG = 2000000;

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

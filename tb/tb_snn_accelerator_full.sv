// tb_snn_accelerator_full: one inference through the accelerator at its
// default size (400 input trains, layers of 800, 512, 256 and 10 neurons,
// 124 SRAM blocks). Input trains are 81 time steps long, the length of one
// serialized 9x9 patch. Weights and spikes are random; the spikes of every
// layer are checked against the reference model in absolute time.
module tb_snn_accelerator_full;
  localparam int NL = 4;
  localparam int unsigned LN [NL+1] = '{400, 800, 512, 256, 10};
  localparam int T_MAX = 81;
  localparam int N_INF = 1;
  localparam int W_LO [NL] = '{-5, -6, -6, -6};
  localparam int W_HI [NL] = '{4, 5, 5, 6};
  localparam int P_OVF = 75;
  localparam int P_GATE = 90;
  localparam int P_RDY = 90;
  // The paper reports about 6000 inferences per second at 538 MHz, which
  // is about 89,000 cycles per inference.
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

  snn_accelerator dut (.*);

endmodule

// tb_weight_memory: a 20-synapse, 30-neuron weights memory (3 SRAM blocks,
// weights straddling block borders) is loaded word by word through the write
// port; reads by synapse index must return every neuron's weight one cycle
// after the request, also for back-to-back reads.
module tb_weight_memory;
  import snn_pkg::*;

  localparam int N_IN = 20;
  localparam int N_OUT = 30;
  localparam int NB = (N_OUT * W_W + SRAM_WIDTH - 1) / SRAM_WIDTH;

  logic clk = 1'b0;
  logic rd_en, wr_en;
  logic [$clog2(N_IN)-1:0] rd_addr;
  logic [N_OUT-1:0][W_W-1:0] rd_weights;
  logic [$clog2(NB)-1:0] wr_bank;
  logic [9:0] wr_addr;
  logic [63:0] wr_data;

  weight_memory #(.N_IN(N_IN), .N_OUT(N_OUT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int w [N_IN][N_OUT];

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_bank = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < N_IN; i++) begin
      logic [NB*64-1:0] row;
      row = '0;
      for (int n = 0; n < N_OUT; n++) begin
        w[i][n] = int'($urandom_range((1 << W_W) - 1));
        row[n*W_W +: W_W] = W_W'(w[i][n]);
      end
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = $clog2(NB)'(b); wr_addr = 10'(i); wr_data = row[b*64 +: 64];
      end
    end
    @(negedge clk);
    wr_en = 0;
    for (int r = 0; r < 500; r++) begin
      int a;
      a = int'($urandom_range(N_IN - 1));
      rd_en = 1; rd_addr = $clog2(N_IN)'(a);
      @(negedge clk);
      rd_en = 1'b0;
      for (int n = 0; n < N_OUT; n++)
        check(int'(rd_weights[n]) == w[a][n], $sformatf("row %0d neuron %0d", a, n));
      if ($urandom_range(1) == 0) @(negedge clk);
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

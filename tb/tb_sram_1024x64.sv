// tb_sram_1024x64: writes random words to random addresses, reads them back
// (read data one cycle after the request), and checks that the read data is
// held while ce is low and that a write does not change the read data.
module tb_sram_1024x64;
  logic clk = 1'b0;
  logic ce, we;
  logic [9:0] addr;
  logic [63:0] wdata, rdata;

  sram_1024x64 dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [63:0] model [1024];
  bit written [1024];

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  initial begin
    ce = 0; we = 0; addr = 0; wdata = 0;
    for (int k = 0; k < 1024; k++) begin
      @(negedge clk);
      ce = 1; we = 1; addr = 10'(k); wdata = {$urandom, $urandom};
      model[k] = wdata;
    end
    for (int r = 0; r < 4000; r++) begin
      int op;
      op = int'($urandom_range(3));
      @(negedge clk);
      addr = 10'($urandom_range(1023));
      if (op == 0) begin
        ce = 1; we = 1; wdata = {$urandom, $urandom};
        model[addr] = wdata;
      end else begin
        logic [63:0] exp_d;
        logic [63:0] held;
        ce = 1; we = 0;
        exp_d = model[addr];
        @(negedge clk);
        check(rdata == exp_d, $sformatf("read %0d", addr));
        held = rdata;
        ce = 0; addr = 10'($urandom_range(1023));
        @(negedge clk);
        check(rdata == held, "read data not held");
        ce = 1; we = 1; wdata = {$urandom, $urandom};
        model[addr] = wdata;
        @(negedge clk);
        check(rdata == held, "write changed the read data");
        ce = 0; we = 0;
      end
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

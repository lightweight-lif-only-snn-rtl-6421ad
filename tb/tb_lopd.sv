// tb_lopd: random and directed bit vectors (single bits, all ones, none,
// sparse and dense) on an 800-bit LOPD and on a 13-bit one; the index must
// be the lowest set bit and any must be the OR of all bits.
module tb_lopd;
  localparam int N1 = 800;
  localparam int N2 = 13;

  logic [N1-1:0] b1;
  logic [N2-1:0] b2;
  logic any1, any2;
  logic [$clog2(N1)-1:0] i1;
  logic [$clog2(N2)-1:0] i2;

  lopd #(.N(N1)) dut  (.bits(b1), .any(any1), .idx(i1));
  lopd #(.N(N2)) dut2 (.bits(b2), .any(any2), .idx(i2));

  int checks = 0, failures = 0;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  function automatic int lowest1(logic [N1-1:0] v);
    for (int k = 0; k < N1; k++) if (v[k]) return k;
    return -1;
  endfunction
  function automatic int lowest2(logic [N2-1:0] v);
    for (int k = 0; k < N2; k++) if (v[k]) return k;
    return -1;
  endfunction

  task automatic apply(logic [N1-1:0] v1, logic [N2-1:0] v2);
    int e1, e2;
    b1 = v1; b2 = v2;
    #1;
    e1 = lowest1(v1);
    e2 = lowest2(v2);
    check(any1 == (e1 >= 0) && (e1 < 0 || int'(i1) == e1), $sformatf("N=800: idx %0d expected %0d", i1, e1));
    check(any2 == (e2 >= 0) && (e2 < 0 || int'(i2) == e2), $sformatf("N=13: idx %0d expected %0d", i2, e2));
  endtask

  initial begin
    logic [N1-1:0] v;
    apply('0, '0);
    apply('1, '1);
    for (int k = 0; k < N1; k++) apply(N1'(1) << k, N2'(1) << (k % N2));
    for (int k = 0; k < N1; k++) apply(~((N1'(1) << k) - 1), ~((N2'(1) << (k % N2)) - 1));
    for (int r = 0; r < 2000; r++) begin
      int dens;
      dens = int'($urandom_range(200));
      for (int k = 0; k < N1; k++) v[k] = ($urandom_range(999) < dens);
      apply(v, N2'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

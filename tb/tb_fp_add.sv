// tb_fp_add: random single-precision sums compared bit-exactly with the
// correctly rounded result (exact sum in double precision, then rounded
// to single), plus signed zeros, infinities, NaN, overflow and underflow.
module tb_fp_add;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] a, b, y;
  fp_add dut (.*);

  task automatic expect_eq(input logic [31:0] e, input string what);
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      $display("ERROR: %s: %h + %h = %h, expected %h", what, a, b, y, e);
    end
  endtask

  function automatic logic [31:0] rnd(int emin, int emax);
    return {1'($urandom), 8'(emin + int'($urandom % (emax - emin + 1))), 23'($urandom)};
  endfunction

  initial begin
    #100000;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    // exponents within 28 of each other: the double sum is exact
    for (int t = 0; t < 30000; t++) begin
      int ea;
      ea = 60 + int'($urandom % 120);
      a = rnd(ea, ea); b = rnd(ea - int'($urandom % 28), ea);
      if ($urandom % 2) begin logic [31:0] tmp; tmp = a; a = b; b = tmp; end
      expect_eq(r2f(f2r(a) + f2r(b)), "random");
    end
    // cancellation: nearly equal magnitudes, opposite signs
    for (int t = 0; t < 5000; t++) begin
      a = rnd(100, 100); b = {~a[31], a[30:8], 8'($urandom)};
      expect_eq(r2f(f2r(a) + f2r(b)), "cancellation");
    end
    a = 32'h3F80_0000; b = 32'h4000_0000; expect_eq(32'h4040_0000, "1+2");
    a = 32'h3F80_0000; b = 32'hBF80_0000; expect_eq(32'h0000_0000, "1-1");
    a = 32'h8000_0000; b = 32'h8000_0000; expect_eq(32'h8000_0000, "-0+-0");
    a = 32'h8000_0000; b = 32'h0000_0000; expect_eq(32'h0000_0000, "-0+0");
    a = 32'h4000_0000; b = 32'h0000_0000; expect_eq(32'h4000_0000, "2+0");
    a = 32'h4B80_0000; b = 32'h3F80_0000; expect_eq(32'h4B80_0000, "2^24+1 ties to even");
    a = 32'h4B80_0000; b = 32'h4000_0000; expect_eq(32'h4B80_0001, "2^24+2");
    a = 32'h4B80_0000; b = 32'h4040_0000; expect_eq(32'h4B80_0002, "2^24+3 ties to even");
    a = 32'h7F80_0000; b = 32'hFF80_0000; expect_eq(32'h7FC0_0000, "inf-inf");
    a = 32'h7F80_0000; b = 32'h3F80_0000; expect_eq(32'h7F80_0000, "inf+1");
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; expect_eq(32'h7F80_0000, "overflow");
    a = 32'h3F80_0000; b = 32'h2000_0000; expect_eq(32'h3F80_0000, "far smaller operand");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fp_mul: random single-precision products compared bit-exactly with the
// correctly rounded result (exact product in double precision, then rounded
// to single), plus signed zeros, infinities, NaN, overflow and underflow.
module tb_fp_mul;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] a, b, y;
  fp_mul dut (.*);

  task automatic expect_eq(input logic [31:0] e, input string what);
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      $display("ERROR: %s: %h * %h = %h, expected %h", what, a, b, y, e);
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
    for (int t = 0; t < 20000; t++) begin
      a = rnd(64, 190); b = rnd(64, 190);
      expect_eq(r2f(f2r(a) * f2r(b)), "random");
    end
    a = 32'h3F80_0000; b = 32'h4000_0000; expect_eq(32'h4000_0000, "1*2");
    a = 32'hBFC0_0000; b = 32'h4040_0000; expect_eq(32'hC090_0000, "-1.5*3");
    a = 32'h0000_0000; b = 32'hC000_0000; expect_eq(32'h8000_0000, "0*-2");
    a = 32'h7F80_0000; b = 32'hC000_0000; expect_eq(32'hFF80_0000, "inf*-2");
    a = 32'h7F80_0000; b = 32'h0000_0000; expect_eq(32'h7FC0_0000, "inf*0");
    a = 32'h7FC0_0001; b = 32'h3F80_0000; expect_eq(32'h7FC0_0000, "nan*1");
    a = 32'h7F00_0000; b = 32'h7F00_0000; expect_eq(32'h7F80_0000, "overflow");
    a = 32'h0080_0000; b = 32'h0080_0000; expect_eq(32'h0000_0000, "underflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

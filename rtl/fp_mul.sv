// fp_mul: IEEE-754 single-precision multiplier, combinational.
//
// y = a * b with round-to-nearest-even. Subnormal inputs are read as zero
// and results that would be subnormal are flushed to a signed zero. A NaN
// input, or infinity times zero, gives the quiet NaN 0x7FC00000; overflow
// gives a signed infinity. The paper uses the FPGA vendor's floating-point
// operator here; this is a plain RTL stand-in with the same function. The
// float PE registers its output, so the multiply has one cycle of latency
// there.
module fp_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, up;
  logic [24:0] mant_r;
  logic signed [10:0] ey;
  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    sa = a[31];  sb = b[31];  sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    a_nan  = (ea == 8'hFF) && (a[22:0] != 0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);

    prod = ma * mb;
    ey   = 11'(ea) + 11'(eb) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      ey     = ey + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    up     = guard && (sticky || mant[0]);
    mant_r = {1'b0, mant} + 25'(up);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      ey     = ey + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (ey >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};
    else if (ey <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, ey[7:0], mant_r[22:0]};
  end
endmodule

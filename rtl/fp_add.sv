// fp_add: IEEE-754 single-precision adder, combinational.
//
// y = a + b with round-to-nearest-even. The smaller operand is aligned to the
// larger one with 26 extra low bits plus a sticky bit, added or subtracted,
// renormalised by a leading-one search and rounded. Subnormal inputs read as
// zero and subnormal results flush to zero; an exact zero sum is +0 unless
// both operands are -0. NaN inputs, or infinities of opposite sign, give
// 0x7FC00000. The paper uses the FPGA vendor's floating-point adder; this
// is a plain RTL stand-in. The accumulation pipeline that gives it an
// effective latency of FADD_LATENCY cycles lives in pe_float.
module fp_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [31:0] op_big, op_small;
  logic [7:0]  eb_, es_;
  logic [7:0]  d;
  logic [50:0] m_big, m_small, m_small_sh;
  logic        sticky;
  logic [51:0] sum;
  logic [5:0]  lead;
  logic [51:0] norm;
  logic [23:0] mant;
  logic        guard, st2, up;
  logic [24:0] mant_r;
  logic signed [10:0] ey;
  logic        sub;

  always_comb begin
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != 0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == 0);
    a_zero = (a[30:23] == 8'h00);
    b_zero = (b[30:23] == 8'h00);

    // Order by magnitude so that the larger operand sets the exponent.
    if (a[30:0] >= b[30:0]) begin op_big = a; op_small = b; end
    else                    begin op_big = b; op_small = a; end
    eb_ = op_big[30:23];
    es_ = op_small[30:23];
    d   = eb_ - es_;
    sub = op_big[31] ^ op_small[31];

    // {hidden, 23-bit fraction, 26 guard bits, 1 sticky bit}
    m_big   = {1'b1, op_big[22:0], 27'd0};
    m_small = {1'b1, op_small[22:0], 27'd0};
    if (d >= 8'd50) begin
      m_small_sh = 51'd1;
    end else begin
      m_small_sh = m_small >> d;
      sticky     = 1'b0;
      for (int k = 0; k < 51; k++)
        if (k < int'(d) && m_small[k]) sticky = 1'b1;
      m_small_sh[0] = m_small_sh[0] | sticky;
    end
    sticky = 1'b0;

    sum = sub ? ({1'b0, m_big} - {1'b0, m_small_sh})
              : ({1'b0, m_big} + {1'b0, m_small_sh});

    lead = 6'd0;
    for (int k = 0; k < 52; k++)
      if (sum[k]) lead = 6'(k);

    norm   = sum << (6'd51 - lead);
    mant   = norm[51:28];
    guard  = norm[27];
    st2    = |norm[26:0];
    up     = guard && (st2 || mant[0]);
    mant_r = {1'b0, mant} + 25'(up);
    ey     = 11'(eb_) + 11'(lead) - 11'sd50;
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      ey     = ey + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31])))
      y = 32'h7FC0_0000;
    else if (a_inf)
      y = a;
    else if (b_inf)
      y = b;
    else if (a_zero && b_zero)
      y = {a[31] & b[31], 31'd0};
    else if (a_zero)
      y = b;
    else if (b_zero)
      y = a;
    else if (sum == 52'd0)
      y = 32'd0;
    else if (ey >= 11'sd255)
      y = {op_big[31], 8'hFF, 23'd0};
    else if (ey <= 11'sd0)
      y = {op_big[31], 31'd0};
    else
      y = {op_big[31], ey[7:0], mant_r[22:0]};
  end
endmodule

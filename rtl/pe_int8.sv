// pe_int8: int8 processing element (the int8 variant of the reconfigurable
// compute region).
//
// Each accepted element carries one 32-bit A word and the PE's 32-bit B word,
// each packing four int8 values (byte z = bits 8z+7:8z). The PE adds
//   sum_z A[z] * (B[z] - zero_point_rhs)
// to a 32-bit accumulator in the same cycle, which is the paper's int8
// kernel with its four multipliers and adder. When the element is flagged
// last, the completed sum is registered to `res` with res_valid high for one
// cycle and the accumulator restarts from zero, so a new row can follow at
// once: one element per cycle with no gaps (in_ready is always high).
// Arithmetic wraps modulo 2^32 like the C reference. in_ready is a constant
// 1; it is kept so that both PE variants share one interface.
module pe_int8 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_last,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] zp,
  output logic        in_ready,
  output logic        res_valid,
  output logic [31:0] res
);
  logic [31:0] acc;
  logic [31:0] dot;

  assign in_ready = 1'b1;

  always_comb begin
    dot = '0;
    for (int z = 0; z < 4; z++)
      dot = dot + 32'($signed(a[8*z +: 8]) * (32'($signed(b[8*z +: 8])) - $signed(zp)));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= in_valid && in_last;
      if (in_valid) begin
        if (in_last) begin
          res <= acc + dot;
          acc <= '0;
        end else begin
          acc <= acc + dot;
        end
      end
    end
  end
endmodule

// scale_unit: Stage 3 (SCALE), the quantizer/scaling unit of a FADES core.
//
// Reads the PE result FIFOs row by row: for tile t (columns col0..col0+tc-1)
// and row i it takes FIFO 0, 1, .. tc-1 in turn, one value per cycle, and
// sends {value, row i, column col0+j} to Stage 4. In int8 mode with SCALE=1
// each 32-bit accumulator x of row i (filter i) is requantised as in the
// TensorFlow Lite int8 specification, with that row's QM, shift and bias:
//   v = x + bias
//   v = RoundingDivideByPOT(SaturatingRoundingDoublingHighMul(v << max(shift,0), QM),
//                           max(-shift,0))
//   y = min(max(v, clamp_min), clamp_max)        (sign-extended to 32 bits)
// The row's parameters are popped after its last column. In float mode, or
// with SCALE=0, the raw values are forwarded unchanged. The per-filter
// multiplier/shift and the clamp follow the paper; using no output zero
// point and treating bias as per-row are this design's readings.
// A start pulse (re)arms the unit for a new matrix of n_rows x p_cols.
module scale_unit
  import fades_pkg::*;
#(
  parameter int unsigned PES       = 32,
  parameter prec_e       PRECISION = PREC_INT8,
  parameter bit          SCALE     = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 fp_sel,
  input  logic [31:0]          n_rows,
  input  logic [31:0]          p_cols,
  input  logic signed [7:0]    clamp_min,
  input  logic signed [7:0]    clamp_max,
  input  logic [PES-1:0]       res_valid,
  output logic [PES-1:0]       res_ready,
  input  logic [PES-1:0][31:0] res_data,
  input  logic                 param_valid,
  output logic                 param_ready,
  input  param_t               param,
  output logic                 out_valid,
  input  logic                 out_ready,
  output out_t                 out,
  output logic                 clamped
);
  // Scaling applies to int8 runs: always in the int8 build, never in the
  // float build, and per run (fp_sel low) in the VFX build.
  logic do_scale;
  assign do_scale = SCALE && ((PRECISION == PREC_INT8) || ((PRECISION == PREC_VFX) && !fp_sel));

  // ---- TensorFlow Lite fixed-point helpers (gemmlowp semantics)
  function automatic logic signed [31:0] srdhm(input logic signed [31:0] a,
                                               input logic signed [31:0] b);
    logic signed [63:0] ab, q;
    logic signed [63:0] nudge;
    logic signed [63:0] quot;
    if (a == 32'sh8000_0000 && b == 32'sh8000_0000) return 32'sh7FFF_FFFF;
    ab    = 64'(a) * 64'(b);
    nudge = (ab >= 0) ? 64'sd1073741824 : 64'sd1 - 64'sd1073741824;
    q     = ab + nudge;
    // division by 2^31 truncating toward zero
    quot  = q >>> 31;
    if (q < 0 && q[30:0] != 0) quot = quot + 1;
    return quot[31:0];
  endfunction

  function automatic logic signed [31:0] rdbpot(input logic signed [31:0] x,
                                                input logic [4:0] e);
    logic signed [31:0] mask, rem, thr;
    mask = (32'sd1 <<< e) - 32'sd1;
    rem  = x & mask;
    thr  = (mask >>> 1) + ((x < 0) ? 32'sd1 : 32'sd0);
    return (x >>> e) + ((rem > thr) ? 32'sd1 : 32'sd0);
  endfunction

  // ---- iteration over tiles, rows and columns
  logic        running;
  logic [31:0] col0, row, lane, tc;
  logic [31:0] x;
  logic        need_param, fire;
  logic signed [31:0] biased, scaled, lshifted;
  logic signed [31:0] sh;
  logic [4:0]  ls, rs;
  logic signed [31:0] y;

  assign tc         = ((p_cols - col0) < PES) ? (p_cols - col0) : PES;
  assign x          = res_data[lane[$clog2(PES)-1:0]];
  assign need_param = do_scale;
  assign fire       = running && res_valid[lane[$clog2(PES)-1:0]] && out_ready
                      && (!need_param || param_valid);

  always_comb begin
    sh       = $signed(param.shift);
    ls       = (sh > 0) ? ((sh > 31) ? 5'd31 : sh[4:0]) : 5'd0;
    rs       = (sh < 0) ? ((sh < -31) ? 5'd31 : 5'(-sh)) : 5'd0;
    biased   = $signed(x) + $signed(param.bias);
    lshifted = biased <<< ls;
    scaled   = rdbpot(srdhm(lshifted, $signed(param.qm)), rs);
    clamped  = 1'b0;
    if (scaled > 32'(clamp_max))      begin y = 32'(clamp_max); clamped = fire; end
    else if (scaled < 32'(clamp_min)) begin y = 32'(clamp_min); clamped = fire; end
    else                                   y = scaled;
  end

  always_comb begin
    res_ready = '0;
    res_ready[lane[$clog2(PES)-1:0]] = fire;
  end
  assign param_ready = fire && need_param && (lane == tc - 1);
  assign out_valid   = running && res_valid[lane[$clog2(PES)-1:0]] && (!need_param || param_valid);
  assign out.data    = do_scale ? y : x;
  assign out.row     = row;
  assign out.col     = col0 + lane;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      col0    <= '0;
      row     <= '0;
      lane    <= '0;
    end else if (start) begin
      running <= (n_rows != 0) && (p_cols != 0);
      col0    <= '0;
      row     <= '0;
      lane    <= '0;
    end else if (fire) begin
      if (lane == tc - 1) begin
        lane <= '0;
        if (row == n_rows - 1) begin
          row <= '0;
          if (col0 + PES >= p_cols) running <= 1'b0;
          col0 <= col0 + PES;
        end else begin
          row <= row + 1;
        end
      end else begin
        lane <= lane + 1;
      end
    end
  end
endmodule

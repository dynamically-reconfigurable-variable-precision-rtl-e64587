// fades_core: one FADES (Fused Architecture for DEnse and Sparse matrices)
// core computing C = A x B for TensorFlow Lite.
//
// A is N x M (the weights, dense in GEMM mode or CSR in SPMM mode), B is the
// dense M x P activation matrix and C the N x P result. Four dataflow stages
// linked by FIFOs run concurrently:
//   1 read_unit    loads a tile of PES columns of B into b_buffer and streams
//                  A (raw or CSR) plus per-row scaling parameters;
//   2 compute_unit one PE per tile column, all PEs fed in the same cycle;
//   3 scale_unit   TensorFlow Lite int8 requantisation and clamping
//                  (raw pass-through in float mode);
//   4 write_unit   writes C, column-major when TRANS=1.
// Irregular (column-index driven) accesses only touch the on-chip B tile.
//
// Interface: the configuration ports of the paper's block diagram (mode,
// N/M/P, bias_count, clamp min/max) plus zero_point_rhs are sampled on the
// `start` pulse; `done` rises when all N*P values of C have been written and
// holds until the next start. Each array (column_index, row_ptr, A_values,
// B_values, QM, shift, bias) has its own read port: a request {valid, word
// address} accepted with *_req_ready, answered in order on *_rsp any number
// of cycles later. C leaves on c_wr {valid, address, data} with c_wr_ready.
// In int8 mode a 32-bit word holds four int8 values along M, so A and B hold
// M/4 words per A row / per B column and M must be a multiple of 4.
// PRECISION fixes the arithmetic variant at build time (int8 or float), as
// the two variants are swapped by partial reconfiguration in the paper;
// PRECISION = PREC_VFX builds both and prec_fp, sampled on start, picks float
// (1) or int8 (0) for that run, the paper's multiplexed float-int8 build.
// prec_fp is ignored by the other builds.
// EN_SPMM/EN_GEMM, TRANS and SCALE are the paper's compile-time options.
// The event outputs (result-FIFO stall, float row-drain stall, clamp) are
// for performance counting; ev_stall_pe is constant 0 in the int8 build.
module fades_core
  import fades_pkg::*;
#(
  parameter int unsigned PES          = 32,
  parameter prec_e       PRECISION    = PREC_INT8,
  parameter int unsigned DEPTH        = 1024,
  parameter int unsigned FADD_LATENCY = FADD_LATENCY_DEFAULT,
  parameter bit          EN_SPMM      = 1'b1,
  parameter bit          EN_GEMM      = 1'b1,
  parameter bit          TRANS        = 1'b1,
  parameter bit          SCALE        = 1'b1,
  parameter int unsigned FIFO_DEPTH   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  output logic              busy,
  // configuration
  input  mode_e             mode,
  input  logic [31:0]       n,
  input  logic [31:0]       m,
  input  logic [31:0]       p,
  input  logic [31:0]       bias_count,
  input  logic signed [7:0] clamp_min,
  input  logic signed [7:0] clamp_max,
  input  logic [31:0]       zero_point_rhs,
  input  logic              prec_fp,
  // data ports
  output rd_req_t column_index_req, input logic column_index_req_ready, input rd_rsp_t column_index_rsp,
  output rd_req_t row_ptr_req,      input logic row_ptr_req_ready,      input rd_rsp_t row_ptr_rsp,
  output rd_req_t a_values_req,     input logic a_values_req_ready,     input rd_rsp_t a_values_rsp,
  output rd_req_t b_values_req,     input logic b_values_req_ready,     input rd_rsp_t b_values_rsp,
  output rd_req_t qm_req,           input logic qm_req_ready,           input rd_rsp_t qm_rsp,
  output rd_req_t shift_req,        input logic shift_req_ready,        input rd_rsp_t shift_rsp,
  output rd_req_t bias_req,         input logic bias_req_ready,         input rd_rsp_t bias_rsp,
  output wr_req_t c_wr,             input logic c_wr_ready,
  // event flags for performance monitoring
  output logic              ev_stall_fifo,
  output logic              ev_stall_pe,
  output logic              ev_clamp
);
  // ------------------------------------------------ configuration registers
  mode_e             r_mode;
  logic [31:0]       r_n, r_mw, r_p, r_zp;
  logic              r_bias_en, r_fp;
  logic              fp_run;
  logic signed [7:0] r_cmin, r_cmax;
  logic              start_q;
  mode_e             mode_sel;

  always_comb begin
    if (EN_SPMM && EN_GEMM) mode_sel = mode;
    else if (EN_SPMM)       mode_sel = MODE_SPMM;
    else                    mode_sel = MODE_GEMM;
  end

  assign fp_run = (PRECISION == PREC_FP32) || ((PRECISION == PREC_VFX) && prec_fp);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_mode <= MODE_GEMM; r_n <= '0; r_mw <= '0; r_p <= '0; r_zp <= '0;
      r_bias_en <= 1'b0; r_fp <= 1'b0; r_cmin <= '0; r_cmax <= '0; start_q <= 1'b0;
    end else begin
      start_q <= start && !busy;
      if (start && !busy) begin
        r_mode    <= mode_sel;
        r_n       <= n;
        r_fp      <= fp_run;
        r_mw      <= fp_run ? m : (m >> 2);
        r_p       <= p;
        r_zp      <= zero_point_rhs;
        r_bias_en <= (bias_count != 0);
        r_cmin    <= clamp_min;
        r_cmax    <= clamp_max;
      end
    end
  end

  logic wr_done, rd_busy, running;
  always_ff @(posedge clk) begin
    if (!rst_n)                 running <= 1'b0;
    else if (start && !busy)    running <= 1'b1;
    else if (!start_q && wr_done) running <= 1'b0;
  end
  assign busy = running;
  assign done = wr_done && !running;

  // ------------------------------------------------------------- stage 1
  localparam int unsigned RW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(PES);
  logic          b_wr_en;
  logic [RW-1:0] b_wr_row;
  logic [LW-1:0] b_wr_lane;
  logic [31:0]   b_wr_data;
  logic          b_rd_en;
  logic [RW-1:0] b_rd_row;
  logic [PES-1:0][31:0] b_rd_data;
  logic          tile_ready, tile_done;
  logic [31:0]   tile_cols;
  logic          e_valid, e_ready, f_valid, f_ready;
  elem_t         e_data, f_data;
  logic          pr_valid, pr_ready, pf_valid, pf_ready;
  param_t        pr_data, pf_data;

  read_unit #(.PES(PES), .DEPTH(DEPTH), .CH_DEPTH(FIFO_DEPTH)) u_read (
    .clk, .rst_n, .start(start_q), .mode(r_mode), .n_rows(r_n), .mw(r_mw), .p_cols(r_p),
    .params_en(!r_fp && SCALE), .bias_en(r_bias_en), .busy(rd_busy),
    .rp_req(row_ptr_req),      .rp_req_ready(row_ptr_req_ready),      .rp_rsp(row_ptr_rsp),
    .ci_req(column_index_req), .ci_req_ready(column_index_req_ready), .ci_rsp(column_index_rsp),
    .av_req(a_values_req),     .av_req_ready(a_values_req_ready),     .av_rsp(a_values_rsp),
    .bv_req(b_values_req),     .bv_req_ready(b_values_req_ready),     .bv_rsp(b_values_rsp),
    .qm_req(qm_req),           .qm_req_ready(qm_req_ready),           .qm_rsp(qm_rsp),
    .sh_req(shift_req),        .sh_req_ready(shift_req_ready),        .sh_rsp(shift_rsp),
    .bi_req(bias_req),         .bi_req_ready(bias_req_ready),         .bi_rsp(bias_rsp),
    .b_wr_en, .b_wr_row, .b_wr_lane, .b_wr_data,
    .tile_ready, .tile_cols, .tile_done,
    .elem_valid(e_valid), .elem_ready(e_ready), .elem(e_data),
    .param_valid(pr_valid), .param_ready(pr_ready), .param(pr_data)
  );

  b_buffer #(.PES(PES), .DEPTH(DEPTH)) u_bbuf (
    .clk, .wr_en(b_wr_en), .wr_row(b_wr_row), .wr_lane(b_wr_lane), .wr_data(b_wr_data),
    .rd_en(b_rd_en), .rd_row(b_rd_row), .rd_data(b_rd_data)
  );

  stream_fifo #(.WIDTH($bits(elem_t)), .DEPTH(FIFO_DEPTH)) u_elem_fifo (
    .clk, .rst_n, .in_valid(e_valid), .in_ready(e_ready), .in_data(e_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count()
  );

  stream_fifo #(.WIDTH($bits(param_t)), .DEPTH(FIFO_DEPTH)) u_param_fifo (
    .clk, .rst_n, .in_valid(pr_valid), .in_ready(pr_ready), .in_data(pr_data),
    .out_valid(pf_valid), .out_ready(pf_ready), .out_data(pf_data), .count()
  );

  // ------------------------------------------------------------- stage 2
  logic [PES-1:0]       res_valid, res_ready;
  logic [PES-1:0][31:0] res_data;

  compute_unit #(.PES(PES), .DEPTH(DEPTH), .PRECISION(PRECISION),
                 .FADD_LATENCY(FADD_LATENCY), .RES_DEPTH(FIFO_DEPTH)) u_compute (
    .clk, .rst_n, .n_rows(r_n), .zp(r_zp), .fp_sel(r_fp),
    .tile_ready, .tile_cols, .tile_done,
    .elem_valid(f_valid), .elem_ready(f_ready), .elem(f_data),
    .b_rd_en, .b_rd_row, .b_rd_data,
    .res_valid, .res_ready, .res_data,
    .stall_fifo(ev_stall_fifo), .stall_pe(ev_stall_pe)
  );

  // ------------------------------------------------------------- stage 3
  logic s_valid, s_ready, o_valid, o_ready;
  out_t s_data, o_data;

  scale_unit #(.PES(PES), .PRECISION(PRECISION), .SCALE(SCALE)) u_scale (
    .clk, .rst_n, .start(start_q), .fp_sel(r_fp), .n_rows(r_n), .p_cols(r_p),
    .clamp_min(r_cmin), .clamp_max(r_cmax),
    .res_valid, .res_ready, .res_data,
    .param_valid(pf_valid), .param_ready(pf_ready), .param(pf_data),
    .out_valid(s_valid), .out_ready(s_ready), .out(s_data), .clamped(ev_clamp)
  );

  stream_fifo #(.WIDTH($bits(out_t)), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data), .count()
  );

  // ------------------------------------------------------------- stage 4
  write_unit #(.TRANS(TRANS)) u_write (
    .clk, .rst_n, .start(start_q), .n_rows(r_n), .p_cols(r_p),
    .in_valid(o_valid), .in_ready(o_ready), .in(o_data),
    .c_wr, .c_wr_ready, .done(wr_done)
  );

  // The read unit finishes before the last results are written.
  assert property (@(posedge clk) disable iff (!rst_n) done |-> !rd_busy);
endmodule

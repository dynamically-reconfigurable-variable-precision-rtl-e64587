// fades_top: the FADES accelerator, NCORES independent cores.
//
// The cores share the start pulse and the run configuration (mode, M, P,
// bias_count, clamp range, zero_point_rhs) but each has its own set of
// memory ports and its own row count n[c]. The host divides the sparse
// matrix A into NCORES blocks of rows (with their row_ptr, QM, shift and bias
// slices) and points core c's ports at block c, while every core reads the
// whole of B; the cores' C blocks together form the result. More cores give
// more independent memory ports, which is what helps at high sparsity when
// the work becomes bound by data movement. `done` is high when every core
// has finished. prec_fp selects float or int8 per run in the VFX build
// (PRECISION = PREC_VFX) and is ignored otherwise. Splitting A by rows follows the paper; the shared start and
// the combined done are this design's.
// Ports are arrays indexed by core; each core's ports behave as described in
// fades_core.
module fades_top
  import fades_pkg::*;
#(
  parameter int unsigned NCORES       = 1,
  parameter int unsigned PES          = 32,
  parameter prec_e       PRECISION    = PREC_INT8,
  parameter int unsigned DEPTH        = 1024,
  parameter int unsigned FADD_LATENCY = FADD_LATENCY_DEFAULT,
  parameter bit          EN_SPMM      = 1'b1,
  parameter bit          EN_GEMM      = 1'b1,
  parameter bit          TRANS        = 1'b1,
  parameter bit          SCALE        = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  output logic              busy,
  input  mode_e             mode,
  input  logic [NCORES-1:0][31:0] n,
  input  logic [31:0]       m,
  input  logic [31:0]       p,
  input  logic [31:0]       bias_count,
  input  logic signed [7:0] clamp_min,
  input  logic signed [7:0] clamp_max,
  input  logic [31:0]       zero_point_rhs,
  input  logic              prec_fp,
  output rd_req_t [NCORES-1:0] column_index_req, input logic [NCORES-1:0] column_index_req_ready, input rd_rsp_t [NCORES-1:0] column_index_rsp,
  output rd_req_t [NCORES-1:0] row_ptr_req,      input logic [NCORES-1:0] row_ptr_req_ready,      input rd_rsp_t [NCORES-1:0] row_ptr_rsp,
  output rd_req_t [NCORES-1:0] a_values_req,     input logic [NCORES-1:0] a_values_req_ready,     input rd_rsp_t [NCORES-1:0] a_values_rsp,
  output rd_req_t [NCORES-1:0] b_values_req,     input logic [NCORES-1:0] b_values_req_ready,     input rd_rsp_t [NCORES-1:0] b_values_rsp,
  output rd_req_t [NCORES-1:0] qm_req,           input logic [NCORES-1:0] qm_req_ready,           input rd_rsp_t [NCORES-1:0] qm_rsp,
  output rd_req_t [NCORES-1:0] shift_req,        input logic [NCORES-1:0] shift_req_ready,        input rd_rsp_t [NCORES-1:0] shift_rsp,
  output rd_req_t [NCORES-1:0] bias_req,         input logic [NCORES-1:0] bias_req_ready,         input rd_rsp_t [NCORES-1:0] bias_rsp,
  output wr_req_t [NCORES-1:0] c_wr,             input logic [NCORES-1:0] c_wr_ready,
  output logic [NCORES-1:0] ev_stall_fifo,
  output logic [NCORES-1:0] ev_stall_pe,
  output logic [NCORES-1:0] ev_clamp
);
  logic [NCORES-1:0] core_done, core_busy;

  for (genvar c = 0; c < int'(NCORES); c++) begin : g_core
    fades_core #(
      .PES(PES), .PRECISION(PRECISION), .DEPTH(DEPTH), .FADD_LATENCY(FADD_LATENCY),
      .EN_SPMM(EN_SPMM), .EN_GEMM(EN_GEMM), .TRANS(TRANS), .SCALE(SCALE)
    ) u_core (
      .clk, .rst_n, .start, .done(core_done[c]), .busy(core_busy[c]),
      .mode, .n(n[c]), .m, .p, .bias_count, .clamp_min, .clamp_max, .zero_point_rhs, .prec_fp,
      .column_index_req(column_index_req[c]), .column_index_req_ready(column_index_req_ready[c]), .column_index_rsp(column_index_rsp[c]),
      .row_ptr_req(row_ptr_req[c]),   .row_ptr_req_ready(row_ptr_req_ready[c]),   .row_ptr_rsp(row_ptr_rsp[c]),
      .a_values_req(a_values_req[c]), .a_values_req_ready(a_values_req_ready[c]), .a_values_rsp(a_values_rsp[c]),
      .b_values_req(b_values_req[c]), .b_values_req_ready(b_values_req_ready[c]), .b_values_rsp(b_values_rsp[c]),
      .qm_req(qm_req[c]),             .qm_req_ready(qm_req_ready[c]),             .qm_rsp(qm_rsp[c]),
      .shift_req(shift_req[c]),       .shift_req_ready(shift_req_ready[c]),       .shift_rsp(shift_rsp[c]),
      .bias_req(bias_req[c]),         .bias_req_ready(bias_req_ready[c]),         .bias_rsp(bias_rsp[c]),
      .c_wr(c_wr[c]),                 .c_wr_ready(c_wr_ready[c]),
      .ev_stall_fifo(ev_stall_fifo[c]), .ev_stall_pe(ev_stall_pe[c]), .ev_clamp(ev_clamp[c])
    );
  end

  assign done = &core_done;
  assign busy = |core_busy;
endmodule

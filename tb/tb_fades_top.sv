// tb_fades_top: end-to-end test of the FADES accelerator.
//
// Three builds at reduced sizes run side by side: an int8 build with two
// cores of 8 PEs, a float build with one core of 4 PEs (the two variants the
// design swaps by reconfiguration), and a float-int8 (VFX) build of 4 PEs
// whose precision is switched between runs. Each runs GEMM and SPMM products of
// several shapes, with multi-tile and partial last tiles, empty CSR rows,
// bias on and off, a clamp range narrow enough to saturate, and random
// stalls on every memory port. Every element of C is compared with a
// reference, and the test fails if any of the design's mechanisms (dense
// and sparse modes, both precisions, partial tiles, empty rows, result-FIFO
// backpressure, the float end-of-row drain, clamping, multi-core) never
// occurred (including int8 and float runs of the VFX build).
module tb_fades_top;
  import fades_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic i8_start, i8_done;
  mode_e i8_mode;
  logic i8_prec_fp;
  logic [2-1:0][31:0] i8_n;
  logic [31:0] i8_m, i8_p, i8_bias_count, i8_zp;
  logic signed [7:0] i8_cmin, i8_cmax;
  rd_req_t [2-1:0] i8_ci_req, i8_rp_req, i8_av_req, i8_bv_req, i8_qm_req, i8_sh_req, i8_bi_req;
  logic    [2-1:0] i8_ci_rdy, i8_rp_rdy, i8_av_rdy, i8_bv_rdy, i8_qm_rdy, i8_sh_rdy, i8_bi_rdy;
  rd_rsp_t [2-1:0] i8_ci_rsp, i8_rp_rsp, i8_av_rsp, i8_bv_rsp, i8_qm_rsp, i8_sh_rsp, i8_bi_rsp;
  wr_req_t [2-1:0] i8_c_wr;
  logic    [2-1:0] i8_c_rdy, i8_ev_stall_fifo, i8_ev_stall_pe, i8_ev_clamp;
  logic f_start, f_done;
  mode_e f_mode;
  logic f_prec_fp;
  logic [1-1:0][31:0] f_n;
  logic [31:0] f_m, f_p, f_bias_count, f_zp;
  logic signed [7:0] f_cmin, f_cmax;
  rd_req_t [1-1:0] f_ci_req, f_rp_req, f_av_req, f_bv_req, f_qm_req, f_sh_req, f_bi_req;
  logic    [1-1:0] f_ci_rdy, f_rp_rdy, f_av_rdy, f_bv_rdy, f_qm_rdy, f_sh_rdy, f_bi_rdy;
  rd_rsp_t [1-1:0] f_ci_rsp, f_rp_rsp, f_av_rsp, f_bv_rsp, f_qm_rsp, f_sh_rsp, f_bi_rsp;
  wr_req_t [1-1:0] f_c_wr;
  logic    [1-1:0] f_c_rdy, f_ev_stall_fifo, f_ev_stall_pe, f_ev_clamp;
  logic v_start, v_done;
  mode_e v_mode;
  logic v_prec_fp;
  logic [1-1:0][31:0] v_n;
  logic [31:0] v_m, v_p, v_bias_count, v_zp;
  logic signed [7:0] v_cmin, v_cmax;
  rd_req_t [1-1:0] v_ci_req, v_rp_req, v_av_req, v_bv_req, v_qm_req, v_sh_req, v_bi_req;
  logic    [1-1:0] v_ci_rdy, v_rp_rdy, v_av_rdy, v_bv_rdy, v_qm_rdy, v_sh_rdy, v_bi_rdy;
  rd_rsp_t [1-1:0] v_ci_rsp, v_rp_rsp, v_av_rsp, v_bv_rsp, v_qm_rsp, v_sh_rsp, v_bi_rsp;
  wr_req_t [1-1:0] v_c_wr;
  logic    [1-1:0] v_c_rdy, v_ev_stall_fifo, v_ev_stall_pe, v_ev_clamp;

  fades_top #(.NCORES(2), .PES(8), .PRECISION(PREC_INT8), .DEPTH(64)) u_i8 (
    .clk, .rst_n, .start(i8_start), .done(i8_done), .busy(), .mode(i8_mode), .n(i8_n), .m(i8_m), .p(i8_p),
    .bias_count(i8_bias_count), .clamp_min(i8_cmin), .clamp_max(i8_cmax), .zero_point_rhs(i8_zp), .prec_fp(i8_prec_fp),
    .column_index_req(i8_ci_req), .column_index_req_ready(i8_ci_rdy), .column_index_rsp(i8_ci_rsp),
    .row_ptr_req(i8_rp_req), .row_ptr_req_ready(i8_rp_rdy), .row_ptr_rsp(i8_rp_rsp),
    .a_values_req(i8_av_req), .a_values_req_ready(i8_av_rdy), .a_values_rsp(i8_av_rsp),
    .b_values_req(i8_bv_req), .b_values_req_ready(i8_bv_rdy), .b_values_rsp(i8_bv_rsp),
    .qm_req(i8_qm_req), .qm_req_ready(i8_qm_rdy), .qm_rsp(i8_qm_rsp),
    .shift_req(i8_sh_req), .shift_req_ready(i8_sh_rdy), .shift_rsp(i8_sh_rsp),
    .bias_req(i8_bi_req), .bias_req_ready(i8_bi_rdy), .bias_rsp(i8_bi_rsp),
    .c_wr(i8_c_wr), .c_wr_ready(i8_c_rdy),
    .ev_stall_fifo(i8_ev_stall_fifo), .ev_stall_pe(i8_ev_stall_pe), .ev_clamp(i8_ev_clamp)
  );

  fades_top #(.NCORES(1), .PES(4), .PRECISION(PREC_FP32), .DEPTH(64)) u_f (
    .clk, .rst_n, .start(f_start), .done(f_done), .busy(), .mode(f_mode), .n(f_n), .m(f_m), .p(f_p),
    .bias_count(f_bias_count), .clamp_min(f_cmin), .clamp_max(f_cmax), .zero_point_rhs(f_zp), .prec_fp(f_prec_fp),
    .column_index_req(f_ci_req), .column_index_req_ready(f_ci_rdy), .column_index_rsp(f_ci_rsp),
    .row_ptr_req(f_rp_req), .row_ptr_req_ready(f_rp_rdy), .row_ptr_rsp(f_rp_rsp),
    .a_values_req(f_av_req), .a_values_req_ready(f_av_rdy), .a_values_rsp(f_av_rsp),
    .b_values_req(f_bv_req), .b_values_req_ready(f_bv_rdy), .b_values_rsp(f_bv_rsp),
    .qm_req(f_qm_req), .qm_req_ready(f_qm_rdy), .qm_rsp(f_qm_rsp),
    .shift_req(f_sh_req), .shift_req_ready(f_sh_rdy), .shift_rsp(f_sh_rsp),
    .bias_req(f_bi_req), .bias_req_ready(f_bi_rdy), .bias_rsp(f_bi_rsp),
    .c_wr(f_c_wr), .c_wr_ready(f_c_rdy),
    .ev_stall_fifo(f_ev_stall_fifo), .ev_stall_pe(f_ev_stall_pe), .ev_clamp(f_ev_clamp)
  );

  tb_fades_harness #(.NC(2), .PES(8), .PREC(PREC_INT8), .MEMSZ(4096),
                     .MAXN(64), .MAXMW(64), .MAXP(64)) h_i8 (
    .clk, .rst_n, .start(i8_start), .done(i8_done), .mode(i8_mode), .prec_fp(i8_prec_fp), .n(i8_n), .m(i8_m), .p(i8_p),
    .bias_count(i8_bias_count), .zp(i8_zp), .cmin(i8_cmin), .cmax(i8_cmax),
    .ci_req(i8_ci_req), .rp_req(i8_rp_req), .av_req(i8_av_req), .bv_req(i8_bv_req),
    .qm_req(i8_qm_req), .sh_req(i8_sh_req), .bi_req(i8_bi_req),
    .ci_rdy(i8_ci_rdy), .rp_rdy(i8_rp_rdy), .av_rdy(i8_av_rdy), .bv_rdy(i8_bv_rdy),
    .qm_rdy(i8_qm_rdy), .sh_rdy(i8_sh_rdy), .bi_rdy(i8_bi_rdy),
    .ci_rsp(i8_ci_rsp), .rp_rsp(i8_rp_rsp), .av_rsp(i8_av_rsp), .bv_rsp(i8_bv_rsp),
    .qm_rsp(i8_qm_rsp), .sh_rsp(i8_sh_rsp), .bi_rsp(i8_bi_rsp),
    .c_wr(i8_c_wr), .c_rdy(i8_c_rdy),
    .ev_stall_fifo(i8_ev_stall_fifo), .ev_stall_pe(i8_ev_stall_pe), .ev_clamp(i8_ev_clamp)
  );

  tb_fades_harness #(.NC(1), .PES(4), .PREC(PREC_FP32), .MEMSZ(4096),
                     .MAXN(64), .MAXMW(64), .MAXP(64)) h_f (
    .clk, .rst_n, .start(f_start), .done(f_done), .mode(f_mode), .prec_fp(f_prec_fp), .n(f_n), .m(f_m), .p(f_p),
    .bias_count(f_bias_count), .zp(f_zp), .cmin(f_cmin), .cmax(f_cmax),
    .ci_req(f_ci_req), .rp_req(f_rp_req), .av_req(f_av_req), .bv_req(f_bv_req),
    .qm_req(f_qm_req), .sh_req(f_sh_req), .bi_req(f_bi_req),
    .ci_rdy(f_ci_rdy), .rp_rdy(f_rp_rdy), .av_rdy(f_av_rdy), .bv_rdy(f_bv_rdy),
    .qm_rdy(f_qm_rdy), .sh_rdy(f_sh_rdy), .bi_rdy(f_bi_rdy),
    .ci_rsp(f_ci_rsp), .rp_rsp(f_rp_rsp), .av_rsp(f_av_rsp), .bv_rsp(f_bv_rsp),
    .qm_rsp(f_qm_rsp), .sh_rsp(f_sh_rsp), .bi_rsp(f_bi_rsp),
    .c_wr(f_c_wr), .c_rdy(f_c_rdy),
    .ev_stall_fifo(f_ev_stall_fifo), .ev_stall_pe(f_ev_stall_pe), .ev_clamp(f_ev_clamp)
  );

  fades_top #(.NCORES(1), .PES(4), .PRECISION(PREC_VFX), .DEPTH(64)) u_v (
    .clk, .rst_n, .start(v_start), .done(v_done), .busy(), .mode(v_mode), .n(v_n), .m(v_m), .p(v_p),
    .bias_count(v_bias_count), .clamp_min(v_cmin), .clamp_max(v_cmax), .zero_point_rhs(v_zp), .prec_fp(v_prec_fp),
    .column_index_req(v_ci_req), .column_index_req_ready(v_ci_rdy), .column_index_rsp(v_ci_rsp),
    .row_ptr_req(v_rp_req), .row_ptr_req_ready(v_rp_rdy), .row_ptr_rsp(v_rp_rsp),
    .a_values_req(v_av_req), .a_values_req_ready(v_av_rdy), .a_values_rsp(v_av_rsp),
    .b_values_req(v_bv_req), .b_values_req_ready(v_bv_rdy), .b_values_rsp(v_bv_rsp),
    .qm_req(v_qm_req), .qm_req_ready(v_qm_rdy), .qm_rsp(v_qm_rsp),
    .shift_req(v_sh_req), .shift_req_ready(v_sh_rdy), .shift_rsp(v_sh_rsp),
    .bias_req(v_bi_req), .bias_req_ready(v_bi_rdy), .bias_rsp(v_bi_rsp),
    .c_wr(v_c_wr), .c_wr_ready(v_c_rdy),
    .ev_stall_fifo(v_ev_stall_fifo), .ev_stall_pe(v_ev_stall_pe), .ev_clamp(v_ev_clamp)
  );

  tb_fades_harness #(.NC(1), .PES(4), .PREC(PREC_VFX), .MEMSZ(4096),
                     .MAXN(64), .MAXMW(64), .MAXP(64)) h_v (
    .clk, .rst_n, .start(v_start), .done(v_done), .mode(v_mode), .prec_fp(v_prec_fp), .n(v_n), .m(v_m), .p(v_p),
    .bias_count(v_bias_count), .zp(v_zp), .cmin(v_cmin), .cmax(v_cmax),
    .ci_req(v_ci_req), .rp_req(v_rp_req), .av_req(v_av_req), .bv_req(v_bv_req),
    .qm_req(v_qm_req), .sh_req(v_sh_req), .bi_req(v_bi_req),
    .ci_rdy(v_ci_rdy), .rp_rdy(v_rp_rdy), .av_rdy(v_av_rdy), .bv_rdy(v_bv_rdy),
    .qm_rdy(v_qm_rdy), .sh_rdy(v_sh_rdy), .bi_rdy(v_bi_rdy),
    .ci_rsp(v_ci_rsp), .rp_rsp(v_rp_rsp), .av_rsp(v_av_rsp), .bv_rsp(v_bv_rsp),
    .qm_rsp(v_qm_rsp), .sh_rsp(v_sh_rsp), .bi_rsp(v_bi_rsp),
    .c_wr(v_c_wr), .c_rdy(v_c_rdy),
    .ev_stall_fifo(v_ev_stall_fifo), .ev_stall_pe(v_ev_stall_pe), .ev_clamp(v_ev_clamp)
  );

  task automatic need(input string what, input longint count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("ERROR: mechanism never exercised: %s", what);
    end else $display("mechanism %-28s seen %0d", what, count);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_i8.checks + h_f.checks + h_v.checks,
             failures + h_i8.failures + h_f.failures + h_v.failures + 1);
    $finish;
  end

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    // int8: mode, N, MW(words), P, sparsity, bias, zp, clamp min/max
    h_i8.run_case(MODE_GEMM, 12, 6, 8,  0,  1,  3, -128, 127, 200000);
    h_i8.run_case(MODE_SPMM, 20, 10, 19, 60, 1, -5, -128, 127, 200000);
    h_i8.run_case(MODE_GEMM, 9, 3, 21,  0,  0,  0,  -20,  20, 200000);
    h_i8.run_case(MODE_SPMM, 33, 16, 30, 90, 1,  7, -128, 127, 200000);
    h_i8.run_case(MODE_SPMM, 16, 40, 2, 50, 0,  1, -128, 127, 200000);
    h_i8.run_case(MODE_SPMM, 64, 8, 16, 95, 1,  2, -128, 127, 200000);
    // float: same shapes class, exact small-integer values
    h_f.run_case(MODE_GEMM, 7, 9, 6,  0,  0,  1, -128, 127, 200000);
    h_f.run_case(MODE_SPMM, 14, 12, 10, 70, 0, -2, -128, 127, 200000);
    h_f.run_case(MODE_GEMM, 5, 20, 3,  0,  0,  0, -128, 127, 200000);
    // float-int8 build: the precision changes from run to run
    h_v.vfx_fp = 1'b0;
    h_v.run_case(MODE_SPMM, 11, 6, 7, 50, 1, 2, -128, 127, 200000);
    h_v.vfx_fp = 1'b1;
    h_v.run_case(MODE_SPMM, 9, 10, 5, 60, 0, -1, -128, 127, 200000);
    h_v.vfx_fp = 1'b0;
    h_v.run_case(MODE_GEMM, 6, 4, 9, 0, 0, 4, -40, 40, 200000);
    h_v.vfx_fp = 1'b1;
    h_v.run_case(MODE_GEMM, 4, 7, 6, 0, 0, 2, -128, 127, 200000);

    need("GEMM (dense) runs",         h_i8.n_dense + h_f.n_dense);
    need("SPMM (sparse) runs",        h_i8.n_sparse + h_f.n_sparse);
    need("int8 precision runs",       h_i8.n_dense + h_i8.n_sparse);
    need("float precision runs",      h_f.n_dense + h_f.n_sparse);
    need("multi-tile runs",           h_i8.n_multi_tile + h_f.n_multi_tile);
    need("partial last tile",         h_i8.n_partial_tile + h_f.n_partial_tile);
    need("empty CSR rows",            h_i8.n_empty_rows + h_f.n_empty_rows);
    need("bias added",                h_i8.n_bias);
    need("clamp saturation",          h_i8.n_clamp);
    need("result FIFO stall cycles",  h_i8.n_stall_fifo + h_f.n_stall_fifo);
    need("float row drain stalls",    h_f.n_stall_pe);
    need("multi-core runs",           h_i8.n_multicore);
    need("VFX build int8 runs",       h_v.n_vfx_int8);
    need("VFX build float runs",      h_v.n_vfx_fp);

    checks   += h_i8.checks + h_f.checks + h_v.checks;
    failures += h_i8.failures + h_f.failures + h_v.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

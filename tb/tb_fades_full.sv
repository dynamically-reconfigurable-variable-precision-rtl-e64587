// tb_fades_full: one complete operation of the accelerator at its default
// build (one core, 32 PEs, int8, 1024-row B tile): the MobileNet layer
// N=1024, M=1024, P=49 (A 1024x1024 weights, B 1024x49 activations), first
// with 90% of A's words zero in SPMM mode, then dense in GEMM mode. Every
// element of C is checked against a reference, and the cycle counts are
// printed and compared with the element-per-cycle bound of the design.
module tb_fades_full;
  import fades_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic d_start, d_done;
  mode_e d_mode;
  logic d_prec_fp;
  logic [1-1:0][31:0] d_n;
  logic [31:0] d_m, d_p, d_bias_count, d_zp;
  logic signed [7:0] d_cmin, d_cmax;
  rd_req_t [1-1:0] d_ci_req, d_rp_req, d_av_req, d_bv_req, d_qm_req, d_sh_req, d_bi_req;
  logic    [1-1:0] d_ci_rdy, d_rp_rdy, d_av_rdy, d_bv_rdy, d_qm_rdy, d_sh_rdy, d_bi_rdy;
  rd_rsp_t [1-1:0] d_ci_rsp, d_rp_rsp, d_av_rsp, d_bv_rsp, d_qm_rsp, d_sh_rsp, d_bi_rsp;
  wr_req_t [1-1:0] d_c_wr;
  logic    [1-1:0] d_c_rdy, d_ev_stall_fifo, d_ev_stall_pe, d_ev_clamp;

  fades_top u_top (
    .clk, .rst_n, .start(d_start), .done(d_done), .busy(), .mode(d_mode), .n(d_n), .m(d_m), .p(d_p),
    .bias_count(d_bias_count), .clamp_min(d_cmin), .clamp_max(d_cmax), .zero_point_rhs(d_zp), .prec_fp(d_prec_fp),
    .column_index_req(d_ci_req), .column_index_req_ready(d_ci_rdy), .column_index_rsp(d_ci_rsp),
    .row_ptr_req(d_rp_req), .row_ptr_req_ready(d_rp_rdy), .row_ptr_rsp(d_rp_rsp),
    .a_values_req(d_av_req), .a_values_req_ready(d_av_rdy), .a_values_rsp(d_av_rsp),
    .b_values_req(d_bv_req), .b_values_req_ready(d_bv_rdy), .b_values_rsp(d_bv_rsp),
    .qm_req(d_qm_req), .qm_req_ready(d_qm_rdy), .qm_rsp(d_qm_rsp),
    .shift_req(d_sh_req), .shift_req_ready(d_sh_rdy), .shift_rsp(d_sh_rsp),
    .bias_req(d_bi_req), .bias_req_ready(d_bi_rdy), .bias_rsp(d_bi_rsp),
    .c_wr(d_c_wr), .c_wr_ready(d_c_rdy),
    .ev_stall_fifo(d_ev_stall_fifo), .ev_stall_pe(d_ev_stall_pe), .ev_clamp(d_ev_clamp)
  );

  tb_fades_harness #(.NC(1), .PES(32), .PREC(PREC_INT8), .MEMSZ(262144), .STALL_PCT(5),
                     .MAXN(1024), .MAXMW(256), .MAXP(49)) h (
    .clk, .rst_n, .start(d_start), .done(d_done), .mode(d_mode), .prec_fp(d_prec_fp), .n(d_n), .m(d_m), .p(d_p),
    .bias_count(d_bias_count), .zp(d_zp), .cmin(d_cmin), .cmax(d_cmax),
    .ci_req(d_ci_req), .rp_req(d_rp_req), .av_req(d_av_req), .bv_req(d_bv_req),
    .qm_req(d_qm_req), .sh_req(d_sh_req), .bi_req(d_bi_req),
    .ci_rdy(d_ci_rdy), .rp_rdy(d_rp_rdy), .av_rdy(d_av_rdy), .bv_rdy(d_bv_rdy),
    .qm_rdy(d_qm_rdy), .sh_rdy(d_sh_rdy), .bi_rdy(d_bi_rdy),
    .ci_rsp(d_ci_rsp), .rp_rsp(d_rp_rsp), .av_rsp(d_av_rsp), .bv_rsp(d_bv_rsp),
    .qm_rsp(d_qm_rsp), .sh_rsp(d_sh_rsp), .bi_rsp(d_bi_rsp),
    .c_wr(d_c_wr), .c_rdy(d_c_rdy),
    .ev_stall_fifo(d_ev_stall_fifo), .ev_stall_pe(d_ev_stall_pe), .ev_clamp(d_ev_clamp)
  );

  initial begin
    repeat (3000000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures + 1);
    $finish;
  end

  initial begin
    longint sp_cycles, de_cycles;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    // N=1024, M=1024 (256 words of four int8), P=49
    h.run_case(MODE_SPMM, 1024, 256, 49, 90, 1, 3, -128, 127, 2000000);
    sp_cycles = h.last_cycles;
    h.run_case(MODE_GEMM, 1024, 256, 49, 0, 1, 3, -128, 127, 2000000);
    de_cycles = h.last_cycles;
    // Two tiles of 32 columns; each streams all of A once at most one
    // element per cycle, so dense takes at least 2*1024*256 cycles.
    checks = h.checks + 2;
    failures = h.failures;
    if (de_cycles < 2 * 1024 * 256) begin
      failures++;
      $display("ERROR: dense run faster than one element per cycle");
    end
    if (sp_cycles >= de_cycles) begin
      failures++;
      $display("ERROR: sparse run (%0d cycles) not faster than dense (%0d)", sp_cycles, de_cycles);
    end
    $display("dense %0d cycles, sparse(90%%) %0d cycles, speed-up %0.2f", de_cycles, sp_cycles,
             real'(de_cycles) / real'(sp_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

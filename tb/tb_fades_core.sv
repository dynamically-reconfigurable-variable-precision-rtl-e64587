// tb_fades_core: one FADES core (int8, 4 PEs, B tile of 32 words) driven
// directly, without the multi-core top. Memory ports answer with random
// latency but never refuse a request, so run times are repeatable enough to
// bound: a dense GEMM tile needs one compute cycle per A word per row, so a
// product takes at least tiles*N*MW cycles and at most that plus the B-tile
// loads (MW*PES words per tile) and a fixed per-tile overhead. Also covers
// SPMM with empty rows, bias on/off, clamping and partial last tiles, and
// checks that sparse A finishes faster than the same product in dense form.
module tb_fades_core;
  import fades_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic c_start, c_done;
  mode_e c_mode;
  logic c_prec_fp;
  logic [1-1:0][31:0] c_n;
  logic [31:0] c_m, c_p, c_bias_count, c_zp;
  logic signed [7:0] c_cmin, c_cmax;
  rd_req_t [1-1:0] c_ci_req, c_rp_req, c_av_req, c_bv_req, c_qm_req, c_sh_req, c_bi_req;
  logic    [1-1:0] c_ci_rdy, c_rp_rdy, c_av_rdy, c_bv_rdy, c_qm_rdy, c_sh_rdy, c_bi_rdy;
  rd_rsp_t [1-1:0] c_ci_rsp, c_rp_rsp, c_av_rsp, c_bv_rsp, c_qm_rsp, c_sh_rsp, c_bi_rsp;
  wr_req_t [1-1:0] c_c_wr;
  logic    [1-1:0] c_c_rdy, c_ev_stall_fifo, c_ev_stall_pe, c_ev_clamp;

  fades_core #(.PES(4), .PRECISION(PREC_INT8), .DEPTH(32), .FIFO_DEPTH(8)) u_core (
    .clk, .rst_n, .start(c_start), .done(c_done), .busy(), .mode(c_mode), .n(c_n), .m(c_m), .p(c_p),
    .bias_count(c_bias_count), .clamp_min(c_cmin), .clamp_max(c_cmax), .zero_point_rhs(c_zp), .prec_fp(c_prec_fp),
    .column_index_req(c_ci_req), .column_index_req_ready(c_ci_rdy), .column_index_rsp(c_ci_rsp),
    .row_ptr_req(c_rp_req), .row_ptr_req_ready(c_rp_rdy), .row_ptr_rsp(c_rp_rsp),
    .a_values_req(c_av_req), .a_values_req_ready(c_av_rdy), .a_values_rsp(c_av_rsp),
    .b_values_req(c_bv_req), .b_values_req_ready(c_bv_rdy), .b_values_rsp(c_bv_rsp),
    .qm_req(c_qm_req), .qm_req_ready(c_qm_rdy), .qm_rsp(c_qm_rsp),
    .shift_req(c_sh_req), .shift_req_ready(c_sh_rdy), .shift_rsp(c_sh_rsp),
    .bias_req(c_bi_req), .bias_req_ready(c_bi_rdy), .bias_rsp(c_bi_rsp),
    .c_wr(c_c_wr), .c_wr_ready(c_c_rdy),
    .ev_stall_fifo(c_ev_stall_fifo), .ev_stall_pe(c_ev_stall_pe), .ev_clamp(c_ev_clamp)
  );

  tb_fades_harness #(.NC(1), .PES(4), .PREC(PREC_INT8), .MEMSZ(4096), .STALL_PCT(0),
                     .MAXN(64), .MAXMW(64), .MAXP(64)) h (
    .clk, .rst_n, .start(c_start), .done(c_done), .mode(c_mode), .prec_fp(c_prec_fp), .n(c_n), .m(c_m), .p(c_p),
    .bias_count(c_bias_count), .zp(c_zp), .cmin(c_cmin), .cmax(c_cmax),
    .ci_req(c_ci_req), .rp_req(c_rp_req), .av_req(c_av_req), .bv_req(c_bv_req),
    .qm_req(c_qm_req), .sh_req(c_sh_req), .bi_req(c_bi_req),
    .ci_rdy(c_ci_rdy), .rp_rdy(c_rp_rdy), .av_rdy(c_av_rdy), .bv_rdy(c_bv_rdy),
    .qm_rdy(c_qm_rdy), .sh_rdy(c_sh_rdy), .bi_rdy(c_bi_rdy),
    .ci_rsp(c_ci_rsp), .rp_rsp(c_rp_rsp), .av_rsp(c_av_rsp), .bv_rsp(c_bv_rsp),
    .qm_rsp(c_qm_rsp), .sh_rsp(c_sh_rsp), .bi_rsp(c_bi_rsp),
    .c_wr(c_c_wr), .c_rdy(c_c_rdy),
    .ev_stall_fifo(c_ev_stall_fifo), .ev_stall_pe(c_ev_stall_pe), .ev_clamp(c_ev_clamp)
  );


  task automatic bound(input int nn, input int mw, input int pp, input longint cyc, input bit sparse);
    longint tiles, lo, hi;
    tiles = longint'((pp + 3) / 4);
    lo = tiles * nn * mw;
    hi = tiles * (nn * mw + mw * 4 + 64);
    checks++;
    if (!sparse && (cyc < lo || cyc > hi)) begin
      failures++;
      $display("ERROR: dense %0dx%0dx%0d took %0d cycles, expected %0d..%0d", nn, mw, pp, cyc, lo, hi);
    end else $display("%s %0dx%0dx%0d: %0d cycles (dense bound %0d..%0d)", sparse ? "SPMM" : "GEMM", nn, mw, pp, cyc, lo, hi);
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h.checks, failures + h.failures + 1);
    $finish;
  end

  initial begin
    longint dense_cyc, sparse_cyc;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    h.run_case(MODE_GEMM, 10, 8, 8, 0, 1, 3, -128, 127, 200000);
    bound(10, 8, 8, h.last_cycles, 0);
    h.run_case(MODE_GEMM, 7, 5, 10, 0, 0, -4, -30, 30, 200000);
    bound(7, 5, 10, h.last_cycles, 0);
    h.run_case(MODE_GEMM, 24, 16, 6, 0, 1, 1, -128, 127, 200000);
    bound(24, 16, 6, h.last_cycles, 0);
    dense_cyc = h.last_cycles;
    h.run_case(MODE_SPMM, 24, 16, 6, 85, 1, 1, -128, 127, 200000);
    bound(24, 16, 6, h.last_cycles, 1);
    sparse_cyc = h.last_cycles;
    h.run_case(MODE_SPMM, 13, 9, 3, 40, 0, -7, -128, 127, 200000);
    bound(13, 9, 3, h.last_cycles, 1);
    checks++;
    if (sparse_cyc >= dense_cyc) begin
      failures++; $display("ERROR: sparse run (%0d cycles) not faster than dense (%0d)", sparse_cyc, dense_cyc);
    end
    checks++;
    if (h.n_empty_rows == 0 || h.n_bias == 0 || h.n_clamp == 0 || h.n_partial_tile == 0) begin
      failures++; $display("ERROR: a mechanism was not exercised");
    end
    checks   += h.checks;
    failures += h.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fades_workloads: the matrix shapes used to evaluate the design, run
// end to end with every element of C checked.
//   * the default build (one core, 32 PEs, int8) runs the eight MobileNet
//     1x1-convolution layers N x M x P = 128x64x3136, 128x128x3136,
//     256x128x784, 256x256x784, 512x256x196, 512x512x196, 1024x512x49 and
//     1024x1024x49, dense (GEMM) and with 90% of the weight words zero (SPMM);
//   * a 128-PE build runs the square int8 products 128, 256 and 512 (the
//     1024 square, 2 million cycles on 128 PEs, is left out for run time);
//   * the 1024x1024x49 layer dense and at 50, 70 and 90% sparsity on the
//     128-PE build and on a build of four 32-PE cores, each core taking a
//     quarter of A's rows; at 90% the four cores, with four times the memory
//     ports, must be the faster.
// Memory ports refuse 5% of requests at random. For every dense run the
// cycle count must lie between the larger of (one cycle per A word, one per
// C word) per tile and that plus the B-tile loads and 10% for memory stalls;
// no sparse layer may be slower than its dense run.
module tb_fades_workloads;
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

  logic q_start, q_done;
  mode_e q_mode;
  logic q_prec_fp;
  logic [1-1:0][31:0] q_n;
  logic [31:0] q_m, q_p, q_bias_count, q_zp;
  logic signed [7:0] q_cmin, q_cmax;
  rd_req_t [1-1:0] q_ci_req, q_rp_req, q_av_req, q_bv_req, q_qm_req, q_sh_req, q_bi_req;
  logic    [1-1:0] q_ci_rdy, q_rp_rdy, q_av_rdy, q_bv_rdy, q_qm_rdy, q_sh_rdy, q_bi_rdy;
  rd_rsp_t [1-1:0] q_ci_rsp, q_rp_rsp, q_av_rsp, q_bv_rsp, q_qm_rsp, q_sh_rsp, q_bi_rsp;
  wr_req_t [1-1:0] q_c_wr;
  logic    [1-1:0] q_c_rdy, q_ev_stall_fifo, q_ev_stall_pe, q_ev_clamp;


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

  tb_fades_harness #(.NC(1), .PES(32), .PREC(PREC_INT8), .MEMSZ(409600), .STALL_PCT(5),
                     .MAXN(1024), .MAXMW(256), .MAXP(3136)) h (
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

  fades_top #(.PES(128)) u_top128 (
    .clk, .rst_n, .start(q_start), .done(q_done), .busy(), .mode(q_mode), .n(q_n), .m(q_m), .p(q_p),
    .bias_count(q_bias_count), .clamp_min(q_cmin), .clamp_max(q_cmax), .zero_point_rhs(q_zp), .prec_fp(q_prec_fp),
    .column_index_req(q_ci_req), .column_index_req_ready(q_ci_rdy), .column_index_rsp(q_ci_rsp),
    .row_ptr_req(q_rp_req), .row_ptr_req_ready(q_rp_rdy), .row_ptr_rsp(q_rp_rsp),
    .a_values_req(q_av_req), .a_values_req_ready(q_av_rdy), .a_values_rsp(q_av_rsp),
    .b_values_req(q_bv_req), .b_values_req_ready(q_bv_rdy), .b_values_rsp(q_bv_rsp),
    .qm_req(q_qm_req), .qm_req_ready(q_qm_rdy), .qm_rsp(q_qm_rsp),
    .shift_req(q_sh_req), .shift_req_ready(q_sh_rdy), .shift_rsp(q_sh_rsp),
    .bias_req(q_bi_req), .bias_req_ready(q_bi_rdy), .bias_rsp(q_bi_rsp),
    .c_wr(q_c_wr), .c_wr_ready(q_c_rdy),
    .ev_stall_fifo(q_ev_stall_fifo), .ev_stall_pe(q_ev_stall_pe), .ev_clamp(q_ev_clamp)
  );

  tb_fades_harness #(.NC(1), .PES(128), .PREC(PREC_INT8), .MEMSZ(1048576), .STALL_PCT(5),
                     .MAXN(1024), .MAXMW(256), .MAXP(1024)) hq (
    .clk, .rst_n, .start(q_start), .done(q_done), .mode(q_mode), .prec_fp(q_prec_fp), .n(q_n), .m(q_m), .p(q_p),
    .bias_count(q_bias_count), .zp(q_zp), .cmin(q_cmin), .cmax(q_cmax),
    .ci_req(q_ci_req), .rp_req(q_rp_req), .av_req(q_av_req), .bv_req(q_bv_req),
    .qm_req(q_qm_req), .sh_req(q_sh_req), .bi_req(q_bi_req),
    .ci_rdy(q_ci_rdy), .rp_rdy(q_rp_rdy), .av_rdy(q_av_rdy), .bv_rdy(q_bv_rdy),
    .qm_rdy(q_qm_rdy), .sh_rdy(q_sh_rdy), .bi_rdy(q_bi_rdy),
    .ci_rsp(q_ci_rsp), .rp_rsp(q_rp_rsp), .av_rsp(q_av_rsp), .bv_rsp(q_bv_rsp),
    .qm_rsp(q_qm_rsp), .sh_rsp(q_sh_rsp), .bi_rsp(q_bi_rsp),
    .c_wr(q_c_wr), .c_rdy(q_c_rdy),
    .ev_stall_fifo(q_ev_stall_fifo), .ev_stall_pe(q_ev_stall_pe), .ev_clamp(q_ev_clamp)
  );


  logic m_start, m_done;
  mode_e m_mode;
  logic m_prec_fp;
  logic [4-1:0][31:0] m_n;
  logic [31:0] m_m, m_p, m_bias_count, m_zp;
  logic signed [7:0] m_cmin, m_cmax;
  rd_req_t [4-1:0] m_ci_req, m_rp_req, m_av_req, m_bv_req, m_qm_req, m_sh_req, m_bi_req;
  logic    [4-1:0] m_ci_rdy, m_rp_rdy, m_av_rdy, m_bv_rdy, m_qm_rdy, m_sh_rdy, m_bi_rdy;
  rd_rsp_t [4-1:0] m_ci_rsp, m_rp_rsp, m_av_rsp, m_bv_rsp, m_qm_rsp, m_sh_rsp, m_bi_rsp;
  wr_req_t [4-1:0] m_c_wr;
  logic    [4-1:0] m_c_rdy, m_ev_stall_fifo, m_ev_stall_pe, m_ev_clamp;


  fades_top #(.NCORES(4)) u_top4x32 (
    .clk, .rst_n, .start(m_start), .done(m_done), .busy(), .mode(m_mode), .n(m_n), .m(m_m), .p(m_p),
    .bias_count(m_bias_count), .clamp_min(m_cmin), .clamp_max(m_cmax), .zero_point_rhs(m_zp), .prec_fp(m_prec_fp),
    .column_index_req(m_ci_req), .column_index_req_ready(m_ci_rdy), .column_index_rsp(m_ci_rsp),
    .row_ptr_req(m_rp_req), .row_ptr_req_ready(m_rp_rdy), .row_ptr_rsp(m_rp_rsp),
    .a_values_req(m_av_req), .a_values_req_ready(m_av_rdy), .a_values_rsp(m_av_rsp),
    .b_values_req(m_bv_req), .b_values_req_ready(m_bv_rdy), .b_values_rsp(m_bv_rsp),
    .qm_req(m_qm_req), .qm_req_ready(m_qm_rdy), .qm_rsp(m_qm_rsp),
    .shift_req(m_sh_req), .shift_req_ready(m_sh_rdy), .shift_rsp(m_sh_rsp),
    .bias_req(m_bi_req), .bias_req_ready(m_bi_rdy), .bias_rsp(m_bi_rsp),
    .c_wr(m_c_wr), .c_wr_ready(m_c_rdy),
    .ev_stall_fifo(m_ev_stall_fifo), .ev_stall_pe(m_ev_stall_pe), .ev_clamp(m_ev_clamp)
  );

  tb_fades_harness #(.NC(4), .PES(32), .PREC(PREC_INT8), .MEMSZ(65536), .STALL_PCT(5),
                     .MAXN(1024), .MAXMW(256), .MAXP(49)) hm (
    .clk, .rst_n, .start(m_start), .done(m_done), .mode(m_mode), .prec_fp(m_prec_fp), .n(m_n), .m(m_m), .p(m_p),
    .bias_count(m_bias_count), .zp(m_zp), .cmin(m_cmin), .cmax(m_cmax),
    .ci_req(m_ci_req), .rp_req(m_rp_req), .av_req(m_av_req), .bv_req(m_bv_req),
    .qm_req(m_qm_req), .sh_req(m_sh_req), .bi_req(m_bi_req),
    .ci_rdy(m_ci_rdy), .rp_rdy(m_rp_rdy), .av_rdy(m_av_rdy), .bv_rdy(m_bv_rdy),
    .qm_rdy(m_qm_rdy), .sh_rdy(m_sh_rdy), .bi_rdy(m_bi_rdy),
    .ci_rsp(m_ci_rsp), .rp_rsp(m_rp_rsp), .av_rsp(m_av_rsp), .bv_rsp(m_bv_rsp),
    .qm_rsp(m_qm_rsp), .sh_rsp(m_sh_rsp), .bi_rsp(m_bi_rsp),
    .c_wr(m_c_wr), .c_rdy(m_c_rdy),
    .ev_stall_fifo(m_ev_stall_fifo), .ev_stall_pe(m_ev_stall_pe), .ev_clamp(m_ev_clamp)
  );


  initial begin
    repeat (20000000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h.checks + hq.checks + hm.checks, failures + h.failures + hq.failures + hm.failures + 1);
    $finish;
  end

  // Per tile of tc columns the core needs N*MW compute cycles and writes N*tc
  // words of C at one per cycle; the slower of the two sets the pace, and
  // the B block (MW*tc words) is loaded before the tile starts.
  function automatic void dense_bound(int nn, int mw, int pp, int pes, longint cyc);
    longint lo, hi, tc, t_lo;
    lo = 0; hi = 0;
    for (int c0 = 0; c0 < pp; c0 += pes) begin
      tc   = longint'((pp - c0 < pes) ? pp - c0 : pes);
      t_lo = (longint'(mw) > tc) ? longint'(nn) * longint'(mw) : longint'(nn) * tc;
      lo  += t_lo;
      hi  += t_lo + longint'(mw) * tc;
    end
    hi = hi * 11 / 10 + 1000;
    checks++;
    if (cyc < lo || cyc > hi) begin
      failures++;
      $display("ERROR: dense %0dx%0dx%0d on %0d PEs took %0d cycles, expected %0d..%0d", nn, mw * 4, pp, pes, cyc, lo, hi);
    end
  endfunction

  initial begin
    int layers [8][3] = '{{128, 64, 3136}, {128, 128, 3136}, {256, 128, 784}, {256, 256, 784},
                          {512, 256, 196}, {512, 512, 196}, {1024, 512, 49}, {1024, 1024, 49}};
    int squares [3] = '{128, 256, 512};
    int levels [4] = '{0, 50, 70, 90};
    int nn, mw, pp, k;
    longint dc, sc;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    foreach (layers[l]) begin
      nn = layers[l][0]; mw = layers[l][1] / 4; pp = layers[l][2];
      h.run_case(MODE_GEMM, nn, mw, pp, 0, 1, 3, -128, 127, 5000000);
      dc = h.last_cycles;
      dense_bound(nn, mw, pp, 32, dc);
      h.run_case(MODE_SPMM, nn, mw, pp, 90, 1, 3, -128, 127, 5000000);
      sc = h.last_cycles;
      checks++;
      // Layers whose pace is set by writing C gain little from sparsity; the
      // sparse run must still never be slower.
      if (sc > dc) begin failures++; $display("ERROR: sparse layer slower than dense"); end
      $display("layer %0dx%0dx%0d: dense %0d cycles, 90%% sparse %0d cycles, speed-up %0.2f",
               nn, layers[l][1], pp, dc, sc, real'(dc) / real'(sc));
    end
    foreach (squares[q]) begin
      k = squares[q];
      hq.run_case(MODE_GEMM, k, k / 4, k, 0, 1, 1, -128, 127, 5000000);
      dense_bound(k, k / 4, k, 128, hq.last_cycles);
      $display("square %0d on 128 PEs: %0d cycles", k, hq.last_cycles);
    end
    // (1,128) against (4,32) on the 1024x1024x49 layer, dense and sparse
    foreach (levels[v]) begin
      longint c128, c4;
      hq.run_case(levels[v] == 0 ? MODE_GEMM : MODE_SPMM, 1024, 256, 49, levels[v], 1, 3, -128, 127, 5000000);
      c128 = hq.last_cycles;
      hm.run_case(levels[v] == 0 ? MODE_GEMM : MODE_SPMM, 1024, 256, 49, levels[v], 1, 3, -128, 127, 5000000);
      c4 = hm.last_cycles;
      $display("1024x1024x49 at %0d%% sparsity: (1,128) %0d cycles, (4,32) %0d cycles", levels[v], c128, c4);
      if (levels[v] == 90) begin
        checks++;
        if (c4 >= c128) begin failures++; $display("ERROR: four cores not faster than one wide core at 90%% sparsity"); end
      end
    end
    checks   += h.checks + hq.checks + hm.checks;
    failures += h.failures + hq.failures + hm.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fades_harness: behavioural memories for every port of a fades_top and a
// task that runs one matrix product end to end and checks C. The testbench
// instantiates the accelerator and connects it to this harness.
//
// run_case() builds random A (dense, or sparse with a given share of zero
// words, stored in CSR), B, per-row QM/shift/bias, splits A's rows over the
// cores, starts the accelerator, waits for done and compares every element
// of every core's C block (column-major) with a reference computed here
// from the unpacked int8 values or from exact small-integer floats.
// It also counts how often each mechanism of the design was exercised.
module tb_fades_harness
  import fades_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int    NC        = 1,
  parameter int    PES       = 32,
  parameter prec_e PREC      = PREC_INT8,
  parameter int    DEPTH     = 1024,
  parameter int    MEMSZ     = 4096,
  parameter int    STALL_PCT = 20,
  parameter int    MAXN      = 64,
  parameter int    MAXMW     = 64,
  parameter int    MAXP      = 64
) (
  input  logic clk,
  input  logic rst_n,
  // towards the accelerator's ports
  output logic start,
  input  logic done,
  output mode_e mode,
  output logic prec_fp,
  output logic [NC-1:0][31:0] n,
  output logic [31:0] m, p, bias_count, zp,
  output logic signed [7:0] cmin, cmax,
  input  rd_req_t [NC-1:0] ci_req, rp_req, av_req, bv_req, qm_req, sh_req, bi_req,
  output logic    [NC-1:0] ci_rdy, rp_rdy, av_rdy, bv_rdy, qm_rdy, sh_rdy, bi_rdy,
  output rd_rsp_t [NC-1:0] ci_rsp, rp_rsp, av_rsp, bv_rsp, qm_rsp, sh_rsp, bi_rsp,
  input  wr_req_t [NC-1:0] c_wr,
  output logic    [NC-1:0] c_rdy,
  input  logic    [NC-1:0] ev_stall_fifo, ev_stall_pe, ev_clamp
);
  // ------------------------------------------------------------ memories
  logic [31:0] rp_m [NC][MEMSZ];
  logic [31:0] ci_m [NC][MEMSZ];
  logic [31:0] av_m [NC][MEMSZ];
  logic [31:0] bv_m [NC][MEMSZ];
  logic [31:0] qm_m [NC][MEMSZ];
  logic [31:0] sh_m [NC][MEMSZ];
  logic [31:0] bi_m [NC][MEMSZ];
  logic [31:0] c_m  [NC][MEMSZ];
  int          c_writes [NC];
  int          c_bad    [NC];
  bit          c_seen   [NC][MEMSZ];
  int          c_dup    [NC];

  // The port models keep their own copies, refreshed at every case start.
  event load_mem;
  for (genvar c = 0; c < NC; c++) begin : g_mem
    always @(load_mem)
      for (int i = 0; i < MEMSZ; i++) begin
        u_rp.mem[i] = rp_m[c][i]; u_ci.mem[i] = ci_m[c][i]; u_av.mem[i] = av_m[c][i];
        u_bv.mem[i] = bv_m[c][i]; u_qm.mem[i] = qm_m[c][i]; u_sh.mem[i] = sh_m[c][i];
        u_bi.mem[i] = bi_m[c][i];
      end
    tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(STALL_PCT)) u_rp (.clk, .req(rp_req[c]), .req_ready(rp_rdy[c]), .rsp(rp_rsp[c]));
    tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(STALL_PCT)) u_ci (.clk, .req(ci_req[c]), .req_ready(ci_rdy[c]), .rsp(ci_rsp[c]));
    tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(STALL_PCT)) u_av (.clk, .req(av_req[c]), .req_ready(av_rdy[c]), .rsp(av_rsp[c]));
    tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(STALL_PCT)) u_bv (.clk, .req(bv_req[c]), .req_ready(bv_rdy[c]), .rsp(bv_rsp[c]));
    tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(STALL_PCT)) u_qm (.clk, .req(qm_req[c]), .req_ready(qm_rdy[c]), .rsp(qm_rsp[c]));
    tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(STALL_PCT)) u_sh (.clk, .req(sh_req[c]), .req_ready(sh_rdy[c]), .rsp(sh_rsp[c]));
    tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(STALL_PCT)) u_bi (.clk, .req(bi_req[c]), .req_ready(bi_rdy[c]), .rsp(bi_rsp[c]));

    always @(posedge clk) begin
      if (c_wr[c].valid && c_rdy[c]) begin
        c_writes[c]++;
        if (c_wr[c].addr >= MEMSZ) c_bad[c]++;
        else begin
          if (c_seen[c][c_wr[c].addr]) c_dup[c]++;
          c_seen[c][c_wr[c].addr] = 1'b1;
          c_m[c][c_wr[c].addr]    = c_wr[c].data;
        end
      end
      c_rdy[c] <= (($urandom % 100) >= STALL_PCT);
    end
  end

  // ------------------------------------------------------- bookkeeping
  // In a VFX build the testbench sets vfx_fp before run_case to pick float.
  bit vfx_fp = 1'b0;
  int n_vfx_int8 = 0, n_vfx_fp = 0;
  int checks = 0, failures = 0;
  int n_sparse = 0, n_dense = 0, n_partial_tile = 0, n_multi_tile = 0, n_empty_rows = 0;
  int n_bias = 0, n_multicore = 0;
  longint n_stall_fifo = 0, n_stall_pe = 0, n_clamp = 0;
  longint last_cycles = 0;

  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (ev_stall_fifo[c]) n_stall_fifo++;
      if (ev_stall_pe[c])   n_stall_pe++;
      if (ev_clamp[c])      n_clamp++;
    end
  end

  initial begin
    start = 1'b0; prec_fp = 1'b0; mode = MODE_GEMM; n = '0; m = '0; p = '0;
    bias_count = '0; zp = '0; cmin = -8'sd128; cmax = 8'sd127;
    for (int c = 0; c < NC; c++) begin
      c_writes[c] = 0; c_bad[c] = 0; c_dup[c] = 0;
      for (int i = 0; i < MEMSZ; i++) begin
        rp_m[c][i] = '0; ci_m[c][i] = '0; av_m[c][i] = '0; bv_m[c][i] = '0;
        qm_m[c][i] = '0; sh_m[c][i] = '0; bi_m[c][i] = '0; c_m[c][i] = '0; c_seen[c][i] = 0;
      end
    end
  end

  function automatic logic [31:0] rand_word(bit is_float);
    if (is_float) return r2f(real'(int'($urandom % 9) - 4));
    return $urandom;
  endfunction

  // A (N x MW words), B (MW x P words)
  logic [31:0] A [MAXN][MAXMW];
  logic [31:0] B [MAXMW][MAXP];

  task automatic run_case(input mode_e md, input int NN, input int MW, input int PP,
                          input int sparsity_pct, input bit use_bias, input int zpv,
                          input int cmin_v, input int cmax_v, input int timeout_cycles);
    bit   fl;
    int   rows_per, r0, nrow, nnz, exp_i, err_here;
    bit   ok;
    int   acc;
    real  accr, got;
    longint t0;
    fl = (PREC == PREC_FP32) || ((PREC == PREC_VFX) && vfx_fp);
    prec_fp = fl;
    if (PREC == PREC_VFX) begin if (fl) n_vfx_fp++; else n_vfx_int8++; end
    // --- data
    for (int i = 0; i < NN; i++)
      for (int k = 0; k < MW; k++) begin
        A[i][k] = rand_word(fl);
        if (md == MODE_SPMM && (int'($urandom % 100) < sparsity_pct || i == 0)) A[i][k] = '0;
      end
    for (int k = 0; k < MW; k++)
      for (int j = 0; j < PP; j++) B[k][j] = rand_word(fl);
    rows_per = (NN + NC - 1) / NC;
    for (int c = 0; c < NC; c++) begin
      r0   = c * rows_per;
      nrow = (NN - r0 < rows_per) ? ((NN - r0 > 0) ? NN - r0 : 0) : rows_per;
      n[c] = nrow;
      nnz  = 0;
      rp_m[c][0] = 0;
      for (int i = 0; i < nrow; i++) begin
        for (int k = 0; k < MW; k++) begin
          if (md == MODE_SPMM) begin
            if (A[r0+i][k] != 0) begin
              ci_m[c][nnz] = k; av_m[c][nnz] = A[r0+i][k]; nnz++;
            end
          end else begin
            av_m[c][i*MW + k] = A[r0+i][k];
          end
        end
        rp_m[c][i+1] = nnz;
        if (md == MODE_SPMM && rp_m[c][i+1] == rp_m[c][i]) n_empty_rows++;
        qm_m[c][i] = 32'h4000_0000 + ($urandom & 32'h3FFF_FFFF);
        sh_m[c][i] = fl ? 0 : -(int'($urandom % 6) + 9);
        bi_m[c][i] = int'($urandom % 2001) - 1000;
      end
      for (int k = 0; k < MW; k++)
        for (int j = 0; j < PP; j++) bv_m[c][k*PP + j] = B[k][j];
      for (int i = 0; i < MEMSZ; i++) begin c_m[c][i] = 32'hA5A5_A5A5; c_seen[c][i] = 0; end
      c_writes[c] = 0; c_dup[c] = 0; c_bad[c] = 0;
    end
    // --- run
    -> load_mem;
    @(negedge clk);
    mode = md; m = fl ? MW : MW * 4; p = PP; bias_count = use_bias ? NN : 0; zp = zpv;
    cmin = 8'(cmin_v); cmax = 8'(cmax_v);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = 0;
    repeat (2) @(negedge clk);
    while (!done && t0 < longint'(timeout_cycles)) begin @(negedge clk); t0++; end
    last_cycles = t0 + 2;
    checks++;
    if (!done) begin
      failures++;
      $display("ERROR: run timed out after %0d cycles (mode %0d N %0d MW %0d P %0d)", t0, md, NN, MW, PP);
    end
    // --- compare
    err_here = 0;
    for (int c = 0; c < NC; c++) begin
      r0 = c * rows_per;
      checks++;
      if (c_writes[c] != n[c] * PP || c_dup[c] != 0 || c_bad[c] != 0) begin
        failures++;
        $display("ERROR: core %0d wrote %0d (expected %0d), dup %0d, bad %0d", c, c_writes[c], n[c]*PP, c_dup[c], c_bad[c]);
      end
      for (int i = 0; i < int'(n[c]); i++)
        for (int j = 0; j < PP; j++) begin
          checks++;
          if (!fl) begin
            acc = 0;
            for (int k = 0; k < MW; k++)
              for (int z = 0; z < 4; z++)
                acc += int'($signed(A[r0+i][k][8*z +: 8])) * (int'($signed(B[k][j][8*z +: 8])) - zpv);
            exp_i = requant_ref(acc, use_bias ? int'(bi_m[c][i]) : 0, int'(qm_m[c][i]), int'(sh_m[c][i]), cmin_v, cmax_v);
            ok = (c_m[c][j*int'(n[c]) + i] == 32'(exp_i));
            if (!ok && err_here < 5)
              $display("ERROR: core %0d C[%0d][%0d] = %0d, expected %0d (acc %0d)", c, i, j,
                       $signed(c_m[c][j*int'(n[c]) + i]), exp_i, acc);
          end else begin
            accr = 0.0;
            for (int k = 0; k < MW; k++)
              accr += f2r(A[r0+i][k]) * (f2r(B[k][j]) - real'(zpv));
            got = f2r(c_m[c][j*int'(n[c]) + i]);
            ok  = (got == accr);
            if (!ok && err_here < 5)
              $display("ERROR: core %0d C[%0d][%0d] = %f, expected %f", c, i, j, got, accr);
          end
          if (!ok) begin failures++; err_here++; end
        end
    end
    if (md == MODE_SPMM) n_sparse++; else n_dense++;
    if (PP % PES != 0) n_partial_tile++;
    if (PP > PES) n_multi_tile++;
    if (use_bias) n_bias++;
    if (NC > 1 && n[NC-1] != 0) n_multicore++;
    $display("run: prec %s mode %s N=%0d MW=%0d P=%0d sparsity=%0d%% cycles=%0d errors=%0d",
             fl ? "fp32" : "int8", md == MODE_SPMM ? "SPMM" : "GEMM", NN, MW, PP, sparsity_pct,
             last_cycles, err_here);
  endtask
endmodule

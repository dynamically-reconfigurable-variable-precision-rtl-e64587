// tb_read_unit: runs Stage 1 against seven behavioural memory ports with
// random request stalls and latencies, and a model Stage 2 that consumes
// elements (with random gaps) only while a tile is ready and reports
// tile_done after the tile's N row ends. Checks, for every tile, the B block
// written into the tile buffer, tile_cols, the complete element stream (GEMM
// words or CSR pairs, the zero element for an empty row, row-end flags, and
// a non-zero row_ptr[0]), and the per-row QM/shift/bias stream (bias 0 when
// disabled), once per tile. Also checks that, with no gaps and no stalls,
// a GEMM tile leaves at one element per cycle.
module tb_read_unit;
  import fades_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int PES = 4, DEPTH = 16, MEMSZ = 512;

  logic start, params_en, bias_en, busy;
  mode_e mode;
  logic [31:0] n_rows, mw, p_cols;
  rd_req_t rp_req, ci_req, av_req, bv_req, qm_req, sh_req, bi_req;
  logic    rp_req_ready, ci_req_ready, av_req_ready, bv_req_ready, qm_req_ready, sh_req_ready, bi_req_ready;
  rd_rsp_t rp_rsp, ci_rsp, av_rsp, bv_rsp, qm_rsp, sh_rsp, bi_rsp;
  logic b_wr_en, tile_ready, tile_done, elem_valid, elem_ready, param_valid, param_ready;
  logic [$clog2(DEPTH)-1:0] b_wr_row;
  logic [$clog2(PES)-1:0] b_wr_lane;
  logic [31:0] b_wr_data, tile_cols;
  elem_t elem;
  param_t param;

  logic [31:0] rp_m [MEMSZ], ci_m [MEMSZ], av_m [MEMSZ], bv_m [MEMSZ], qm_m [MEMSZ], sh_m [MEMSZ], bi_m [MEMSZ];

  read_unit #(.PES(PES), .DEPTH(DEPTH)) dut (.*);

  localparam int SP = 15;
  tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(SP)) u_rp (.clk, .req(rp_req), .req_ready(rp_req_ready), .rsp(rp_rsp));
  tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(SP)) u_ci (.clk, .req(ci_req), .req_ready(ci_req_ready), .rsp(ci_rsp));
  tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(SP)) u_av (.clk, .req(av_req), .req_ready(av_req_ready), .rsp(av_rsp));
  tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(0), .MAX_LAT(1)) u_bv (.clk, .req(bv_req), .req_ready(bv_req_ready), .rsp(bv_rsp));
  tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(SP)) u_qm (.clk, .req(qm_req), .req_ready(qm_req_ready), .rsp(qm_rsp));
  tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(SP)) u_sh (.clk, .req(sh_req), .req_ready(sh_req_ready), .rsp(sh_rsp));
  tb_mem_port #(.MEMSZ(MEMSZ), .STALL_PCT(SP)) u_bi (.clk, .req(bi_req), .req_ready(bi_req_ready), .rsp(bi_rsp));

  // ---- model Stage 2 / Stage 3
  logic [31:0] btile [DEPTH][PES];
  elem_t  got_e [$];
  param_t got_p [$];
  int     lasts = 0, tiles_seen = 0;
  bit     gaps = 1;
  logic   e_gate, p_gate, tr_q;
  longint first_el, last_el;

  assign elem_ready  = tile_ready && e_gate;
  assign param_ready = p_gate;

  always @(negedge clk) begin
    e_gate = !gaps || ($urandom % 4 != 0);
    p_gate = !gaps || ($urandom % 3 != 0);
  end

  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    tile_done <= 1'b0;
    tr_q <= tile_ready;
    if (rst_n) begin
      if (b_wr_en) btile[b_wr_row][b_wr_lane] = b_wr_data;
      if (param_valid && param_ready) got_p.push_back(param);
      if (elem_valid && elem_ready) begin
        if (got_e.size() == 0) first_el = cyc;
        last_el = cyc;
        got_e.push_back(elem);
        if (elem.last) begin
          lasts++;
          if (lasts == int'(n_rows)) begin tile_done <= 1'b1; lasts = 0; end
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic run(input mode_e md, input int nr, input int mwv, input int pc,
                     input int sparsity, input bit pen, input bit ben, input bit with_gaps);
    elem_t exp_e [$];
    int nnz, rp0, ntiles;
    gaps = with_gaps;
    mode = md; n_rows = nr; mw = mwv; p_cols = pc; params_en = pen; bias_en = ben;
    for (int i = 0; i < MEMSZ; i++) begin
      bv_m[i] = $urandom; av_m[i] = $urandom; ci_m[i] = $urandom % mwv;
      qm_m[i] = $urandom; sh_m[i] = $urandom; bi_m[i] = $urandom;
    end
    // CSR: row_ptr starts at a non-zero offset
    rp0 = $urandom % 5;
    nnz = rp0;
    rp_m[0] = rp0;
    for (int i = 0; i < nr; i++) begin
      int k = 0;
      if (i != 1)
        for (int c = 0; c < mwv; c++) if (int'($urandom % 100) >= sparsity) begin ci_m[nnz + k] = c; k++; end
      nnz += k;
      rp_m[i+1] = nnz;
    end
    // expected element stream for one tile
    for (int i = 0; i < nr; i++) begin
      elem_t e;
      if (md == MODE_GEMM) begin
        for (int k = 0; k < mwv; k++) begin
          e.col = k; e.a = av_m[i*mwv + k]; e.last = (k == mwv - 1); exp_e.push_back(e);
        end
      end else if (rp_m[i+1] == rp_m[i]) begin
        e.col = 0; e.a = 0; e.last = 1; exp_e.push_back(e);
      end else begin
        for (int q = int'(rp_m[i]); q < int'(rp_m[i+1]); q++) begin
          e.col = ci_m[q]; e.a = av_m[q]; e.last = (q == int'(rp_m[i+1]) - 1); exp_e.push_back(e);
        end
      end
    end
    for (int i = 0; i < MEMSZ; i++) begin
      u_rp.mem[i] = rp_m[i]; u_ci.mem[i] = ci_m[i]; u_av.mem[i] = av_m[i]; u_bv.mem[i] = bv_m[i];
      u_qm.mem[i] = qm_m[i]; u_sh.mem[i] = sh_m[i]; u_bi.mem[i] = bi_m[i];
    end
    got_e.delete(); got_p.delete(); lasts = 0;
    ntiles = (pc + PES - 1) / PES;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < ntiles; t++) begin
      int c0 = t * PES;
      int tc = (pc - c0 < PES) ? pc - c0 : PES;
      int guard = 0;
      while (!tile_ready && guard < 20000) begin @(negedge clk); guard++; end
      checks++;
      if (tile_cols != 32'(tc)) begin failures++; $display("ERROR: tile %0d tile_cols %0d expected %0d", t, tile_cols, tc); end
      for (int k = 0; k < mwv; k++)
        for (int j = 0; j < tc; j++) begin
          checks++;
          if (btile[k][j] != bv_m[k*pc + c0 + j]) begin
            failures++; $display("ERROR: tile %0d B[%0d][%0d] wrong", t, k, j);
          end
        end
      guard = 0;
      while (!tile_done && guard < 20000) begin @(negedge clk); guard++; end
      @(negedge clk);
      checks++;
      if (got_e.size() != exp_e.size()) begin
        failures++; $display("ERROR: tile %0d got %0d elements, expected %0d", t, got_e.size(), exp_e.size());
      end
      for (int q = 0; q < exp_e.size() && q < got_e.size(); q++) begin
        checks++;
        if (got_e[q] != exp_e[q]) begin
          failures++;
          if (failures < 10) $display("ERROR: tile %0d element %0d: col %0d a %h last %0d, expected col %0d a %h last %0d",
            t, q, got_e[q].col, got_e[q].a, got_e[q].last, exp_e[q].col, exp_e[q].a, exp_e[q].last);
        end
      end
      if (!with_gaps && md == MODE_GEMM) begin
        checks++;
        if (last_el - first_el + 1 != longint'(exp_e.size())) begin
          failures++; $display("ERROR: %0d elements spread over %0d cycles", exp_e.size(), last_el - first_el + 1);
        end
      end
      got_e.delete();
    end
    begin
      int guard = 0;
      while (busy && guard < 20000) begin @(negedge clk); guard++; end
      repeat (20) @(negedge clk);
    end
    checks++;
    if (got_p.size() != (pen ? ntiles * nr : 0)) begin
      failures++; $display("ERROR: %0d parameter words, expected %0d", got_p.size(), pen ? ntiles * nr : 0);
    end
    for (int q = 0; q < got_p.size(); q++) begin
      int i = q % nr;
      checks++;
      if (got_p[q].qm != qm_m[i] || got_p[q].shift != sh_m[i] || got_p[q].bias != (ben ? bi_m[i] : 32'd0)) begin
        failures++; if (failures < 10) $display("ERROR: parameter %0d wrong", q);
      end
    end
    $display("run %s N=%0d MW=%0d P=%0d: %0d tiles", md == MODE_GEMM ? "GEMM" : "SPMM", nr, mwv, pc, ntiles);
  endtask

  initial begin
    start = 0; mode = MODE_GEMM; n_rows = 0; mw = 0; p_cols = 0; params_en = 0; bias_en = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run(MODE_GEMM, 6, 5, 10, 0, 1, 1, 1);
    run(MODE_SPMM, 9, 12, 7, 60, 1, 0, 1);
    run(MODE_SPMM, 5, 16, 4, 0, 0, 0, 1);
    run(MODE_GEMM, 4, 16, 3, 0, 0, 0, 0);
    run(MODE_SPMM, 12, 3, 9, 70, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

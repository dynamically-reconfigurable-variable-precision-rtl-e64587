// read_unit: Stage 1 (READ) of a FADES core.
//
// The output matrix is built in tiles of PES columns of B. For each tile the
// unit
//   * loads the B block B(0..MW-1, col0..col0+tc-1) into the B tile buffer,
//     one word per cycle, where MW is the number of 32-bit words per A row
//     (M/4 in int8 mode, M in float mode) and tc = min(PES, P - col0);
//   * streams the whole of A to Stage 2 as {col, a, last} elements: in GEMM
//     mode every word of every row with col = 0..MW-1; in SPMM mode the CSR
//     pairs (column_index, non-zero value) with row boundaries from row_ptr;
//     an empty CSR row is sent as one zero element so that it still yields a
//     result;
//   * streams the per-row (per-filter) QM, shift and bias words to Stage 3
//     (int8 scaling only; bias only when bias_count != 0).
// Stage 2 is told the tile is ready once the B block is complete, and the
// next tile starts after Stage 2 reports tile_done: the B buffer is single,
// so A is streamed again for every tile, as the paper describes. In SPMM
// mode row_ptr[0] and row_ptr[N] are read once at start to find the range of
// non-zeros. Inside a tile elements leave at one per cycle; a row of one
// non-zero right after another row costs one extra cycle.
// Each memory port is a read_channel (word addresses, in-order data). Which
// data is read, and when, follows the paper; the port protocol, the
// empty-row element and the row_ptr prologue are this design's.
module read_unit
  import fades_pkg::*;
#(
  parameter int unsigned PES   = 32,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned CH_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  mode_e       mode,
  input  logic [31:0] n_rows,
  input  logic [31:0] mw,
  input  logic [31:0] p_cols,
  input  logic        params_en,
  input  logic        bias_en,
  output logic        busy,
  // memory read ports
  output rd_req_t     rp_req,  input logic rp_req_ready,  input rd_rsp_t rp_rsp,
  output rd_req_t     ci_req,  input logic ci_req_ready,  input rd_rsp_t ci_rsp,
  output rd_req_t     av_req,  input logic av_req_ready,  input rd_rsp_t av_rsp,
  output rd_req_t     bv_req,  input logic bv_req_ready,  input rd_rsp_t bv_rsp,
  output rd_req_t     qm_req,  input logic qm_req_ready,  input rd_rsp_t qm_rsp,
  output rd_req_t     sh_req,  input logic sh_req_ready,  input rd_rsp_t sh_rsp,
  output rd_req_t     bi_req,  input logic bi_req_ready,  input rd_rsp_t bi_rsp,
  // B tile buffer write port
  output logic                     b_wr_en,
  output logic [$clog2(DEPTH)-1:0] b_wr_row,
  output logic [$clog2(PES)-1:0]   b_wr_lane,
  output logic [31:0]              b_wr_data,
  // tile handshake with Stage 2
  output logic        tile_ready,
  output logic [31:0] tile_cols,
  input  logic        tile_done,
  // element stream to Stage 2
  output logic        elem_valid,
  input  logic        elem_ready,
  output elem_t       elem,
  // parameter stream to Stage 3
  output logic        param_valid,
  input  logic        param_ready,
  output param_t      param
);
  typedef enum logic [2:0] {S_IDLE, S_PRO0, S_PRO1, S_TILE_START, S_TILE_RUN, S_TILE_WAIT} state_e;
  state_e state;

  // channel controls
  logic        rp_start, ci_start, av_start, bv_start, qm_start, sh_start, bi_start;
  logic [31:0] rp_base,  rp_inner;
  logic [31:0] av_base, av_inner, av_outer;
  logic        rp_idle, ci_idle, av_idle, bv_idle, qm_idle, sh_idle, bi_idle;
  logic        rp_v, ci_v, av_v, bv_v, qm_v, sh_v, bi_v;
  logic        rp_r, ci_r, av_r, bv_r, qm_r, sh_r, bi_r;
  logic [31:0] rp_d, ci_d, av_d, bv_d, qm_d, sh_d, bi_d;

  logic        sparse;
  logic [31:0] nnz_base, nnz_end;
  logic [31:0] col0;
  logic        all_idle;

  assign sparse   = (mode == MODE_SPMM);
  assign busy     = (state != S_IDLE);
  assign all_idle = rp_idle && ci_idle && av_idle && bv_idle && qm_idle && sh_idle && bi_idle;
  assign tile_cols = ((p_cols - col0) < PES) ? (p_cols - col0) : PES;

  // ---------------------------------------------------------------- channels
  read_channel #(.DEPTH(CH_DEPTH)) u_rp (
    .clk, .rst_n, .start(rp_start), .base(rp_base), .inner(rp_inner), .outer(32'd1), .stride(32'd0),
    .issued_all(rp_idle), .mem_req(rp_req), .mem_req_ready(rp_req_ready), .mem_rsp(rp_rsp),
    .out_valid(rp_v), .out_ready(rp_r), .out_data(rp_d));
  read_channel #(.DEPTH(CH_DEPTH)) u_ci (
    .clk, .rst_n, .start(ci_start), .base(nnz_base), .inner(nnz_end - nnz_base), .outer(32'd1), .stride(32'd0),
    .issued_all(ci_idle), .mem_req(ci_req), .mem_req_ready(ci_req_ready), .mem_rsp(ci_rsp),
    .out_valid(ci_v), .out_ready(ci_r), .out_data(ci_d));
  read_channel #(.DEPTH(CH_DEPTH)) u_av (
    .clk, .rst_n, .start(av_start), .base(av_base), .inner(av_inner), .outer(av_outer), .stride(av_inner),
    .issued_all(av_idle), .mem_req(av_req), .mem_req_ready(av_req_ready), .mem_rsp(av_rsp),
    .out_valid(av_v), .out_ready(av_r), .out_data(av_d));
  read_channel #(.DEPTH(CH_DEPTH)) u_bv (
    .clk, .rst_n, .start(bv_start), .base(col0), .inner(tile_cols), .outer(mw), .stride(p_cols),
    .issued_all(bv_idle), .mem_req(bv_req), .mem_req_ready(bv_req_ready), .mem_rsp(bv_rsp),
    .out_valid(bv_v), .out_ready(bv_r), .out_data(bv_d));
  read_channel #(.DEPTH(CH_DEPTH)) u_qm (
    .clk, .rst_n, .start(qm_start), .base(32'd0), .inner(n_rows), .outer(32'd1), .stride(32'd0),
    .issued_all(qm_idle), .mem_req(qm_req), .mem_req_ready(qm_req_ready), .mem_rsp(qm_rsp),
    .out_valid(qm_v), .out_ready(qm_r), .out_data(qm_d));
  read_channel #(.DEPTH(CH_DEPTH)) u_sh (
    .clk, .rst_n, .start(sh_start), .base(32'd0), .inner(n_rows), .outer(32'd1), .stride(32'd0),
    .issued_all(sh_idle), .mem_req(sh_req), .mem_req_ready(sh_req_ready), .mem_rsp(sh_rsp),
    .out_valid(sh_v), .out_ready(sh_r), .out_data(sh_d));
  read_channel #(.DEPTH(CH_DEPTH)) u_bi (
    .clk, .rst_n, .start(bi_start), .base(32'd0), .inner(n_rows), .outer(32'd1), .stride(32'd0),
    .issued_all(bi_idle), .mem_req(bi_req), .mem_req_ready(bi_req_ready), .mem_rsp(bi_rsp),
    .out_valid(bi_v), .out_ready(bi_r), .out_data(bi_d));

  assign av_base  = sparse ? nnz_base : 32'd0;
  assign av_inner = sparse ? (nnz_end - nnz_base) : mw;
  assign av_outer = sparse ? 32'd1 : n_rows;

  // -------------------------------------------------------- control sequence
  logic tile_start;
  assign tile_start = (state == S_TILE_START);
  always_comb begin
    rp_start = 1'b0;
    rp_base  = 32'd0;
    rp_inner = n_rows + 1;
    case (state)
      S_IDLE:       begin rp_start = start && sparse; rp_inner = 32'd1; end
      S_PRO0:       begin rp_start = rp_v; rp_base = n_rows; rp_inner = 32'd1; end
      S_TILE_START: rp_start = sparse;
      default:      rp_start = 1'b0;
    endcase
  end
  assign ci_start = tile_start && sparse;
  assign av_start = tile_start;
  assign bv_start = tile_start;
  assign qm_start = tile_start && params_en;
  assign sh_start = tile_start && params_en;
  assign bi_start = tile_start && params_en && bias_en;

  logic        b_loaded;
  logic        prologue_pop;
  assign prologue_pop = (state == S_PRO0 || state == S_PRO1) && rp_v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      nnz_base   <= '0;
      nnz_end    <= '0;
      col0       <= '0;
      tile_ready <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          col0  <= '0;
          state <= (p_cols == 0) ? S_IDLE : (sparse ? S_PRO0 : S_TILE_START);
        end
        S_PRO0: if (rp_v) begin nnz_base <= rp_d; state <= S_PRO1; end
        S_PRO1: if (rp_v) begin nnz_end  <= rp_d; state <= S_TILE_START; end
        S_TILE_START: state <= S_TILE_RUN;
        S_TILE_RUN: begin
          if (b_loaded) tile_ready <= 1'b1;
          if (tile_done) begin
            tile_ready <= 1'b0;
            state      <= S_TILE_WAIT;
          end
        end
        S_TILE_WAIT: if (all_idle) begin
          if (col0 + PES >= p_cols) begin
            state <= S_IDLE;
          end else begin
            col0  <= col0 + PES;
            state <= S_TILE_START;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------ B block into buffer
  logic [31:0] b_row, b_lane;
  assign bv_r      = !b_loaded && (state == S_TILE_RUN);
  assign b_wr_en   = bv_r && bv_v;
  assign b_wr_row  = b_row[$clog2(DEPTH)-1:0];
  assign b_wr_lane = b_lane[$clog2(PES)-1:0];
  assign b_wr_data = bv_d;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_loaded <= 1'b0;
      b_row    <= '0;
      b_lane   <= '0;
    end else if (tile_start) begin
      b_loaded <= (mw == 0);
      b_row    <= '0;
      b_lane   <= '0;
    end else if (b_wr_en) begin
      if (b_lane == tile_cols - 1) begin
        b_lane <= '0;
        b_row  <= b_row + 1;
        if (b_row == mw - 1) b_loaded <= 1'b1;
      end else begin
        b_lane <= b_lane + 1;
      end
    end
  end

  // --------------------------------------------------------- element stream
  // Row lengths come from consecutive row_ptr values (SPMM) or are MW (GEMM).
  logic        rp_primed;
  logic [31:0] rp_prev;
  logic        len_v;
  logic [31:0] len;
  logic [31:0] rows_left, rem, dcol;
  logic        have_row;
  logic        src_v;
  logic        emit_elem, emit_bubble, take_hdr, prime_pop;

  assign len_v = sparse ? (rp_v && rp_primed) : 1'b1;
  assign len   = sparse ? (rp_d - rp_prev) : mw;
  assign src_v = sparse ? (ci_v && av_v) : av_v;

  always_comb begin
    emit_elem   = 1'b0;
    emit_bubble = 1'b0;
    take_hdr    = 1'b0;
    if (state == S_TILE_RUN) begin
      if (have_row) begin
        emit_elem = src_v && elem_ready;
        // start the next non-empty row right behind the current one
        take_hdr  = emit_elem && (rem == 1) && (rows_left != 0) && len_v && (len != 0);
      end else if ((rows_left != 0) && len_v) begin
        if (len == 0) begin
          emit_bubble = elem_ready;
          take_hdr    = elem_ready;
        end else begin
          take_hdr    = 1'b1;
        end
      end
    end
  end

  assign prime_pop  = (state == S_TILE_RUN) && sparse && !rp_primed && rp_v;
  assign rp_r       = prologue_pop || prime_pop || (take_hdr && sparse);
  assign ci_r       = emit_elem && sparse;
  assign av_r       = emit_elem;
  assign elem_valid = emit_elem || emit_bubble;
  always_comb begin
    elem.last = emit_bubble || (rem == 1);
    elem.col  = emit_bubble ? 32'd0 : (sparse ? ci_d : dcol);
    elem.a    = emit_bubble ? 32'd0 : av_d;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp_primed <= 1'b0;
      rp_prev   <= '0;
      rows_left <= '0;
      rem       <= '0;
      dcol      <= '0;
      have_row  <= 1'b0;
    end else if (tile_start) begin
      rp_primed <= 1'b0;
      rows_left <= n_rows;
      rem       <= '0;
      dcol      <= '0;
      have_row  <= 1'b0;
    end else begin
      if (prime_pop) begin
        rp_primed <= 1'b1;
        rp_prev   <= rp_d;
      end
      if (take_hdr && sparse) rp_prev <= rp_d;
      if (emit_elem) begin
        rem  <= rem - 1;
        dcol <= (rem == 1) ? 32'd0 : dcol + 1;
        if (rem == 1) have_row <= 1'b0;
      end
      if (take_hdr) begin
        rows_left <= rows_left - 1;
        if (len != 0) begin
          have_row <= 1'b1;
          rem      <= len;
        end
      end
    end
  end

  // ---------------------------------------------------------- parameters
  assign param_valid = qm_v && sh_v && (bi_v || !bias_en);
  assign qm_r = param_valid && param_ready;
  assign sh_r = param_valid && param_ready;
  assign bi_r = param_valid && param_ready && bias_en;
  assign param.qm    = qm_d;
  assign param.shift = sh_d;
  assign param.bias  = bias_en ? bi_d : 32'd0;

  // Elements are only produced for the rows of the tile.
  assert property (@(posedge clk) disable iff (!rst_n) take_hdr |-> rows_left != 0);
endmodule

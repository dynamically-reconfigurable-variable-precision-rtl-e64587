// compute_unit: Stage 2 (COMPUTE) of a FADES core.
//
// Once Stage 1 reports the B tile loaded (tile_ready), this stage pops one
// {col, a, last} element per cycle. It reads row `col` of the B tile for all
// PES lanes at once (b_buffer, one cycle latency) and hands the A word and
// lane j's B word to PE j, so every PE works on its own column of B in the
// same cycle. When a PE returns a row result it is pushed into that PE's
// result FIFO, but only for lanes below tile_cols: in the last, narrower
// tile the spare PEs compute and do not write. After N row results the tile
// is complete and tile_done pulses for one cycle.
//
// Element issue stalls when any result FIFO has fewer than 4 free entries
// (backpressure from Stage 3) and, for the float PEs, from the last element
// of a row until that row's results come back, because those PEs drain
// their adder pipeline between rows. The int8 PEs never stall the stream.
// PRECISION selects which PE variant is built: the int8 and float variants
// are the two reconfigurable modules of the paper, never present together.
// PRECISION = PREC_VFX builds both PE arrays and fp_sel (held constant for a
// whole run) chooses which one receives the elements and returns results;
// fp_sel is ignored in the other builds.
// b_rd_row is the incoming element's column index passed straight to the B
// buffer's read address (the registered read provides the pipeline stage),
// and stall_pe is constant 0 in the int8 build.
module compute_unit
  import fades_pkg::*;
#(
  parameter int unsigned PES          = 32,
  parameter int unsigned DEPTH        = 1024,
  parameter prec_e       PRECISION    = PREC_INT8,
  parameter int unsigned FADD_LATENCY = FADD_LATENCY_DEFAULT,
  parameter int unsigned RES_DEPTH    = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [31:0]              n_rows,
  input  logic [31:0]              zp,
  input  logic                     fp_sel,
  // tile handshake with Stage 1
  input  logic                     tile_ready,
  input  logic [31:0]              tile_cols,
  output logic                     tile_done,
  // element stream from Stage 1
  input  logic                     elem_valid,
  output logic                     elem_ready,
  input  elem_t                    elem,
  // B tile read port
  output logic                     b_rd_en,
  output logic [$clog2(DEPTH)-1:0] b_rd_row,
  input  logic [PES-1:0][31:0]     b_rd_data,
  // result FIFOs towards Stage 3
  output logic [PES-1:0]           res_valid,
  input  logic [PES-1:0]           res_ready,
  output logic [PES-1:0][31:0]     res_data,
  // activity, for monitoring
  output logic                     stall_fifo,
  output logic                     stall_pe
);
  localparam int unsigned CW = $clog2(RES_DEPTH + 1);

  logic        is_fp;
  logic        active;
  logic [31:0] rows_issued, rows_done;
  logic        wait_pe;
  logic        space_ok;
  logic        issue;
  logic        s_valid, s_last;
  logic [31:0] s_a;
  logic [PES-1:0]        pe_res_valid, pe_in_ready;
  logic [PES-1:0][31:0]  pe_res;
  logic [PES-1:0][CW-1:0] fifo_cnt;
  logic [PES-1:0]        fifo_in_ready;

  always_comb begin
    space_ok = 1'b1;
    for (int j = 0; j < int'(PES); j++)
      if (32'(fifo_cnt[j]) + 4 > RES_DEPTH) space_ok = 1'b0;
  end

  assign issue      = active && elem_valid && space_ok && !wait_pe && (rows_issued < n_rows);
  assign elem_ready = issue;
  assign b_rd_en    = issue;
  assign b_rd_row   = elem.col[$clog2(DEPTH)-1:0];
  assign stall_fifo = active && elem_valid && !space_ok;
  assign stall_pe   = active && elem_valid && wait_pe;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active      <= 1'b0;
      rows_issued <= '0;
      rows_done   <= '0;
      wait_pe     <= 1'b0;
      tile_done   <= 1'b0;
      s_valid     <= 1'b0;
      s_last      <= 1'b0;
      s_a         <= '0;
    end else begin
      tile_done <= 1'b0;
      s_valid   <= issue;
      s_last    <= elem.last;
      s_a       <= elem.a;
      if (!active && tile_ready && !tile_done) begin
        active      <= 1'b1;
        rows_issued <= '0;
        rows_done   <= '0;
      end
      if (issue && elem.last) begin
        rows_issued <= rows_issued + 1;
        if (is_fp) wait_pe <= 1'b1;
      end
      if (pe_res_valid[0]) begin
        rows_done <= rows_done + 1;
        wait_pe   <= 1'b0;
      end
      if (active && (rows_done == n_rows)) begin
        active    <= 1'b0;
        tile_done <= 1'b1;
      end
    end
  end

  assign is_fp = (PRECISION == PREC_FP32) || ((PRECISION == PREC_VFX) && fp_sel);

  for (genvar j = 0; j < int'(PES); j++) begin : g_pe
    if (PRECISION == PREC_VFX) begin : g_vfx
      logic        i_rdy, i_rv, f_rdy, f_rv;
      logic [31:0] i_res, f_res;
      pe_int8 u_pe_i (
        .clk, .rst_n,
        .in_valid (s_valid && !fp_sel), .in_last (s_last),
        .a (s_a), .b (b_rd_data[j]), .zp,
        .in_ready (i_rdy), .res_valid (i_rv), .res (i_res)
      );
      pe_float #(.FADD_LATENCY(FADD_LATENCY)) u_pe_f (
        .clk, .rst_n,
        .in_valid (s_valid && fp_sel), .in_last (s_last),
        .a (s_a), .b (b_rd_data[j]), .zp,
        .in_ready (f_rdy), .res_valid (f_rv), .res (f_res)
      );
      assign pe_in_ready[j]  = fp_sel ? f_rdy : i_rdy;
      assign pe_res_valid[j] = fp_sel ? f_rv  : i_rv;
      assign pe_res[j]       = fp_sel ? f_res : i_res;
    end else if (PRECISION == PREC_INT8) begin : g_int8
      pe_int8 u_pe (
        .clk, .rst_n,
        .in_valid (s_valid), .in_last (s_last),
        .a (s_a), .b (b_rd_data[j]), .zp,
        .in_ready (pe_in_ready[j]),
        .res_valid (pe_res_valid[j]), .res (pe_res[j])
      );
    end else begin : g_fp32
      pe_float #(.FADD_LATENCY(FADD_LATENCY)) u_pe (
        .clk, .rst_n,
        .in_valid (s_valid), .in_last (s_last),
        .a (s_a), .b (b_rd_data[j]), .zp,
        .in_ready (pe_in_ready[j]),
        .res_valid (pe_res_valid[j]), .res (pe_res[j])
      );
    end

    stream_fifo #(.WIDTH(32), .DEPTH(RES_DEPTH)) u_res_fifo (
      .clk, .rst_n,
      .in_valid  (pe_res_valid[j] && (32'(j) < tile_cols)),
      .in_ready  (fifo_in_ready[j]),
      .in_data   (pe_res[j]),
      .out_valid (res_valid[j]),
      .out_ready (res_ready[j]),
      .out_data  (res_data[j]),
      .count     (fifo_cnt[j])
    );

    // A row result must always find room (space is reserved before issue),
    // and a PE must be ready whenever an element reaches it.
    assert property (@(posedge clk) disable iff (!rst_n) pe_res_valid[j] |-> fifo_in_ready[j]);
    assert property (@(posedge clk) disable iff (!rst_n) s_valid |-> pe_in_ready[j]);
  end
endmodule

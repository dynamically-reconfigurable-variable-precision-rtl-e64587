// read_channel: one memory read port of the Stage 1 read unit
// (readindex / readval / readPtr / B reader).
//
// On `start` it latches an address pattern and issues the word addresses
//   base + o*stride + i,  o = 0..outer-1, i = 0..inner-1
// one per cycle on mem_req while mem_req_ready is high. Responses come back
// in order on mem_rsp with no backpressure, so a request is only issued when
// the local FIFO plus the requests still in flight leave room for its answer
// (credit counting). The data leaves as a valid/ready stream. `issued_all`
// is high once every address of the sequence has been accepted; `start` is
// only honoured then. A zero inner or outer count issues nothing.
// The paper names the readers; the request/response protocol is this design's.
module read_channel
  import fades_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] base,
  input  logic [31:0] inner,
  input  logic [31:0] outer,
  input  logic [31:0] stride,
  output logic        issued_all,
  output rd_req_t     mem_req,
  input  logic        mem_req_ready,
  input  rd_rsp_t     mem_rsp,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [31:0] row_addr, i_cnt, o_cnt, r_inner, r_outer, r_stride;
  logic        active;
  logic [CW:0] inflight;
  logic [CW-1:0] fifo_count;
  logic        fifo_in_ready;
  logic        issue;

  assign issued_all = !active;
  // Space left for answers: FIFO occupancy + requests not yet answered.
  assign mem_req.valid = active && ((CW+1)'(fifo_count) + inflight < (CW+1)'(DEPTH));
  assign mem_req.addr  = row_addr + i_cnt;
  assign issue = mem_req.valid && mem_req_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active   <= 1'b0;
      inflight <= '0;
      i_cnt    <= '0;
      o_cnt    <= '0;
      row_addr <= '0;
      r_inner  <= '0;
      r_outer  <= '0;
      r_stride <= '0;
    end else begin
      case ({issue, mem_rsp.valid})
        2'b10:   inflight <= inflight + 1'b1;
        2'b01:   inflight <= inflight - 1'b1;
        default: inflight <= inflight;
      endcase
      if (start && !active) begin
        active   <= (inner != 0) && (outer != 0);
        row_addr <= base;
        r_inner  <= inner;
        r_outer  <= outer;
        r_stride <= stride;
        i_cnt    <= '0;
        o_cnt    <= '0;
      end else if (issue) begin
        if (i_cnt == r_inner - 1) begin
          i_cnt    <= '0;
          row_addr <= row_addr + r_stride;
          o_cnt    <= o_cnt + 1;
          if (o_cnt == r_outer - 1) active <= 1'b0;
        end else begin
          i_cnt <= i_cnt + 1;
        end
      end
    end
  end

  stream_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (mem_rsp.valid),
    .in_ready (fifo_in_ready),
    .in_data  (mem_rsp.data),
    .out_valid, .out_ready, .out_data,
    .count    (fifo_count)
  );

  // Responses must match a request in flight and always find room.
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp.valid |-> (inflight != 0));
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp.valid |-> fifo_in_ready);

endmodule

// stream_fifo: synchronous first-word-fall-through FIFO with valid/ready
// handshakes on both sides.
//
// Every link between the FADES dataflow stages, and each PE's result FIFO,
// is one of these. A word is written when in_valid && in_ready and leaves
// when out_valid && out_ready; the head word is visible on out_data while
// out_valid is high (zero-cycle read latency). A push into a full FIFO is
// refused (in_ready low); pushes and pops in the same cycle are allowed when
// the FIFO is full, keeping one transfer per cycle. `count` gives the
// occupancy so producers can reserve space ahead. Reset empties it.
// The paper names the FIFOs; the depth and handshake are this design's.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] ptr);
    return (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A pop of an empty FIFO or a count past DEPTH would be a design error.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);

endmodule

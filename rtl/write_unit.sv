// write_unit: Stage 4 (WRITE) of a FADES core.
//
// Places every {value, row, col} from Stage 3 at its address in C so that
// the tiles assemble into the full N x P result: with TRANS=1 C is written
// column-major (address col*N + row, the layout TensorFlow Lite expects),
// with TRANS=0 row-major (row*P + col). The write request is a registered
// valid/address/data word held until c_wr_ready; a new value is taken in the
// same cycle the previous one is accepted, so the unit sustains one write per
// cycle. `done` rises once N*P writes have been accepted and stays high until
// the next start pulse. The address formulas follow the paper's TRANS option;
// the port protocol is this design's.
module write_unit
  import fades_pkg::*;
#(
  parameter bit TRANS = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] n_rows,
  input  logic [31:0] p_cols,
  input  logic        in_valid,
  output logic        in_ready,
  input  out_t        in,
  output wr_req_t     c_wr,
  input  logic        c_wr_ready,
  output logic        done
);
  logic [31:0] written, total;
  logic        running;

  assign total    = n_rows * p_cols;
  assign in_ready = !c_wr.valid || c_wr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c_wr    <= '0;
      written <= '0;
      running <= 1'b0;
      done    <= 1'b0;
    end else begin
      if (start) begin
        written <= '0;
        running <= 1'b1;
        done    <= 1'b0;
      end else if (running && written == total && !c_wr.valid) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
      if (c_wr.valid && c_wr_ready) written <= written + 1;
      if (in_ready) begin
        c_wr.valid <= in_valid;
        c_wr.data  <= in.data;
        c_wr.addr  <= TRANS ? (in.col * n_rows + in.row) : (in.row * p_cols + in.col);
      end
    end
  end

  // A write must stay stable until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
    c_wr.valid && !c_wr_ready |=> c_wr.valid && $stable(c_wr.addr) && $stable(c_wr.data));
endmodule

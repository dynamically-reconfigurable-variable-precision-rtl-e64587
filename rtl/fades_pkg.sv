// fades_pkg: types and constants shared by the FADES sparse/dense matrix cores.
//
// A FADES core computes C = A x B where A (N x M) is either dense (GEMM) or
// stored in CSR form (SPMM), and B (M x P) is dense. All data words are 32
// bits; in int8 mode one word packs four int8 values along M, in float mode
// one word is one IEEE-754 single. The structs below describe the memory
// read/write ports (word address, in-order data) and the streams that link
// the four dataflow stages (read, compute, scale, write).
package fades_pkg;

  // Run-time matrix mode (the 1-bit "mode" input). The encoding is this
  // design's choice.
  typedef enum logic {
    MODE_GEMM = 1'b0,
    MODE_SPMM = 1'b1
  } mode_e;

  // Arithmetic variant of the compute unit, a compile-time choice. INT8 and
  // FP32 are the two variants exchanged by partial reconfiguration; VFX
  // builds both datapaths side by side and picks one per run with a
  // multiplexer (the run-time `prec_fp` input).
  typedef enum logic [1:0] {
    PREC_INT8 = 2'd0,
    PREC_FP32 = 2'd1,
    PREC_VFX  = 2'd2
  } prec_e;

  // Default accumulation interleave of the float datapath (adder latency).
  localparam int unsigned FADD_LATENCY_DEFAULT = 6;

  // Memory read request: word address, valid. Accepted when req_ready is high.
  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
  } rd_req_t;

  // Memory read response: returned in request order, no backpressure.
  typedef struct packed {
    logic        valid;
    logic [31:0] data;
  } rd_rsp_t;

  // Memory write request for C: word address, data, valid.
  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
    logic [31:0] data;
  } wr_req_t;

  // Stage 1 -> Stage 2 element: B row to use (column index of A), the A
  // word and a flag marking the last element of an A row.
  typedef struct packed {
    logic        last;
    logic [31:0] col;
    logic [31:0] a;
  } elem_t;

  // Stage 1 -> Stage 3 per-row (per-filter) scaling parameters.
  typedef struct packed {
    logic [31:0] qm;
    logic [31:0] shift;
    logic [31:0] bias;
  } param_t;

  // Stage 3 -> Stage 4 output element with its matrix position.
  typedef struct packed {
    logic [31:0] data;
    logic [31:0] row;
    logic [31:0] col;
  } out_t;

endpackage

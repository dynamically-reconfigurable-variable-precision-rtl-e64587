// pe_float: single-precision processing element (the float variant of the
// reconfigurable compute region).
//
// For each accepted element it computes a * (b - float(zero_point_rhs)), the
// paper's float kernel, and accumulates it. A floating-point add takes
// FADD_LATENCY cycles, so one running sum cannot take a new term every cycle;
// as in the paper, FADD_LATENCY partial sums share one pipelined adder and
// the k-th term of a row goes to partial sum k mod FADD_LATENCY, which was
// last updated exactly FADD_LATENCY issues earlier. This sustains one term
// per cycle inside a row.
//
// Pipeline: input -> [subtract zero point] -> [multiply] -> adder with
// FADD_LATENCY register stages writing back into the partial-sum bank.
// When the row's last term is accepted, in_ready drops; the PE waits for the
// adder to drain, then adds the partial sums in order 0..FADD_LATENCY-1, one
// per cycle, presents the total on `res` with res_valid for one cycle,
// clears the bank and raises in_ready again. That end-of-row drain and
// reduction (about 2*FADD_LATENCY+3 cycles) is this design's choice; the paper
// only says that the interleaved partial results are added at the end.
// zero_point_rhs is converted exactly for |zp| < 2^24.
module pe_float
  import fades_pkg::*;
#(
  parameter int unsigned FADD_LATENCY = FADD_LATENCY_DEFAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_last,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] zp,
  output logic        in_ready,
  output logic        res_valid,
  output logic [31:0] res
);
  localparam int unsigned L  = (FADD_LATENCY < 2) ? 2 : FADD_LATENCY;
  localparam int unsigned SW = $clog2(L);

  typedef enum logic [1:0] {S_ACC, S_DRAIN, S_REDUCE} state_e;
  state_e state;

  // zero_point_rhs as a float, negated.
  logic [31:0] zp_abs, neg_zpf;
  logic [4:0]  zp_lead;
  always_comb begin
    zp_abs  = zp[31] ? -zp : zp;
    zp_lead = '0;
    for (int k = 0; k < 24; k++)
      if (zp_abs[k]) zp_lead = 5'(k);
    if (zp_abs == 0)
      neg_zpf = 32'd0;
    else
      neg_zpf = {~zp[31], 8'(8'd127 + 8'(zp_lead)), 23'(zp_abs << (5'd23 - zp_lead))};
  end

  // Stage 1: b - zp
  logic [31:0] diff_c, a1, d1;
  logic        v1;
  fp_add u_sub (.a(b), .b(neg_zpf), .y(diff_c));

  // Stage 2: a * (b - zp)
  logic [31:0] prod_c, p2;
  logic        v2;
  fp_mul u_mul (.a(a1), .b(d1), .y(prod_c));

  // Interleaved accumulation
  logic [31:0]   part [L];
  logic [SW-1:0] slot;
  logic [31:0]   acc_c;
  logic [31:0]   pipe_val  [L-1];
  logic [SW-1:0] pipe_slot [L-1];
  logic          pipe_v    [L-1];
  fp_add u_acc (.a(p2), .b(part[slot]), .y(acc_c));

  // Final reduction of the partial sums
  logic [31:0]   red_acc, red_c;
  logic [SW-1:0] red_idx;
  logic [5:0]    drain_cnt;
  fp_add u_red (.a(red_acc), .b(part[red_idx]), .y(red_c));

  assign in_ready = (state == S_ACC);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_ACC;
      v1 <= 1'b0; a1 <= '0; d1 <= '0;
      v2 <= 1'b0; p2 <= '0;
      slot      <= '0;
      red_acc   <= '0;
      red_idx   <= '0;
      drain_cnt <= '0;
      res       <= '0;
      res_valid <= 1'b0;
      for (int k = 0; k < int'(L); k++) part[k] <= '0;
      for (int k = 0; k < int'(L) - 1; k++) begin
        pipe_v[k] <= 1'b0; pipe_val[k] <= '0; pipe_slot[k] <= '0;
      end
    end else begin
      res_valid <= 1'b0;
      v1 <= in_valid && in_ready;
      a1 <= a;
      d1 <= diff_c;
      v2 <= v1;
      p2 <= prod_c;

      // Adder pipeline: issue at stage 2, write back FADD_LATENCY cycles later.
      pipe_v[0]    <= v2;
      pipe_val[0]  <= acc_c;
      pipe_slot[0] <= slot;
      for (int k = 1; k < int'(L) - 1; k++) begin
        pipe_v[k]    <= pipe_v[k-1];
        pipe_val[k]  <= pipe_val[k-1];
        pipe_slot[k] <= pipe_slot[k-1];
      end
      if (pipe_v[L-2]) part[pipe_slot[L-2]] <= pipe_val[L-2];
      if (v2) slot <= (slot == SW'(L - 1)) ? '0 : slot + 1'b1;

      case (state)
        S_ACC: if (in_valid && in_last) begin
          state     <= S_DRAIN;
          drain_cnt <= 6'(L + 2);
        end
        S_DRAIN: begin
          if (drain_cnt == 0) begin
            state   <= S_REDUCE;
            red_acc <= part[0];
            red_idx <= SW'(1);
          end else begin
            drain_cnt <= drain_cnt - 1'b1;
          end
        end
        S_REDUCE: begin
          red_acc <= red_c;
          if (red_idx == SW'(L - 1)) begin
            res       <= red_c;
            res_valid <= 1'b1;
            state     <= S_ACC;
            slot      <= '0;
            for (int k = 0; k < int'(L); k++) part[k] <= '0;
          end else begin
            red_idx <= red_idx + 1'b1;
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (state != S_ACC) |-> !pipe_v[0] || (state == S_DRAIN));
endmodule

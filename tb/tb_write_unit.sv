// tb_write_unit: sends every element of an N x P result, in the tile / row /
// lane order Stage 3 produces, into two write units (column-major TRANS=1
// and row-major TRANS=0) with random input gaps and random memory
// backpressure. Checks that every address is written exactly once with the
// right value, that `done` rises only after the last write, and that with no
// gaps the unit accepts one write per cycle.
module tb_write_unit;
  import fades_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int PES = 4;

  logic start;
  logic [31:0] n_rows, p_cols;
  logic in_valid, rdy_t, rdy_r, done_t, done_r, wr_rdy_t, wr_rdy_r;
  out_t in;
  wr_req_t wr_t, wr_r;
  out_t src [$];
  int   mem_t [int], mem_r [int];
  int   cnt_t [int], cnt_r [int];
  bit   gaps;
  logic gate;

  write_unit #(.TRANS(1'b1)) u_t (.clk, .rst_n, .start, .n_rows, .p_cols, .in_valid(in_valid && rdy_r),
    .in_ready(rdy_t), .in, .c_wr(wr_t), .c_wr_ready(wr_rdy_t), .done(done_t));
  write_unit #(.TRANS(1'b0)) u_r (.clk, .rst_n, .start, .n_rows, .p_cols, .in_valid(in_valid && rdy_t),
    .in_ready(rdy_r), .in, .c_wr(wr_r), .c_wr_ready(wr_rdy_r), .done(done_r));

  // Both units take the same element in the same cycle.
  assign in_valid = gate && src.size() != 0;
  assign in       = (src.size() != 0) ? src[0] : '0;

  always @(negedge clk) begin
    gate     = !gaps || ($urandom % 3 != 0);
    wr_rdy_t = !gaps || ($urandom % 3 != 0);
    wr_rdy_r = !gaps || ($urandom % 4 != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && rdy_t && rdy_r) void'(src.pop_front());
    if (wr_t.valid && wr_rdy_t) begin
      mem_t[int'(wr_t.addr)] = int'(wr_t.data);
      cnt_t[int'(wr_t.addr)] = cnt_t.exists(int'(wr_t.addr)) ? cnt_t[int'(wr_t.addr)] + 1 : 1;
      checks++;
      if (done_t) begin failures++; $display("ERROR: done before last write"); end
    end
    if (wr_r.valid && wr_rdy_r) begin
      mem_r[int'(wr_r.addr)] = int'(wr_r.data);
      cnt_r[int'(wr_r.addr)] = cnt_r.exists(int'(wr_r.addr)) ? cnt_r[int'(wr_r.addr)] + 1 : 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int val(int r, int c);
    return r * 7919 + c * 104729 + 3;
  endfunction

  task automatic run(input int nr, input int pc, input bit with_gaps);
    int cyc;
    gaps = with_gaps;
    mem_t.delete(); mem_r.delete(); cnt_t.delete(); cnt_r.delete();
    n_rows = nr; p_cols = pc;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int c0 = 0; c0 < pc; c0 += PES)
      for (int i = 0; i < nr; i++)
        for (int j = 0; j < PES && c0 + j < pc; j++) begin
          out_t e;
          e.row = i; e.col = c0 + j; e.data = val(i, c0 + j);
          src.push_back(e);
        end
    cyc = 1;
    while (!(done_t && done_r) && cyc < 100000) begin @(negedge clk); cyc++; end
    checks += 3;
    if (!(done_t && done_r)) begin failures++; $display("ERROR: done never rose"); end
    if (cnt_t.num() != nr * pc || cnt_r.num() != nr * pc) begin
      failures++; $display("ERROR: %0d / %0d distinct addresses written", cnt_t.num(), cnt_r.num());
    end
    if (!with_gaps && cyc > nr * pc + 4) begin
      failures++; $display("ERROR: %0d writes took %0d cycles", nr * pc, cyc);
    end
    for (int i = 0; i < nr; i++)
      for (int c = 0; c < pc; c++) begin
        checks++;
        if (!cnt_t.exists(c * nr + i) || cnt_t[c * nr + i] != 1 || mem_t[c * nr + i] != val(i, c)) begin
          failures++; $display("ERROR: column-major C[%0d][%0d] wrong", i, c);
        end
        if (!cnt_r.exists(i * pc + c) || cnt_r[i * pc + c] != 1 || mem_r[i * pc + c] != val(i, c)) begin
          failures++; $display("ERROR: row-major C[%0d][%0d] wrong", i, c);
        end
      end
    $display("run %0dx%0d gaps=%0d: %0d cycles", nr, pc, with_gaps, cyc);
  endtask

  initial begin
    start = 0; gaps = 0; n_rows = 0; p_cols = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(6, 10, 0);
    run(17, 5, 1);
    run(1, 3, 1);
    run(32, 9, 1);
    run(8, 8, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_compute_unit: drives Stage 2 (int8 PEs) with element streams for whole
// tiles, serving its B-tile reads from a model memory with one cycle of
// latency. Checks each lane's row results in its result FIFO, that lanes at
// or above tile_cols write nothing, that tile_done pulses once per tile,
// that with data always available and the FIFOs drained the tile takes one
// cycle per element (plus a fixed pipeline tail), and that a slow consumer
// stalls issue instead of losing results.
module tb_compute_unit;
  import fades_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int PES = 4, DEPTH = 16;
  logic [31:0] n_rows, zp, tile_cols;
  logic fp_sel = 1'b0;
  logic tile_ready, tile_done, elem_valid, elem_ready, b_rd_en, stall_fifo, stall_pe;
  elem_t elem;
  logic [$clog2(DEPTH)-1:0] b_rd_row;
  logic [PES-1:0][31:0] b_rd_data, res_data;
  logic [PES-1:0] res_valid, res_ready;
  logic [31:0] bmem [DEPTH][PES];
  elem_t eq [$];
  int    expq [PES][$];
  int    done_pulses = 0, fifo_stalls = 0;
  bit    slow_consumer = 0;

  compute_unit #(.PES(PES), .DEPTH(DEPTH), .PRECISION(PREC_INT8), .RES_DEPTH(8)) dut (.*);

  always_ff @(posedge clk) if (b_rd_en) for (int j = 0; j < PES; j++) b_rd_data[j] <= bmem[b_rd_row][j];

  assign elem_valid = (eq.size() != 0);
  assign elem = (eq.size() != 0) ? eq[0] : '0;

  always @(posedge clk) begin
    if (elem_valid && elem_ready) void'(eq.pop_front());
    if (rst_n && tile_done) done_pulses++;
    if (stall_fifo) fifo_stalls++;
    for (int j = 0; j < PES; j++)
      if (res_valid[j] && res_ready[j]) begin
        checks++;
        if (expq[j].size() == 0) begin failures++; $display("ERROR: lane %0d extra result", j); end
        else begin
          if (res_data[j] != 32'(expq[j][0])) begin
            failures++; $display("ERROR: lane %0d result %0d expected %0d", j, $signed(res_data[j]), expq[j][0]);
          end
          void'(expq[j].pop_front());
        end
      end
  end
  always @(negedge clk)
    for (int j = 0; j < PES; j++) res_ready[j] = slow_consumer ? (($urandom % 8) == 0) : 1'b1;

  initial begin
    repeat (200000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic run_tile(input int nr, input int mw, input int tc, input int sparsity, output int cycles);
    int acc, nel, col;
    elem_t e;
    int lens [];
    for (int r = 0; r < mw; r++) for (int j = 0; j < PES; j++) bmem[r][j] = $urandom;
    n_rows = nr; tile_cols = tc; zp = int'($urandom % 256) - 128;
    nel = 0;
    for (int i = 0; i < nr; i++) begin
      int accs [PES];
      int cnt;
      for (int j = 0; j < PES; j++) accs[j] = 0;
      cnt = 0;
      for (int k = 0; k < mw; k++) begin
        if (int'($urandom % 100) < sparsity) continue;
        e.col = k; e.a = $urandom; e.last = 0;
        for (int j = 0; j < PES; j++)
          for (int z = 0; z < 4; z++)
            accs[j] += int'($signed(e.a[8*z +: 8])) * (int'($signed(bmem[k][j][8*z +: 8])) - int'($signed(zp)));
        eq.push_back(e); cnt++; nel++;
      end
      if (cnt == 0) begin e.col = 0; e.a = 0; e.last = 1; eq.push_back(e); nel++; end
      else eq[eq.size()-1].last = 1;
      for (int j = 0; j < tc; j++) expq[j].push_back(accs[j]);
    end
    @(negedge clk);
    tile_ready = 1;
    cycles = 0;
    while (!tile_done && cycles < 50000) begin @(negedge clk); cycles++; end
    tile_ready = 0;
    repeat (slow_consumer ? 200 : 5) @(negedge clk);
    checks++;
    for (int j = 0; j < PES; j++)
      if (expq[j].size() != 0) begin failures++; $display("ERROR: lane %0d missing %0d results", j, expq[j].size()); end
    checks++;
    if (!slow_consumer && cycles > nel + 4) begin
      failures++; $display("ERROR: %0d elements took %0d cycles", nel, cycles);
    end
    $display("tile: rows %0d elements %0d cycles %0d", nr, nel, cycles);
  endtask

  initial begin
    int cyc;
    tile_ready = 0; n_rows = 0; zp = 0; tile_cols = PES;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_tile(20, 16, PES, 0, cyc);     // dense, full tile
    run_tile(30, 12, 3, 60, cyc);      // sparse, partial tile
    slow_consumer = 1;
    run_tile(40, 4, PES, 50, cyc);     // short rows, slow Stage 3
    checks += 2;
    if (done_pulses != 3) begin failures++; $display("ERROR: %0d tile_done pulses", done_pulses); end
    if (fifo_stalls == 0) begin failures++; $display("ERROR: result FIFO backpressure never stalled issue"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

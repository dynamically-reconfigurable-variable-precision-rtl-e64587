// tb_scale_unit: drives Stage 3 from model per-lane result FIFOs and a model
// parameter FIFO, with random gaps on every input and on the output. One
// instance is the int8 quantiser (checked against the TensorFlow Lite
// reference in tb_ref_pkg), the other the float build, which must forward
// values unchanged. Checks value, row and column of every output, the
// order tile / row / lane, one parameter pop per row and tile, the clamp
// flag, and one output per cycle when nothing stalls.
module tb_scale_unit;
  import fades_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int PES = 4;

  // ---- shared stimulus
  logic [31:0] n_rows, p_cols;
  logic signed [7:0] cmin, cmax;
  logic start;
  bit   gaps;

  // ---- int8 instance
  logic [PES-1:0] rv_i, rr_i; logic [PES-1:0][31:0] rd_i;
  logic pv_i, pr_i, ov_i, or_i, cl_i; param_t pm_i; out_t o_i;
  int   q_i [PES][$]; param_t pq_i [$]; out_t exp_i [$];
  int   clamps_exp = 0, clamps_seen = 0;
  scale_unit #(.PES(PES), .PRECISION(PREC_INT8), .SCALE(1'b1)) u_i (
    .clk, .rst_n, .start, .fp_sel(1'b0), .n_rows, .p_cols, .clamp_min(cmin), .clamp_max(cmax),
    .res_valid(rv_i), .res_ready(rr_i), .res_data(rd_i),
    .param_valid(pv_i), .param_ready(pr_i), .param(pm_i),
    .out_valid(ov_i), .out_ready(or_i), .out(o_i), .clamped(cl_i));

  // ---- float instance
  logic [PES-1:0] rv_f, rr_f; logic [PES-1:0][31:0] rd_f;
  logic pv_f, pr_f, ov_f, or_f, cl_f; out_t o_f;
  int   q_f [PES][$]; out_t exp_f [$];
  scale_unit #(.PES(PES), .PRECISION(PREC_FP32), .SCALE(1'b1)) u_f (
    .clk, .rst_n, .start, .fp_sel(1'b0), .n_rows, .p_cols, .clamp_min(cmin), .clamp_max(cmax),
    .res_valid(rv_f), .res_ready(rr_f), .res_data(rd_f),
    .param_valid(pv_f), .param_ready(pr_f), .param('0),
    .out_valid(ov_f), .out_ready(or_f), .out(o_f), .clamped(cl_f));
  assign pv_f = 1'b0;

  logic [PES-1:0] gate_i, gate_f; logic gp, go_i, go_f;
  always @(negedge clk) begin
    for (int j = 0; j < PES; j++) begin
      gate_i[j] = !gaps || ($urandom % 4 != 0);
      gate_f[j] = !gaps || ($urandom % 4 != 0);
    end
    gp   = !gaps || ($urandom % 3 != 0);
    go_i = !gaps || ($urandom % 3 != 0);
    go_f = !gaps || ($urandom % 3 != 0);
  end
  always_comb begin
    for (int j = 0; j < PES; j++) begin
      rv_i[j] = gate_i[j] && q_i[j].size() != 0;
      rd_i[j] = (q_i[j].size() != 0) ? q_i[j][0] : 0;
      rv_f[j] = gate_f[j] && q_f[j].size() != 0;
      rd_f[j] = (q_f[j].size() != 0) ? q_f[j][0] : 0;
    end
    pv_i = gp && pq_i.size() != 0;
    pm_i = (pq_i.size() != 0) ? pq_i[0] : '0;
    or_i = go_i; or_f = go_f;
  end

  int outs = 0;
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < PES; j++) begin
      if (rv_i[j] && rr_i[j]) void'(q_i[j].pop_front());
      if (rv_f[j] && rr_f[j]) void'(q_f[j].pop_front());
    end
    if (pv_i && pr_i) void'(pq_i.pop_front());
    if (pv_f && pr_f) begin failures++; $display("ERROR: float build popped a parameter"); end
    if (ov_i && or_i) begin
      checks++; outs++;
      if (cl_i) clamps_seen++;
      if (exp_i.size() == 0) begin failures++; $display("ERROR: int8 extra output"); end
      else begin
        if (o_i != exp_i[0]) begin
          failures++;
          $display("ERROR: int8 out data %0d row %0d col %0d, expected %0d %0d %0d",
                   $signed(o_i.data), o_i.row, o_i.col, $signed(exp_i[0].data), exp_i[0].row, exp_i[0].col);
        end
        void'(exp_i.pop_front());
      end
    end
    if (ov_f && or_f) begin
      checks++;
      if (exp_f.size() == 0) begin failures++; $display("ERROR: float extra output"); end
      else begin
        if (o_f != exp_f[0]) begin failures++; $display("ERROR: float out mismatch"); end
        void'(exp_f.pop_front());
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic run(input int nr, input int pc, input bit with_gaps);
    param_t prm [];
    int acc [][];
    int cyc, total;
    gaps = with_gaps;
    n_rows = nr; p_cols = pc;
    cmin = -8'sd100 + 8'($urandom % 20); cmax = 8'sd100 - 8'($urandom % 20);
    prm = new[nr];
    acc = new[nr];
    for (int i = 0; i < nr; i++) begin
      prm[i].qm    = 32'h4000_0000 | ($urandom & 32'h3FFF_FFFF);
      prm[i].shift = 32'(int'($urandom % 12) - 10);
      prm[i].bias  = 32'(int'($urandom % 2001) - 1000);
      acc[i] = new[pc];
      for (int c = 0; c < pc; c++) acc[i][c] = int'($urandom % 200001) - 100000;
    end
    for (int c0 = 0; c0 < pc; c0 += PES) begin
      int tc = (pc - c0 < PES) ? pc - c0 : PES;
      for (int i = 0; i < nr; i++) begin
        pq_i.push_back(prm[i]);
        for (int j = 0; j < tc; j++) begin
          out_t e;
          int y;
          q_i[j].push_back(acc[i][c0+j]);
          q_f[j].push_back(acc[i][c0+j] ^ 32'h5a5a_0000);
          y = requant_ref(acc[i][c0+j], int'(prm[i].bias), int'(prm[i].qm), int'(prm[i].shift), cmin, cmax);
          e.data = 32'(y); e.row = i; e.col = c0 + j;
          exp_i.push_back(e);
          e.data = 32'(acc[i][c0+j] ^ 32'h5a5a_0000);
          exp_f.push_back(e);
        end
      end
    end
    total = outs + nr * pc;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while ((exp_i.size() != 0 || exp_f.size() != 0) && cyc < 100000) begin @(negedge clk); cyc++; end
    checks += 4;
    if (exp_i.size() != 0 || exp_f.size() != 0) begin failures++; $display("ERROR: outputs missing"); end
    if (pq_i.size() != 0) begin failures++; $display("ERROR: %0d parameters not consumed", pq_i.size()); end
    for (int j = 0; j < PES; j++)
      if (q_i[j].size() != 0 || q_f[j].size() != 0) begin failures++; $display("ERROR: lane %0d not drained", j); end
    if (!with_gaps && cyc > nr * pc + 1) begin
      failures++; $display("ERROR: %0d outputs took %0d cycles", nr * pc, cyc);
    end
    $display("run %0dx%0d gaps=%0d: %0d cycles", nr, pc, with_gaps, cyc);
  endtask

  initial begin
    start = 0; gaps = 0; n_rows = 0; p_cols = 0; cmin = -128; cmax = 127;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(7, 10, 0);
    run(13, 4, 1);
    run(5, 11, 1);
    run(1, 1, 0);
    run(9, 9, 1);
    checks++;
    if (clamps_seen == 0) begin failures++; $display("ERROR: clamp never happened"); end
    $display("clamped outputs: %0d", clamps_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

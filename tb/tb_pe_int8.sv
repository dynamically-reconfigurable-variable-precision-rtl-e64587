// tb_pe_int8: streams rows of random packed int8 words through the PE with
// rows back to back (one element per cycle, no gaps) and with random gaps;
// checks every row sum against sum_z A[z]*(B[z]-zp), that the result appears
// exactly one cycle after the row's last element, and that in_ready never
// drops (initiation interval of one).
module tb_pe_int8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_last, in_ready, res_valid;
  logic [31:0] a, b, zp, res;
  int expect_q [$];
  int last_cycle_q [$];
  int cyc = 0;

  pe_int8 dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (res_valid) begin
      checks += 2;
      if (expect_q.size() == 0) begin failures++; $display("ERROR: unexpected result"); end
      else begin
        if (res != 32'(expect_q[0])) begin
          failures++; $display("ERROR: row result %0d, expected %0d", $signed(res), expect_q[0]);
        end
        if (cyc != last_cycle_q[0] + 1) begin
          failures++; $display("ERROR: result latency %0d cycles", cyc - last_cycle_q[0]);
        end
        void'(expect_q.pop_front()); void'(last_cycle_q.pop_front());
      end
    end
    if (rst_n) begin checks++; if (!in_ready) begin failures++; $display("ERROR: in_ready low"); end end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int len, acc;
    in_valid = 0; in_last = 0; a = 0; b = 0; zp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 400; r++) begin
      len = 1 + int'($urandom % 12);
      zp  = int'($urandom % 256) - 128;
      acc = 0;
      for (int k = 0; k < len; k++) begin
        a = $urandom; b = $urandom;
        for (int z = 0; z < 4; z++)
          acc += int'($signed(a[8*z +: 8])) * (int'($signed(b[8*z +: 8])) - int'($signed(zp)));
        in_valid = 1; in_last = (k == len - 1);
        if (in_last) begin expect_q.push_back(acc); last_cycle_q.push_back(cyc); end
        @(negedge clk);
        if (r >= 200 && ($urandom % 3) == 0) begin in_valid = 0; @(negedge clk); end
      end
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (expect_q.size() != 0) begin failures++; $display("ERROR: %0d results missing", expect_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

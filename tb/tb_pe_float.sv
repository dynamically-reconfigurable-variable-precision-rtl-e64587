// tb_pe_float: rows of float elements through the interleaved-accumulation
// PE. Small integer values make every product and partial sum exact, so each
// row total is checked exactly; a second phase uses random fractions and a
// relative tolerance. Also checks that in_ready falls after a row's last
// element and that the result returns within 2*FADD_LATENCY+6 cycles.
module tb_pe_float;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = 6;
  logic in_valid, in_last, in_ready, res_valid;
  logic [31:0] a, b, zp, res;

  pe_float #(.FADD_LATENCY(L)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic run_row(input int len, input bit exact);
    real acc, got, av, bv;
    int  wait_cyc;
    acc = 0.0;
    zp  = exact ? int'($urandom % 7) - 3 : 0;
    for (int k = 0; k < len; k++) begin
      if (exact) begin
        av = real'(int'($urandom % 33) - 16); bv = real'(int'($urandom % 33) - 16);
      end else begin
        av = real'(int'($urandom % 20001) - 10000) / 1000.0;
        bv = real'(int'($urandom % 20001) - 10000) / 1000.0;
      end
      a = r2f(av); b = r2f(bv);
      acc += f2r(a) * (f2r(b) - real'($signed(zp)));
      in_valid = 1; in_last = (k == len - 1);
      checks++;
      if (!in_ready) begin failures++; $display("ERROR: in_ready low inside a row"); end
      @(negedge clk);
      if (($urandom % 4) == 0) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0; in_last = 0;
    checks++;
    if (in_ready) begin failures++; $display("ERROR: in_ready high while draining"); end
    wait_cyc = 0;
    while (!res_valid && wait_cyc < 100) begin @(posedge clk); #1; wait_cyc++; end
    got = f2r(res);
    checks += 2;
    if (wait_cyc > 2 * L + 6) begin failures++; $display("ERROR: result after %0d cycles", wait_cyc); end
    if (exact ? (got != acc) : ((got - acc) > 1e-3 * (1.0 + (acc < 0 ? -acc : acc)) ||
                                (acc - got) > 1e-3 * (1.0 + (acc < 0 ? -acc : acc)))) begin
      failures++; $display("ERROR: row sum %f, expected %f", got, acc);
    end
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (!in_ready) begin failures++; $display("ERROR: in_ready not back after result"); end
  endtask

  initial begin
    in_valid = 0; in_last = 0; a = 0; b = 0; zp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 150; r++) run_row(1 + int'($urandom % 40), 1'b1);
    for (int r = 0; r < 50; r++) run_row(1 + int'($urandom % 40), 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

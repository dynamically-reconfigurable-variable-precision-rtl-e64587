// tb_stream_fifo: random pushes and pops against a queue model; checks data
// order, the occupancy count, that a full FIFO refuses a push, that the head
// is visible in the cycle after its push (first-word fall-through) and that
// a full FIFO accepts a push in the cycle it is popped.
module tb_stream_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 8;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [15:0] model [$];

  stream_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("ERROR: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && count == 0, "empty after reset");
    // fall-through: push one word, visible next cycle
    in_valid = 1; in_data = 16'h1234;
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data == 16'h1234 && count == 1, "first word falls through");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    check(!out_valid && count == 0, "empty after pop");
    // fill completely
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_data = 16'(i);
      check(in_ready, "ready while not full");
      @(negedge clk);
    end
    in_valid = 1; in_data = 16'hBEEF;
    check(!in_ready && count == DEPTH, "full FIFO refuses a push");
    // push and pop together while full
    out_ready = 1;
    #1 check(in_ready, "full FIFO takes a push when popped");
    check(out_data == 16'd0, "head of full FIFO");
    @(negedge clk);
    in_valid = 0; out_ready = 0;
    check(count == DEPTH, "count unchanged by simultaneous push/pop");
    for (int i = 1; i < DEPTH; i++) model.push_back(16'(i));
    model.push_back(16'hBEEF);
    // random traffic
    for (int cyc = 0; cyc < 5000; cyc++) begin
      in_valid  = ($urandom % 3) != 0;
      in_data   = 16'($urandom);
      out_ready = ($urandom % 2) != 0;
      #1;
      check(32'(count) == model.size(), "count matches model");
      check(out_valid == (model.size() != 0), "out_valid matches model");
      if (out_valid) check(out_data == model[0], "data order");
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

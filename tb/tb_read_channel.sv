// tb_read_channel: runs 2-D address sequences through a read_channel wired
// to a memory with random latency and request stalls, while the consumer
// pops at random. Checks that exactly the words base + o*stride + i arrive,
// in order, that issued_all rises only after the last request, and that the
// channel never has more requests in flight than room for the answers
// (the channel's assertions fire otherwise).
module tb_read_channel;
  import fades_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, issued_all, out_valid, out_ready, req_ready;
  logic [31:0] base, inner, outer, stride, out_data;
  rd_req_t     req;
  rd_rsp_t     rsp;
  logic [31:0] mem [1024];
  int          issued = 0;

  read_channel #(.DEPTH(8)) dut (
    .clk, .rst_n, .start, .base, .inner, .outer, .stride, .issued_all,
    .mem_req(req), .mem_req_ready(req_ready), .mem_rsp(rsp), .out_valid, .out_ready, .out_data);
  tb_mem_port #(.MEMSZ(1024), .STALL_PCT(30), .MAX_LAT(6)) u_mem (.clk, .req, .req_ready, .rsp);

  always @(posedge clk) if (req.valid && req_ready) issued++;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("ERROR: %s", msg); end
  endtask

  task automatic run_seq(input int b, input int ni, input int no, input int st);
    int exp_q [$];
    int got, cyc;
    for (int o = 0; o < no; o++)
      for (int i = 0; i < ni; i++) exp_q.push_back(b + o * st + i);
    issued = 0;
    @(negedge clk);
    base = b; inner = ni; outer = no; stride = st; start = 1;
    @(negedge clk);
    start = 0;
    got = 0; cyc = 0;
    while (got < ni * no && cyc < 20000) begin
      out_ready = ($urandom % 4) != 0;
      #1;
      if (out_valid && out_ready) begin
        check(out_data == mem[exp_q[got]], $sformatf("word %0d of sequence", got));
        got++;
      end
      if (!issued_all) check(issued < ni * no, "issued_all low only while requests remain");
      @(negedge clk);
      cyc++;
    end
    out_ready = 0;
    check(got == ni * no, "all words delivered");
    check(issued == ni * no, "exact number of requests");
    check(issued_all, "issued_all high at the end");
    repeat (10) @(negedge clk);
    check(!out_valid, "no extra words");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin mem[i] = $urandom; u_mem.mem[i] = mem[i]; end
    start = 0; out_ready = 0; base = 0; inner = 0; outer = 0; stride = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_seq(5, 40, 1, 0);
    run_seq(3, 7, 9, 50);
    run_seq(100, 1, 20, 13);
    run_seq(0, 0, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

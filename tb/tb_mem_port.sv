// tb_mem_port: behavioural memory read port for the FADES testbenches.
// Serves words of its array `mem` (loaded by the testbench through a
// hierarchical reference before each run), accepts requests when
// its randomly toggling req_ready is high and answers them in order after
// 1..MAX_LAT cycles. Reads outside the array are counted in `bad_reads`.
module tb_mem_port
  import fades_pkg::*;
#(
  parameter int MEMSZ     = 1024,
  parameter int STALL_PCT = 20,
  parameter int MAX_LAT   = 4
) (
  input  logic    clk,
  input  rd_req_t req,
  output logic    req_ready,
  output rd_rsp_t rsp
);
  logic [31:0] mem [MEMSZ];
  int unsigned q_addr [$];
  longint      q_due  [$];
  longint      cyc = 0;
  int          bad_reads = 0;
  longint      last_due = 0;
  longint      due;

  initial begin
    req_ready = 1'b0;
    rsp = '0;
  end

  always @(posedge clk) begin
    cyc++;
    if (req.valid && req_ready) begin
      if (req.addr >= MEMSZ) bad_reads++;
      due = cyc + 1 + longint'(int'($urandom % 32'(MAX_LAT)));
      if (due < last_due) due = last_due;
      last_due = due;
      q_addr.push_back(req.addr);
      q_due.push_back(due);
    end
    if (q_addr.size() > 0 && q_due[0] <= cyc) begin
      rsp.valid <= 1'b1;
      rsp.data  <= (q_addr[0] < MEMSZ) ? mem[q_addr[0]] : 32'hDEAD_BEEF;
      void'(q_addr.pop_front());
      void'(q_due.pop_front());
    end else begin
      rsp.valid <= 1'b0;
    end
    req_ready <= (($urandom % 100) >= STALL_PCT);
  end
endmodule

// tb_b_buffer: writes a random tile word by word, then reads whole rows and
// checks every lane one cycle after the read, and that a row read without
// rd_en keeps the previous output.
module tb_b_buffer;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int PES = 8, DEPTH = 64;
  logic wr_en, rd_en;
  logic [5:0] wr_row, rd_row;
  logic [2:0] wr_lane;
  logic [31:0] wr_data;
  logic [PES-1:0][31:0] rd_data;
  logic [31:0] model [DEPTH][PES];

  b_buffer #(.PES(PES), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_row = 0; rd_row = 0; wr_lane = 0; wr_data = 0;
    for (int r = 0; r < DEPTH; r++)
      for (int j = 0; j < PES; j++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 6'(r); wr_lane = 3'(j); wr_data = $urandom; model[r][j] = wr_data;
      end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int r;
      r = $urandom % DEPTH;
      rd_en = 1; rd_row = 6'(r);
      @(negedge clk);
      rd_en = 0; rd_row = 6'($urandom);
      for (int j = 0; j < PES; j++) begin
        checks++;
        if (rd_data[j] != model[r][j]) begin
          failures++;
          $display("ERROR: row %0d lane %0d = %h, expected %h", r, j, rd_data[j], model[r][j]);
        end
      end
      @(negedge clk);
      checks++;
      if (rd_data[0] != model[r][0]) begin failures++; $display("ERROR: output changed without rd_en"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

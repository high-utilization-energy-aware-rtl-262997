// tb_wsram: writes random 72-bit kernel rows into random banks and checks
// that a row read returns the row of every bank one cycle later.
module tb_wsram;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [4:0] wr_bank, wr_row, rd_row;
  logic [71:0] wr_data;
  logic [71:0] rd_q [32];
  logic [71:0] m [32][32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  wsram #(.BANKS(32), .ROWS(32), .WORD_W(72)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; wr_row = 0; rd_row = 0; wr_data = 0;
    for (int b = 0; b < 32; b++)
      for (int r = 0; r < 32; r++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 5'(b); wr_row = 5'(r);
        wr_data = {8'($urandom), 32'($urandom), 32'($urandom)};
        m[b][r] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 64; t++) begin
      int r;
      r = $urandom_range(0, 31);
      @(negedge clk);
      rd_en = 1; rd_row = 5'(r);
      @(negedge clk);
      rd_en = 0;
      for (int b = 0; b < 32; b++) begin
        checks++;
        if (rd_q[b] !== m[b][r]) begin failures++; if (failures < 5) $display("FAIL bank %0d row %0d", b, r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

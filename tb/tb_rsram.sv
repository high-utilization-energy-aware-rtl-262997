// tb_rsram: fills both parts of the reuse SRAM (feature reuse and pooling
// reuse) with random words in random banks and reads them back, checking that
// the two parts are separate stores.
module tb_rsram;
  logic clk = 0;
  logic en, sel, we;
  logic [4:0] bank;
  logic [7:0] addr;
  logic [15:0] wdata, q;
  logic [15:0] fr [32][256];
  logic [15:0] pr [32][128];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rsram #(.BANKS(32), .FR_DEPTH(256), .PR_DEPTH(128)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; sel = 0; we = 0; bank = 0; addr = 0; wdata = 0;
    for (int b = 0; b < 32; b += 7) begin
      for (int a = 0; a < 256; a++) begin
        @(negedge clk); en = 1; we = 1; sel = 0; bank = 5'(b); addr = 8'(a);
        wdata = 16'($urandom); fr[b][a] = wdata;
      end
      for (int a = 0; a < 128; a++) begin
        @(negedge clk); en = 1; we = 1; sel = 1; bank = 5'(b); addr = 8'(a);
        wdata = 16'($urandom); pr[b][a] = wdata;
      end
    end
    for (int t = 0; t < 2000; t++) begin
      int b, a;
      bit s;
      b = 7 * $urandom_range(0, 4);
      s = 1'($urandom);
      a = s ? $urandom_range(0, 127) : $urandom_range(0, 255);
      @(negedge clk); en = 1; we = 0; sel = s; bank = 5'(b); addr = 8'(a);
      @(negedge clk); en = 0;
      checks++;
      if (q !== (s ? pr[b][a] : fr[b][a])) begin failures++; if (failures < 5) $display("FAIL sel %0d bank %0d addr %0d", s, b, a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

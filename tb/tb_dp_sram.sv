// tb_dp_sram: random traffic on both ports of one bank against a software
// memory, with byte enables; checks read-before-write on the same port and the
// one-cycle read latency.
module tb_dp_sram;
  localparam int W = 16, D = 64, AW = $clog2(D);
  logic clk = 0;
  logic a_en, b_en;
  logic [1:0] a_we, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [W-1:0] a_wdata, b_wdata, a_q, b_q;
  logic [W-1:0] mem [D];
  logic [W-1:0] ea, eb;
  bit va, vb;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dp_sram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // initialise through port A
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 2'b11; a_addr = AW'(i); a_wdata = W'($urandom); mem[i] = a_wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (va) begin checks++; if (a_q !== ea) begin failures++; $display("FAIL A"); end end
      if (vb) begin checks++; if (b_q !== eb) begin failures++; $display("FAIL B"); end end
      a_en = 1'($urandom); b_en = 1'($urandom);
      a_addr = AW'($urandom); b_addr = AW'($urandom);
      if (b_addr == a_addr) b_addr = b_addr + 1'b1;
      a_we = 2'($urandom); b_we = 2'($urandom);
      a_wdata = W'($urandom); b_wdata = W'($urandom);
      va = a_en; vb = b_en;
      ea = mem[a_addr]; eb = mem[b_addr];
      if (a_en) for (int i = 0; i < 2; i++) if (a_we[i]) mem[a_addr][i*8 +: 8] = a_wdata[i*8 +: 8];
      if (b_en) for (int i = 0; i < 2; i++) if (b_we[i]) mem[b_addr][i*8 +: 8] = b_wdata[i*8 +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

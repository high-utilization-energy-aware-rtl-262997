// tb_reuse_module: writes rows of pixels into the two register arrays,
// reads them back in reverse order while new ones are written three columns
// behind (the access pattern of a ring pass), and checks the preload register
// in both shift directions.
module tb_reuse_module;
  import cnn_pkg::*;
  localparam int DEPTH = 222;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  logic wr_en, pre_push, pre_dir;
  logic [AW-1:0] wr_addr, rd_addr;
  pix_t wr_data [2], rd_q [2], pre_in, pre_q [KSZ];
  int checks = 0, failures = 0;
  int ref1 [DEPTH], ref2 [DEPTH];
  int pm [KSZ];
  always #5 clk = ~clk;

  reuse_module #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; pre_push = 0; pre_dir = 0; wr_addr = 0; rd_addr = 0; pre_in = 0;
    wr_data[0] = 0; wr_data[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // pass 1: fill all locations in ascending order
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a);
      ref1[a] = $signed(8'($urandom)); ref2[a] = $signed(8'($urandom));
      wr_data[0] = pix_t'(ref1[a]); wr_data[1] = pix_t'(ref2[a]);
    end
    // passes 2..4: read descending/ascending, rewriting three places behind
    for (int p = 0; p < 3; p++) begin
      int n1 [DEPTH], n2 [DEPTH];
      n1 = ref1; n2 = ref2;
      for (int s = 0; s < DEPTH; s++) begin
        int ra, wa;
        ra = p[0] ? s : DEPTH - 1 - s;
        wa = p[0] ? s - 3 : DEPTH - 1 - s + 3;
        @(negedge clk);
        rd_addr = AW'(ra);
        wr_en = (wa >= 0 && wa < DEPTH);
        wr_addr = AW'(wa);
        n1[wa < 0 || wa >= DEPTH ? 0 : wa] = wr_en ? $signed(8'($urandom)) : n1[0];
        if (wr_en) begin
          n2[wa] = $signed(8'($urandom));
          wr_data[0] = pix_t'(n1[wa]); wr_data[1] = pix_t'(n2[wa]);
        end
        #1;
        chk(int'(rd_q[0]) == ref1[ra] && int'(rd_q[1]) == ref2[ra], $sformatf("read %0d", ra));
      end
      @(negedge clk);
      wr_en = 0;
      // the last three locations were not rewritten in this pass
      ref1 = n1; ref2 = n2;
    end
    // preload register
    foreach (pm[j]) pm[j] = 0;
    for (int t = 0; t < 40; t++) begin
      int v;
      v = $signed(8'($urandom));
      @(negedge clk);
      pre_push = 1; pre_dir = t[3]; pre_in = pix_t'(v);
      @(negedge clk);
      pre_push = 0;
      if (!t[3]) begin pm[2] = pm[1]; pm[1] = pm[0]; pm[0] = v; end
      else       begin pm[0] = pm[1]; pm[1] = pm[2]; pm[2] = v; end
      for (int j = 0; j < KSZ; j++) chk(int'(pre_q[j]) == pm[j], "preload");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

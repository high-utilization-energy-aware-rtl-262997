// tb_pe: drives random pixels and weights into one PE and compares the sum
// register with round(product / 2^7) saturated to 8 bits, one cycle after the
// operands are registered.
module tb_pe;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic data_ld, w_ld;
  pix_t data_in, w_in, data_q, sum_q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe #(.QSHIFT(7)) dut (.*);

  function automatic pix_t model(input int d, input int w);
    int p = d * w;
    int r = (p + 64) >>> 7;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return pix_t'(r);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_ld = 0; w_ld = 0; data_in = 0; w_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      int d, w;
      d = $signed(8'($urandom));
      w = $signed(8'($urandom));
      if (i < 4) begin d = (i[0]) ? -128 : 127; w = (i[1]) ? -128 : 127; end
      @(negedge clk);
      data_ld = 1; w_ld = 1; data_in = pix_t'(d); w_in = pix_t'(w);
      @(negedge clk);             // registers hold d, w
      data_ld = 0; w_ld = 0;
      checks++;
      if (data_q !== pix_t'(d)) begin failures++; $display("FAIL data_q"); end
      @(negedge clk);             // sum register updated
      checks++;
      if (sum_q !== model(d, w)) begin
        failures++; $display("FAIL d=%0d w=%0d sum=%0d exp=%0d", d, w, sum_q, model(d, w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

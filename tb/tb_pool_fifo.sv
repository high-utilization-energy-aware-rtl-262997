// tb_pool_fifo: random push/pop traffic against a software queue, including
// filling the FIFO to its 128 entries and draining it.
module tb_pool_fifo;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [7:0] d, q;
  logic [7:0] count;
  logic [7:0] ref_q [$];
  int checks = 0, failures = 0;
  bit saw_full = 0;
  always #5 clk = ~clk;

  pool_fifo #(.DEPTH(128), .WIDTH(8)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; d = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int bias;
      bias = (t % 1000 < 500) ? 80 : 20;    // fill phases and drain phases
      @(negedge clk);
      chk(empty == (ref_q.size() == 0), "empty");
      chk(full == (ref_q.size() == 128), "full");
      chk(int'(count) == ref_q.size(), "count");
      if (ref_q.size() > 0) chk(q == ref_q[0], "head");
      if (full) saw_full = 1;
      push = ($urandom_range(0, 99) < bias) && (!full || 1'b0);
      pop  = ($urandom_range(0, 99) >= bias) && !empty;
      d = 8'($urandom);
      if (pop) void'(ref_q.pop_front());
      if (push) ref_q.push_back(d);
    end
    chk(saw_full, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

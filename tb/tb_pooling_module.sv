// tb_pooling_module: sends random 2x2 windows of 32 channels and checks the
// pooled maxima on both outputs: the 256-bit DRAM stream (all channels per
// beat) and the 64-bit FSRAM stream (eight channels per beat, groups in
// order). The output side is stalled for a while so that the FIFOs fill and
// in_ready drops (back-pressure is counted).
module tb_pooling_module;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic dst_dram, in_valid, in_ready, dram_valid, dram_ready, fs_valid, fs_ready;
  logic [15:0] in_a [32], in_b [32];
  logic [255:0] dram_data;
  logic [63:0] fs_data;
  logic [1:0] fs_grp;
  int exp_q [$];            // 32 maxima per window, flat
  int checks = 0, failures = 0, stalls = 0, sent, beats;
  always #5 clk = ~clk;

  pooling_module #(.CH(32), .FIFO_DEPTH(128)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int mx(input logic [15:0] a, input logic [15:0] b);
    int v [4];
    int m;
    v[0] = $signed(a[7:0]); v[1] = $signed(a[15:8]); v[2] = $signed(b[7:0]); v[3] = $signed(b[15:8]);
    m = v[0];
    for (int i = 1; i < 4; i++) if (v[i] > m) m = v[i];
    return m;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one run of N windows towards one destination
  task automatic run(input bit to_dram, input int n);
    int grp_exp, cyc;
    int win [32];
    sent = 0; beats = 0; grp_exp = 0; cyc = 0;
    dst_dram = to_dram;
    while (beats < (to_dram ? n : 4 * n)) begin
      @(negedge clk);
      cyc++;
      in_valid = (sent < n) && $urandom_range(0, 3) != 0;
      for (int c = 0; c < 32; c++) begin in_a[c] = 16'($urandom); in_b[c] = 16'($urandom); end
      dram_ready = (cyc > 400) && $urandom_range(0, 4) != 0;
      fs_ready   = (cyc > 400) && $urandom_range(0, 4) != 0;
      #1;
      // output side: stalled for the first 400 cycles
      if (to_dram) begin
        if (dram_valid && dram_ready) begin
          for (int c = 0; c < 32; c++) win[c] = exp_q[c];
          for (int c = 0; c < 32; c++) chk($signed(dram_data[c*8 +: 8]) == win[c], "dram byte");
          for (int c = 0; c < 32; c++) void'(exp_q.pop_front());
          beats++;
        end
      end else begin
        if (fs_valid && fs_ready) begin
          chk(int'(fs_grp) == grp_exp, "fs group order");
          for (int k = 0; k < 8; k++) chk($signed(fs_data[k*8 +: 8]) == exp_q[grp_exp*8 + k], "fs byte");
          if (grp_exp == 3) begin for (int c = 0; c < 32; c++) void'(exp_q.pop_front()); end
          grp_exp = (grp_exp + 1) % 4;
          beats++;
        end
      end
      // input side
      if (in_valid && in_ready) begin
        for (int c = 0; c < 32; c++) exp_q.push_back(mx(in_a[c], in_b[c]));
        sent++;
      end
      if (in_valid && !in_ready) stalls++;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; dram_ready = 0; fs_ready = 0; dst_dram = 1;
    foreach (in_a[c]) begin in_a[c] = 0; in_b[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1'b1, 300);
    chk(exp_q.size() == 0, "dram drained");
    run(1'b0, 300);
    chk(exp_q.size() == 0, "fsram drained");
    chk(stalls > 0, "back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

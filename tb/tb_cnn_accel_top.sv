// tb_cnn_accel_top: end-to-end test of the accelerator at its default size.
//
// The testbench plays the host and external DRAM: it writes input maps and
// kernels through the ext port, starts a layer pass, and compares results
// with a software model of the arithmetic (8-bit products rounded by 2^7 and
// saturated, sums of nine and of four saturated to 8 bits, saturating
// accumulation across input-channel groups, ReLU, 2x2 max pooling).
// Passes:
//   A  3x3, 8 input channels (two groups), 6 x 10 map, ReLU, pooling to DRAM
//      with a stalling DRAM, FSRAM1 -> FSRAM2
//   B  3x3, 4 input channels, odd 5 x 7 map, no ReLU, no pooling,
//      FSRAM2 -> FSRAM1 (ping-pong swapped)
//   C  1x1, 32 input channels, 4 x 6 map, ReLU, pooling back into FSRAM1
//   D  3x3, 64 input channels on a 4 x 5 map, run as two passes of 32 into
//      the same destination, the second continuing the first's sums
// It counts the mechanisms of the design as they happen (front pass, up
// shift, left and right passes, reuse-module reads, padding columns, group
// accumulation, ReLU clamps, both pooling destinations, pooling back-pressure,
// 1x1 steps, both ping-pong directions, a continued pass) and fails if one never happens. It
// checks that a 3x3 group takes H*W+2 steps and a 1x1 pass H*W steps.
module tb_cnn_accel_top;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  layer_cfg_t cfg;
  logic ext_en, ext_we, ext_rsel;
  logic [1:0] ext_target;
  logic [4:0] ext_bank;
  logic [15:0] ext_addr;
  logic [71:0] ext_wdata;
  logic [15:0] ext_q;
  logic dram_valid, dram_ready;
  logic [255:0] dram_data;
  always #5 clk = ~clk;

  cnn_accel_top dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // ---------------- model data ----------------
  int x   [64][16][16];     // input map [ch][row][col]
  int k3  [32][64][9];      // 3x3 kernels [out][in][pos]
  int k1  [32][32];         // 1x1 weights [out][in]
  int y   [32][16][16];     // expected output after the last group
  int pl  [32][8][8];       // expected pooled output

  function automatic int q8(input int p);
    int r = (p + 64) >>> 7;
    return (r > 127) ? 127 : (r < -128) ? -128 : r;
  endfunction
  function automatic int s8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_front, n_up, n_left, n_right, n_reuse, n_pad, n_accum, n_relu, n_pool_dram,
      n_pool_fs, n_stall, n_1x1, n_src1, n_src2, n_cont, conv_cycles;
  always @(posedge clk) if (rst_n) begin
    step_t s;
    s = dut.u_ctrl.step;
    if (s.mode == SH_RIGHT && s.front) n_front++;
    if (s.mode == SH_UP) n_up++;
    if (s.mode == SH_LEFT) n_left++;
    if (s.mode == SH_RIGHT && !s.front) n_right++;
    if ((s.mode == SH_LEFT || s.mode == SH_RIGHT) && !s.front && !s.ru_zero) n_reuse++;
    if (s.ru_zero) n_pad++;
    if (s.mode == SH_LOAD9) n_1x1++;
    if (dut.acc_en && dut.acc_add) n_accum++;
    if (dram_valid && dram_ready) n_pool_dram++;
    if (dut.pw_en) n_pool_fs++;
    if (dram_valid && !dram_ready) n_stall++;
    if (dut.u_ctrl.state == 3'd2) conv_cycles++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host helpers ----------------
  task automatic ext_write(input int tgt, input int bank, input int addr, input logic [71:0] data, input bit rsel = 0);
    @(negedge clk);
    ext_en = 1; ext_we = 1; ext_target = 2'(tgt); ext_bank = 5'(bank); ext_addr = 16'(addr);
    ext_wdata = data; ext_rsel = rsel;
    @(negedge clk);
    ext_en = 0; ext_we = 0;
  endtask

  task automatic ext_read(input int tgt, input int bank, input int addr, output logic [15:0] q);
    @(negedge clk);
    ext_en = 1; ext_we = 0; ext_target = 2'(tgt); ext_bank = 5'(bank); ext_addr = 16'(addr);
    @(negedge clk);
    ext_en = 0;
    q = ext_q;
  endtask

  // write channels [0, nch) of x (h x w) into an FSRAM in the DPPR placement
  task automatic load_map(input int tgt, input int nch, input int h, input int w, input int off = 0);
    for (int ch = off; ch < off + nch; ch++)
      for (int wr = 0; wr < (h + 1) / 2; wr++)
        for (int c = 0; c < w; c++) begin
          logic [7:0] lo, hi;
          lo = 8'(x[ch][2*wr][c]);
          hi = (2*wr + 1 < h) ? 8'(x[ch][2*wr+1][c]) : 8'h00;
          ext_write(tgt, ch - off, wr * w + c, {56'h0, hi, lo});
        end
  endtask

  task automatic load_k3(input int nin, input int off = 0);
    for (int m = 0; m < 32; m++)
      for (int i = off; i < off + nin; i++) begin
        logic [71:0] word;
        for (int p = 0; p < 9; p++) word[p*8 +: 8] = 8'(k3[m][i][p]);
        ext_write(2, m, i - off, word);
      end
  endtask

  task automatic load_k1();
    for (int m = 0; m < 32; m++)
      for (int q = 0; q < 4; q++) begin
        logic [71:0] word;
        word = '0;
        for (int k = 0; k < 9; k++) if (9*q + k < 32) word[k*8 +: 8] = 8'(k1[m][9*q+k]);
        ext_write(2, m, q, word);
      end
  endtask

  task automatic randomise(input int nch, input int h, input int w);
    for (int ch = 0; ch < nch; ch++)
      for (int r = 0; r < h; r++)
        for (int c = 0; c < w; c++) x[ch][r][c] = $signed(8'($urandom));
    for (int m = 0; m < 32; m++)
      for (int i = 0; i < 64; i++) begin
        for (int p = 0; p < 9; p++) k3[m][i][p] = $urandom_range(0, 95) - 48;
        if (i < 32) k1[m][i] = $urandom_range(0, 95) - 48;
      end
  endtask

  // reference convolution
  // The loop bounds are module variables set at run time, so the compiler
  // does not unroll the model for each call.
  int mh, mw, mg;
  task automatic model(input bit one, input int groups, input int h_in, input int w_in, input bit relu);
    int h, w;
    mh = h_in; mw = w_in; mg = groups;
    h = mh; w = mw;
    for (int m = 0; m < 32; m++)
      for (int r = 0; r < h; r++)
        for (int c = 0; c < w; c++) begin
          int acc;
          acc = 0;
          if (one) begin
            int s;
            s = 0;
            for (int i = 0; i < 32; i++) s += q8(x[i][r][c] * k1[m][i]);
            acc = s8(s);
          end else begin
            for (int g = 0; g < mg; g++) begin
              int rs;
              rs = 0;
              for (int cc = 0; cc < 4; cc++) begin
                int ps;
                ps = 0;
                for (int dr = 0; dr < 3; dr++)
                  for (int dc = 0; dc < 3; dc++) begin
                    int rr, ccol, px;
                    rr = r + dr - 1; ccol = c + dc - 1;
                    px = (rr >= 0 && rr < h && ccol >= 0 && ccol < w) ? x[4*g+cc][rr][ccol] : 0;
                    ps += q8(px * k3[m][4*g+cc][dr*3+dc]);
                  end
                rs += ps;
              end
              acc = (g == 0) ? s8(rs) : s8(acc + s8(rs));
            end
          end
          if (relu && acc < 0) begin acc = 0; n_relu++; end
          y[m][r][c] = acc;
        end
    for (int m = 0; m < 32; m++)
      for (int pr = 0; pr < h / 2; pr++)
        for (int pc = 0; pc < w / 2; pc++) begin
          int mx;
          mx = y[m][2*pr][2*pc];
          if (y[m][2*pr+1][2*pc] > mx) mx = y[m][2*pr+1][2*pc];
          if (y[m][2*pr][2*pc+1] > mx) mx = y[m][2*pr][2*pc+1];
          if (y[m][2*pr+1][2*pc+1] > mx) mx = y[m][2*pr+1][2*pc+1];
          pl[m][pr][pc] = mx;
        end
  endtask

  // run one pass; collect the DRAM stream when pooling to DRAM
  task automatic run(input layer_cfg_t c);
    int beat;
    int t0;
    beat = 0;
    conv_cycles = 0;
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      dram_ready = ($urandom_range(0, 3) != 0) && ($urandom_range(0, 99) > 2 || beat > 2);
      #1;
      if (dram_valid && dram_ready) begin
        int pr, pc;
        pr = beat / (int'(c.w) / 2); pc = beat % (int'(c.w) / 2);
        for (int m = 0; m < 32; m++)
          chk($signed(dram_data[m*8 +: 8]) == pl[m][pr][pc],
              $sformatf("dram pooled m%0d (%0d,%0d) got %0d exp %0d", m, pr, pc, $signed(dram_data[m*8 +: 8]), pl[m][pr][pc]));
        beat++;
      end
      @(negedge clk);
    end
    if (c.pool && c.pool_dram) chk(beat == int'(c.h) / 2 * int'(c.w) / 2, "all pooled beats seen");
    if (c.k1x1) chk(conv_cycles == int'(c.h) * int'(c.w), $sformatf("1x1 steps %0d", conv_cycles));
    else        chk(conv_cycles == int'(c.n_groups) * (int'(c.h) * int'(c.w) + 2),
                    $sformatf("3x3 steps %0d expected %0d", conv_cycles, int'(c.n_groups) * (int'(c.h) * int'(c.w) + 2)));
    if (c.src_sel) n_src2++; else n_src1++;
  endtask

  // compare a full output map held in an FSRAM
  task automatic check_map(input int tgt, input int h, input int w, input string tag);
    for (int m = 0; m < 32; m++)
      for (int wr = 0; wr < (h + 1) / 2; wr++)
        for (int c = 0; c < w; c++) begin
          logic [15:0] q;
          ext_read(tgt, m, wr * w + c, q);
          chk($signed(q[7:0]) == y[m][2*wr][c], $sformatf("%s m%0d (%0d,%0d) got %0d exp %0d", tag, m, 2*wr, c, $signed(q[7:0]), y[m][2*wr][c]));
          if (2*wr + 1 < h)
            chk($signed(q[15:8]) == y[m][2*wr+1][c], $sformatf("%s m%0d (%0d,%0d) got %0d exp %0d", tag, m, 2*wr+1, c, $signed(q[15:8]), y[m][2*wr+1][c]));
        end
  endtask

  initial begin
    layer_cfg_t c;
    start = 0; cfg = '0; ext_en = 0; ext_we = 0; ext_rsel = 0; ext_target = 0; ext_bank = 0;
    ext_addr = 0; ext_wdata = 0; dram_ready = 0;
    n_front = 0; n_up = 0; n_left = 0; n_right = 0; n_reuse = 0; n_pad = 0; n_accum = 0;
    n_relu = 0; n_cont = 0; n_pool_dram = 0; n_pool_fs = 0; n_stall = 0; n_1x1 = 0; n_src1 = 0; n_src2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- pass A ----
    randomise(8, 6, 10);
    load_map(0, 8, 6, 10);
    load_k3(8);
    model(1'b0, 2, 6, 10, 1'b1);
    c = '0; c.h = 6; c.w = 10; c.n_groups = 2; c.relu = 1; c.pool = 1; c.pool_dram = 1; c.src_sel = 0;
    run(c);
    check_map(1, 6, 10, "A");

    // ---- pass B ----
    randomise(4, 5, 7);
    load_map(1, 4, 5, 7);
    load_k3(4);
    model(1'b0, 1, 5, 7, 1'b0);
    c = '0; c.h = 5; c.w = 7; c.n_groups = 1; c.src_sel = 1;
    run(c);
    check_map(0, 5, 7, "B");

    // ---- pass C ----
    randomise(32, 4, 6);
    load_map(0, 32, 4, 6);
    load_k1();
    model(1'b1, 1, 4, 6, 1'b1);
    c = '0; c.h = 4; c.w = 6; c.n_groups = 1; c.k1x1 = 1; c.relu = 1; c.pool = 1; c.pool_dram = 0; c.src_sel = 0;
    run(c);
    check_map(1, 4, 6, "C");
    // pooled 2 x 3 map written back into FSRAM1 (source) at pooled geometry
    for (int m = 0; m < 32; m++)
      for (int pc = 0; pc < 3; pc++) begin
        logic [15:0] q;
        ext_read(0, m, pc, q);
        chk($signed(q[7:0]) == pl[m][0][pc] && $signed(q[15:8]) == pl[m][1][pc],
            $sformatf("C pooled m%0d col %0d got %0d/%0d exp %0d/%0d", m, pc, $signed(q[7:0]), $signed(q[15:8]), pl[m][0][pc], pl[m][1][pc]));
      end

    // ---- pass D: 64 input channels as two passes into one destination ----
    randomise(64, 4, 5);
    model(1'b0, 16, 4, 5, 1'b1);
    load_map(0, 32, 4, 5, 0);
    load_k3(32, 0);
    c = '0; c.h = 4; c.w = 5; c.n_groups = 8; c.src_sel = 0;
    run(c);
    load_map(0, 32, 4, 5, 32);
    load_k3(32, 32);
    c.acc_cont = 1; c.relu = 1;
    run(c);
    n_cont++;
    check_map(1, 4, 5, "D");

    // ---- every mechanism must have happened ----
    chk(n_front > 0, "front pass");
    chk(n_up > 0, "up shift");
    chk(n_left > 0, "left pass");
    chk(n_right > 0, "right pass after an up shift");
    chk(n_reuse > 0, "reuse module reads");
    chk(n_pad > 0, "padding columns");
    chk(n_accum > 0, "group accumulation");
    chk(n_relu > 0, "ReLU clamps");
    chk(n_pool_dram > 0, "pooling to DRAM");
    chk(n_pool_fs > 0, "pooling to FSRAM");
    chk(n_1x1 > 0, "1x1 steps");
    chk(n_stall > 0, "DRAM back-pressure");
    chk(n_cont > 0, "pass continuing an earlier pass");
    chk(n_src1 > 0 && n_src2 > 0, "both ping-pong directions");
    $display("mechanisms: front=%0d up=%0d left=%0d right=%0d reuse=%0d pad=%0d accum=%0d relu=%0d pool_dram=%0d pool_fs=%0d 1x1=%0d stall=%0d",
             n_front, n_up, n_left, n_right, n_reuse, n_pad, n_accum, n_relu, n_pool_dram, n_pool_fs, n_1x1, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

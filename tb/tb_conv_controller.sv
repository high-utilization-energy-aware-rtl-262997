// tb_conv_controller: self-checking test of the layer sequencer on its own.
//
// The testbench plays the datapath. For random layer shapes (3x3 with one to
// four groups, 1x1, with and without ReLU and pooling to either destination)
// a monitor checks every cycle:
//  * weight loading: TN word reads of rows 4g..4g+3 (3x3) or 0..3 (1x1),
//    each followed one cycle later by a w_ld for the same column;
//  * step counts: H*W+2 conv cycles per group for 3x3, H*W for 1x1;
//  * the shape of the ring walk: band 0 moves right with three padded-row
//    reads, every later band starts with one up shift and then moves the
//    other way with FSRAM reads of row band+1;
//  * reuse addressing: every reuse read finds the column it wants, written
//    during the band before; reads of columns outside the map are marked zero;
//  * partial-sum writes: 4 cycles after an issuing step, covering every
//    output once per group, with add from group 1 on (from group 0 when the
//    pass continues an earlier one) and ReLU on the last;
//  * pooling: windows issued in raster order, never on adjacent cycles, held
//    while pool_in_ready is low; write-back coordinates and bank masks for
//    pooled pixels returning to the FSRAM; done only after every pooled beat.
module tb_conv_controller;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic [2:0] grp;
  logic ws_rd_en, w_ld;
  logic [4:0] ws_rd_row;
  logic [1:0] w_col;
  logic fs_rd_en;
  logic signed [15:0] fs_rd_row, fs_rd_col;
  step_t step;
  logic acc_en, acc_add, acc_relu;
  logic [15:0] acc_row, acc_col;
  logic pool_rd_en, pool_in_valid, pool_in_ready, pool_dram_beat, pool_fs_beat;
  logic [15:0] pool_row, pool_col;
  logic [1:0] pool_fs_grp;
  logic pw_en;
  logic [15:0] pw_row, pw_col;
  logic [3:0] pw_mask_grp;
  logic in_pool_phase;

  conv_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- monitor state ----------------
  int H, W, G;
  bit one, relu;
  int conv_cyc [8];
  int cov [8][32][32];
  int ru_col [256], ru_band [256];
  int band_m, k_m, last_band;
  int wrd_q [$];
  int issue_t [$];
  logic signed [15:0] rd_col_d, rd_row_d;
  logic rd_en_d;
  logic [2:0] grp_d;   // group of the registered step
  int cyc;
  int pool_seen, last_pool_cyc, pw_seen;
  bit pool_wait;
  bit cont;             // acc_cont of the next layer run
  int n_up, n_left, n_right, n_front, n_ru_rd;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    // weight loading: w_ld follows a word read by one cycle
    if (w_ld) begin
      chk(wrd_q.size() == 1 && wrd_q[0] == int'(w_col), "w_ld follows its read");
      if (wrd_q.size() > 0) void'(wrd_q.pop_front());
    end
    if (ws_rd_en) begin
      wrd_q.push_back(int'(ws_rd_row) - (one ? 0 : 4 * int'(grp)));
      chk(int'(ws_rd_row) - (one ? 0 : 4 * int'(grp)) inside {[0:3]}, $sformatf("weight row %0d group %0d", ws_rd_row, grp));
    end
    if (dut.state == 3'd2) conv_cyc[grp]++;  // state and grp change together

    // ring walk, checked on the registered step with the FSRAM request of
    // the cycle before
    if (step.mode != SH_HOLD && !one) begin
      if (step.mode == SH_RIGHT && step.front) begin
        n_front++;
        last_band = 0;
        chk(rd_en_d && rd_row_d == -1, "front pass reads rows -1..1");
      end else if (step.mode == SH_UP) begin
        n_up++;
        chk(!rd_en_d, "up shift uses the preload, not the FSRAM");
        chk(int'(step.orow) == last_band + 1, "up shift opens the next band");
        last_band = int'(step.orow);
      end else begin
        int x;
        x = int'(rd_col_d);
        chk(rd_en_d && rd_row_d == 16'(int'(step.orow) + 1), "later passes read row band+1");
        chk(step.dir_left == step.orow[0], "odd bands move left, even bands right");
        if (step.dir_left) begin
          n_left++;
          chk(x == int'(step.ocol) - 1, "left pass: column c-1 enters");
        end else begin
          n_right++;
          chk(x == int'(step.ocol) + 1, "right pass: column c+1 enters");
        end
        chk(step.ru_zero == (x < 0 || x >= W), $sformatf("reuse zero for column %0d", x));
        if (!step.ru_zero) begin
          int a;
          n_ru_rd++;
          a = int'(step.ru_rd_addr);
          chk(ru_col[a] == x && ru_band[a] == int'(step.orow) - 1,
              $sformatf("reuse read band %0d col %0d addr %0d holds col %0d band %0d", step.orow, x, a, ru_col[a], ru_band[a]));
        end
      end
      if (step.ru_wr_en) begin
        int a;
        a = int'(step.ru_wr_addr);
        // right passes store the exiting column at its own address, left
        // passes column c+2 at address c
        ru_col[a]  = step.dir_left ? a + 2 : a;
        ru_band[a] = int'(step.orow);
        if (step.front) ru_band[a] = 0;
        chk(a < RU_DEPTH, "reuse address in range");
      end
    end
    if (step.issue) begin
      issue_t.push_back(cyc);
      if (int'(step.orow) < 32 && int'(step.ocol) < 32) cov[grp_d][step.orow][step.ocol]++;
    end
    if (acc_en) begin
      chk(issue_t.size() > 0 && cyc - issue_t[0] == 4, "partial sum written 4 cycles after its step");
      if (issue_t.size() > 0) void'(issue_t.pop_front());
    end
    rd_col_d <= fs_rd_col; rd_row_d <= fs_rd_row; rd_en_d <= fs_rd_en; grp_d <= grp;

    // pooling
    if (pool_rd_en) begin
      chk(pool_in_ready, "window issued only with room");
      chk(cyc - last_pool_cyc >= 2, "one window every two cycles");
      chk(int'(pool_row) == pool_seen / (W / 2) && int'(pool_col) == pool_seen % (W / 2),
          $sformatf("pool window %0d at (%0d,%0d)", pool_seen, pool_row, pool_col));
      pool_seen++;
      last_pool_cyc = cyc;
    end
    if (pw_en) begin
      chk(int'(pw_row) == (pw_seen / 4) / (W / 2) && int'(pw_col) == (pw_seen / 4) % (W / 2),
          "pooled write-back position");
      chk(pw_mask_grp == 4'(1 << (pw_seen % 4)), "pooled write-back bank group");
      pw_seen++;
    end
  end

  // acc flags against the group that produced them
  int acc_grp_q [$];
  always @(posedge clk) if (rst_n) begin
    if (step.issue) acc_grp_q.push_back(int'(grp_d));
    if (acc_en && acc_grp_q.size() > 0) begin
      int gg;
      gg = acc_grp_q.pop_front();
      chk(acc_add == (gg != 0 || cfg.acc_cont), $sformatf("acc_add in group %0d", gg));
      chk(acc_relu == (relu && gg == G - 1), $sformatf("acc_relu in group %0d", gg));
      if (int'(acc_row) < 32 && int'(acc_col) < 32) cov[gg + 4][acc_row][acc_col]++;
    end
  end

  task automatic run_layer(input int h, input int w, input int groups, input bit k1, input bit rl,
                           input bit pool, input bit pdram);
    int beats_needed, beats_given, t;
    H = h; W = w; G = groups; one = k1; relu = rl;
    for (int i = 0; i < 8; i++) begin
      conv_cyc[i] = 0;
      for (int r = 0; r < 32; r++) for (int c = 0; c < 32; c++) cov[i][r][c] = 0;
    end
    for (int a = 0; a < 256; a++) begin ru_col[a] = -99; ru_band[a] = -99; end
    last_band = 0; pool_seen = 0; pw_seen = 0; last_pool_cyc = -10;
    wrd_q.delete(); issue_t.delete(); acc_grp_q.delete();
    @(negedge clk);
    cfg = '0; cfg.h = 16'(h); cfg.w = 16'(w); cfg.n_groups = 4'(groups); cfg.k1x1 = k1;
    cfg.relu = rl; cfg.pool = pool; cfg.pool_dram = pdram; cfg.acc_cont = cont;
    start = 1;
    @(negedge clk);
    start = 0;
    beats_needed = pool ? (h / 2) * (w / 2) * (pdram ? 1 : 4) : 0;
    beats_given = 0;
    t = 0;
    while (!done) begin
      pool_in_ready = ($urandom_range(0, 3) != 0);
      pool_dram_beat = 0; pool_fs_beat = 0;
      // return pooled beats some time after windows were issued
      if (beats_given < (pdram ? pool_seen : 4 * pool_seen) && $urandom_range(0, 1)) begin
        if (pdram) pool_dram_beat = 1;
        else begin pool_fs_beat = 1; pool_fs_grp = 2'(beats_given % 4); end
        beats_given++;
      end
      @(negedge clk);
      t++;
      if (done) break;
      chk(!(pool && beats_given < beats_needed && done), "done before all pooled beats");
    end
    pool_dram_beat = 0; pool_fs_beat = 0;
    chk(beats_given == beats_needed, $sformatf("pooled beats %0d of %0d", beats_given, beats_needed));
    for (int gg = 0; gg < groups; gg++) begin
      chk(conv_cyc[gg] == (k1 ? h * w : h * w + 2),
          $sformatf("group %0d took %0d steps for %0dx%0d", gg, conv_cyc[gg], h, w));
      for (int r = 0; r < h; r++)
        for (int c = 0; c < w; c++) begin
          chk(cov[gg][r][c] == 1, $sformatf("output (%0d,%0d) issued %0d times in group %0d", r, c, cov[gg][r][c], gg));
          chk(cov[gg + 4][r][c] == 1, $sformatf("output (%0d,%0d) written %0d times in group %0d", r, c, cov[gg + 4][r][c], gg));
        end
    end
    chk(pool_seen == (pool ? (h / 2) * (w / 2) : 0), "every pooling window issued");
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  initial begin
    start = 0; cfg = '0; grp_d = 0; pool_in_ready = 0; pool_dram_beat = 0; pool_fs_beat = 0; pool_fs_grp = 0;
    n_up = 0; n_left = 0; n_right = 0; n_front = 0; n_ru_rd = 0; cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cont = 0;
    run_layer(4, 4, 1, 0, 0, 0, 0);
    run_layer(6, 10, 2, 0, 1, 1, 1);
    run_layer(5, 7, 1, 0, 0, 1, 0);
    run_layer(4, 6, 1, 1, 1, 1, 0);
    for (int i = 0; i < 8; i++) begin
      int h, w, g;
      bit k1;
      h = $urandom_range(1, 12); w = $urandom_range(4, 20);
      k1 = ($urandom_range(0, 3) == 0);
      g = k1 ? 1 : $urandom_range(1, 4);
      cont = 1'($urandom);
      run_layer(h, w, g, k1, 1'($urandom), (h >= 2) && 1'($urandom), 1'($urandom));
    end
    chk(n_front > 0 && n_up > 0 && n_left > 0 && n_right > 0 && n_ru_rd > 0, "all ring moves seen");
    $display("front=%0d up=%0d left=%0d right=%0d reuse_reads=%0d", n_front, n_up, n_left, n_right, n_ru_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ccm: checks the 32 x 4 convolution core against a software model of its
// PE data registers, reuse modules and preload registers. Phase 1 runs 1x1
// steps (direct load of 32 channels, column-major placement); phase 2 loads
// 3x3 kernels and runs random right/left/up steps, with new pixels taken from
// col_px (front) or from the reuse modules, and random reuse writes. Each
// step's 32 partial sums are compared four cycles after issue, and the valid
// flag is checked to arrive exactly four cycles after issue.
module tb_ccm;
  import cnn_pkg::*;
  localparam int NR = 32, NC = 4, RD = 222, RAW = $clog2(RD);
  logic clk = 0, rst_n = 0;
  shift_e mode;
  logic k1x1, front, ru_zero, issue, ru_wr_en, pre_push, dir_left, w_ld, psum_valid;
  pix_t col_px [NC][4];
  pix_t px1x1 [NR];
  logic [RAW-1:0] ru_wr_addr, ru_rd_addr;
  logic [1:0] w_col;
  logic [NPE*DATA_W-1:0] w_row [NR];
  pix_t psum [NR];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ccm #(.NROW(NR), .NCOL(NC), .QSHIFT(7), .REUSE_DEPTH(RD)) dut (.*);

  int wt [NR][NC][NPE];     // weight held by PE k of PEA (m, c)
  int d  [NC][NPE];         // data registers of column c
  int ra [NC][2][RD];       // reuse arrays
  int pre[NC][KSZ];
  int exp_q [$];
  bit exp_v [$];
  int counts [5];

  function automatic int q8(input int p);
    int r = (p + 64) >>> 7;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return r;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic load_weights(input bit one);
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      w_ld = 1; w_col = 2'(c); k1x1 = one;
      for (int m = 0; m < NR; m++) begin
        for (int b = 0; b < NPE; b++) w_row[m][b*8 +: 8] = 8'($urandom);
        for (int r = 0; r < KSZ; r++)
          for (int j = 0; j < KSZ; j++)
            wt[m][c][r*3+j] = one ? $signed(w_row[m][(3*j+r)*8 +: 8]) : $signed(w_row[m][(3*r+2-j)*8 +: 8]);
      end
    end
    @(negedge clk);
    w_ld = 0;
  endtask

  // expected sums of the current data registers
  task automatic push_expect();
    int e [NR];
    for (int m = 0; m < NR; m++) begin
      int s = 0;
      for (int c = 0; c < NC; c++)
        for (int k = 0; k < NPE; k++) s += q8(d[c][k] * wt[m][c][k]);
      e[m] = (s > 127) ? 127 : (s < -128) ? -128 : s;
    end
    for (int m = 0; m < NR; m++) exp_q.push_back(e[m]);
  endtask

  // compare outputs every cycle against the step issued four cycles before
  int cyc = 0;
  bit issued [$];
  always @(negedge clk) if (rst_n) begin
    cyc++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input shift_e md, input bit fr, input bit dl, input bit zero,
                      input bit wen, input int waddr, input int raddr, input bit pp);
    int nd [NC][NPE];
    @(negedge clk);
    mode = md; front = fr; dir_left = dl; ru_zero = zero; ru_wr_en = wen;
    ru_wr_addr = RAW'(waddr); ru_rd_addr = RAW'(raddr); pre_push = pp; issue = 1;
    counts[int'(md)]++;
    for (int c = 0; c < NC; c++) begin
      int nc [KSZ];
      for (int kk = 0; kk < 4; kk++) col_px[c][kk] = pix_t'($urandom);
      nc[0] = fr ? int'(col_px[c][0]) : (zero ? 0 : ra[c][0][raddr]);
      nc[1] = fr ? int'(col_px[c][1]) : (zero ? 0 : ra[c][1][raddr]);
      nc[2] = int'(col_px[c][2]);
      nd[c] = d[c];
      if (wen) begin
        ra[c][0][waddr] = dl ? d[c][3] : d[c][5];
        ra[c][1][waddr] = dl ? d[c][6] : d[c][8];
      end
      for (int r = 0; r < KSZ; r++)
        for (int j = 0; j < KSZ; j++)
          case (md)
            SH_RIGHT: nd[c][r*3+j] = (j == 0) ? nc[r] : d[c][r*3+j-1];
            SH_LEFT:  nd[c][r*3+j] = (j == 2) ? nc[r] : d[c][r*3+j+1];
            SH_UP:    nd[c][r*3+j] = (r == 2) ? pre[c][j] : d[c][(r+1)*3+j];
            default: ;
          endcase
      if (pp) begin
        if (!dl) begin pre[c][2] = pre[c][1]; pre[c][1] = pre[c][0]; pre[c][0] = int'(col_px[c][3]); end
        else     begin pre[c][0] = pre[c][1]; pre[c][1] = pre[c][2]; pre[c][2] = int'(col_px[c][3]); end
      end
    end
    d = nd;
    push_expect();
  endtask

  task automatic step1x1();
    @(negedge clk);
    mode = SH_LOAD9; issue = 1; ru_wr_en = 0; pre_push = 0;
    counts[int'(SH_LOAD9)]++;
    for (int b = 0; b < NR; b++) px1x1[b] = pix_t'($urandom);
    for (int c = 0; c < NC; c++)
      for (int r = 0; r < KSZ; r++)
        for (int j = 0; j < KSZ; j++)
          d[c][r*3+j] = (9*c+3*j+r < NR) ? int'(px1x1[9*c+3*j+r]) : 0;
    push_expect();
  endtask

  // checker: psum_valid must follow issue by exactly four cycles
  bit vhist [$];
  int got = 0;
  always @(posedge clk) if (rst_n) begin
    vhist.push_back(issue);
    if (vhist.size() > 4) void'(vhist.pop_front());
    #1;
    if (vhist.size() == 4) chk(psum_valid == vhist[0], "psum_valid timing");
    if (psum_valid) begin
      int e [NR];
      for (int m = 0; m < NR; m++) e[m] = exp_q.pop_front();
      for (int m = 0; m < NR; m++) chk(int'(psum[m]) == e[m], $sformatf("psum[%0d] out %0d got %0d exp %0d", m, got, psum[m], e[m]));
      got++;
    end
  end

  initial begin
    mode = SH_HOLD; k1x1 = 0; front = 0; ru_zero = 0; issue = 0; ru_wr_en = 0;
    pre_push = 0; dir_left = 0; w_ld = 0; w_col = 0; ru_wr_addr = 0; ru_rd_addr = 0;
    foreach (col_px[c, kk]) col_px[c][kk] = 0;
    foreach (px1x1[b]) px1x1[b] = 0;
    foreach (w_row[m]) w_row[m] = '0;
    foreach (d[c, k]) d[c][k] = 0;
    foreach (pre[c, j]) pre[c][j] = 0;
    foreach (ra[c, a, b]) ra[c][a][b] = 0;
    foreach (counts[i]) counts[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: 1x1
    load_weights(1'b1);
    for (int t = 0; t < 40; t++) step1x1();
    @(negedge clk); issue = 0; mode = SH_HOLD;
    repeat (6) @(negedge clk);
    // phase 2: 3x3; fill reuse arrays with known values first (front passes)
    k1x1 = 0;
    load_weights(1'b0);
    for (int a = 0; a < 40; a++) step(SH_RIGHT, 1, 0, 0, 1, a, 0, 1);
    for (int t = 0; t < 300; t++) begin
      int sel, addr;
      sel = $urandom_range(0, 5);
      addr = $urandom_range(0, 39);
      case (sel)
        0: step(SH_RIGHT, 1, 0, 0, 1, addr, 0, 1);
        1: step(SH_RIGHT, 0, 0, 0, 1, addr, $urandom_range(0, 39), 1);
        2: step(SH_LEFT,  0, 1, 0, 1, addr, $urandom_range(0, 39), 1);
        3: step(SH_LEFT,  0, 1, 1, 0, addr, 0, 1);
        4: step(SH_UP,    0, 0, 0, 0, 0, 0, 0);
        default: step(SH_LEFT, 1, 1, 0, 0, 0, 0, 0);
      endcase
    end
    @(negedge clk); issue = 0; mode = SH_HOLD;
    repeat (8) @(negedge clk);
    chk(got == 340 + 40, $sformatf("all outputs seen (%0d)", got));
    for (int i = 1; i < 5; i++) chk(counts[i] > 0, "mode used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pea: checks the nine-PE array against a software copy of its 3x3 data
// registers. Random weights and random shift commands (right, left, up,
// direct load, hold) are applied; after each command the exit columns and,
// two cycles later, the adder-tree sum are compared with the model.
module tb_pea;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  shift_e mode;
  pix_t new_col [KSZ], new_row [KSZ], load9 [NPE], w_in [NPE];
  pix_t exit_r [KSZ], exit_l [KSZ];
  logic w_ld;
  pea_sum_t sum_q;
  int checks = 0, failures = 0;
  int m [NPE];      // model data registers
  int wm [NPE];     // model weights
  int exp_sum [$];
  int counts [5];
  always #5 clk = ~clk;

  pea #(.QSHIFT(7)) dut (.*);

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

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n [NPE];
    int s;
    mode = SH_HOLD; w_ld = 0;
    foreach (new_col[i]) new_col[i] = 0;
    foreach (new_row[i]) new_row[i] = 0;
    foreach (load9[i]) load9[i] = 0;
    foreach (w_in[i]) w_in[i] = 0;
    foreach (m[i]) m[i] = 0;
    foreach (counts[i]) counts[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load weights
    @(negedge clk);
    foreach (w_in[i]) begin wm[i] = $signed(8'($urandom)); w_in[i] = pix_t'(wm[i]); end
    w_ld = 1;
    @(negedge clk);
    w_ld = 0;
    for (int t = 0; t < 2000; t++) begin
      int md;
      md = $urandom_range(0, 4);
      foreach (new_col[i]) new_col[i] = pix_t'($urandom);
      foreach (new_row[i]) new_row[i] = pix_t'($urandom);
      foreach (load9[i]) load9[i] = pix_t'($urandom);
      mode = shift_e'(md);
      counts[md]++;
      // exit columns show the registers before the shift
      for (int r = 0; r < KSZ; r++) begin
        chk(int'(exit_r[r]) == m[r*3+2], "exit_r");
        chk(int'(exit_l[r]) == m[r*3],   "exit_l");
      end
      n = m;
      for (int r = 0; r < KSZ; r++)
        for (int j = 0; j < KSZ; j++)
          case (md)
            1: n[r*3+j] = (j == 0) ? int'(new_col[r]) : m[r*3+j-1];
            2: n[r*3+j] = (j == 2) ? int'(new_col[r]) : m[r*3+j+1];
            3: n[r*3+j] = (r == 2) ? int'(new_row[j]) : m[(r+1)*3+j];
            4: n[r*3+j] = int'(load9[r*3+j]);
            default: ;
          endcase
      m = n;
      s = 0;
      foreach (m[i]) s += q8(m[i] * wm[i]);
      exp_sum.push_back(s);
      @(negedge clk);
      if (t >= 2) chk(int'(sum_q) == exp_sum[t-2], $sformatf("sum t=%0d got %0d exp %0d", t, sum_q, exp_sum[t-2]));
    end
    foreach (counts[i]) chk(counts[i] > 0, "every mode used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

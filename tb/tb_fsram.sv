// tb_fsram: self-checking test of one feature SRAM (4 banks, 64 words).
//
// A model holds every pixel. Random operations over several map sizes:
// ext word writes and reads, four-pixel column reads (including the -1 top
// padding row, columns outside the map and rows past the bottom), pooling
// reads of two words, and partial-sum writes with and without add, ReLU and
// per-bank masks. Partial-sum writes come in bursts of up to three
// neighbouring pixels, the way the controller issues them, followed by an
// idle cycle. Read results are checked one cycle after the request.
module tb_fsram;
  import cnn_pkg::*;
  localparam int BANKS = 4, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] img_h, img_w;
  logic ext_en, ext_we;
  logic [1:0] ext_bank;
  logic [5:0] ext_addr;
  logic [15:0] ext_wdata, ext_q;
  logic col_en;
  logic signed [15:0] col_row, col_col;
  pix_t col_px [BANKS][4];
  logic pool_en;
  logic [15:0] pool_row, pool_col;
  logic [15:0] pool_a [BANKS], pool_b [BANKS];
  logic acc_en, acc_add, acc_relu;
  logic [BANKS-1:0] acc_mask;
  logic [15:0] acc_row, acc_col;
  pix_t acc_px [BANKS];

  fsram #(.BANKS(BANKS), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  logic [15:0] mem [BANKS][DEPTH];   // model, word view
  int H, W;

  function automatic int pix(input int b, input int r, input int c);
    logic [15:0] w;
    if (r < 0 || r >= H || c < 0 || c >= W) return 0;
    w = mem[b][(r / 2) * W + c];
    return (r % 2) ? $signed(w[15:8]) : $signed(w[7:0]);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    ext_en = 0; ext_we = 0; col_en = 0; pool_en = 0; acc_en = 0; acc_add = 0; acc_relu = 0;
  endtask

  initial begin
    int n_add, n_relu, n_pad;
    n_add = 0; n_relu = 0; n_pad = 0;
    idle();
    img_h = 4; img_w = 4; ext_bank = 0; ext_addr = 0; ext_wdata = 0; col_row = 0; col_col = 0;
    pool_row = 0; pool_col = 0; acc_mask = 0; acc_row = 0; acc_col = 0;
    for (int b = 0; b < BANKS; b++) acc_px[b] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int geo = 0; geo < 6; geo++) begin
      H = $urandom_range(4, 9); W = $urandom_range(4, 10);
      @(negedge clk);
      img_h = 16'(H); img_w = 16'(W);
      // fill every word through ext
      for (int b = 0; b < BANKS; b++)
        for (int a = 0; a < DEPTH; a++) begin
          logic [15:0] d;
          d = 16'($urandom);
          ext_en = 1; ext_we = 1; ext_bank = 2'(b); ext_addr = 6'(a); ext_wdata = d;
          mem[b][a] = d;
          @(negedge clk);
        end
      idle();
      for (int op = 0; op < 400; op++) begin
        int kind;
        kind = $urandom_range(0, 3);
        @(negedge clk);
        idle();
        case (kind)
          0: begin : ext_op
            int b, a;
            b = $urandom_range(0, BANKS - 1); a = $urandom_range(0, DEPTH - 1);
            ext_en = 1; ext_bank = 2'(b); ext_addr = 6'(a);
            if ($urandom_range(0, 1)) begin
              ext_we = 1; ext_wdata = 16'($urandom); mem[b][a] = ext_wdata;
            end else begin
              @(negedge clk);
              idle();
              chk(ext_q == mem[b][a], $sformatf("ext read b%0d a%0d", b, a));
            end
          end
          1: begin : col_op
            int r, c;
            r = ($urandom_range(0, 3) == 0) ? -1 : 2 * $urandom_range(0, (H - 1) / 2) + $urandom_range(0, 1);
            c = $urandom_range(0, W + 1) - 1;
            col_en = 1; col_row = 16'(r); col_col = 16'(c);
            @(negedge clk);
            idle();
            for (int b = 0; b < BANKS; b++)
              for (int k = 0; k < 4; k++) begin
                int base, e;
                base = (r < 0) ? 0 : 2 * (r / 2);
                // only rows held by the two words read are delivered
                e = (r + k < base + 4) ? pix(b, r + k, c) : 0;
                if (r + k < 0 || r + k >= H || c < 0 || c >= W) n_pad++;
                chk(col_px[b][k] == 8'(e), $sformatf("col b%0d r%0d c%0d k%0d got %0d exp %0d", b, r, c, k, $signed(col_px[b][k]), e));
              end
          end
          2: begin : pool_op
            int pr, pc;
            pr = $urandom_range(0, H / 2 - 1); pc = $urandom_range(0, W / 2 - 1);
            pool_en = 1; pool_row = 16'(pr); pool_col = 16'(pc);
            @(negedge clk);
            idle();
            for (int b = 0; b < BANKS; b++) begin
              chk(pool_a[b] == mem[b][pr * W + 2 * pc], $sformatf("pool a b%0d", b));
              chk(pool_b[b] == mem[b][pr * W + 2 * pc + 1], $sformatf("pool b b%0d", b));
            end
          end
          default: begin : acc_op
            int r, c0, n;
            bit add, relu;
            r = $urandom_range(0, H - 1); c0 = $urandom_range(0, W - 3); n = $urandom_range(1, 3);
            add = 1'($urandom); relu = 1'($urandom);
            for (int i = 0; i < n; i++) begin
              acc_en = 1; acc_add = add; acc_relu = relu; acc_row = 16'(r); acc_col = 16'(c0 + i);
              acc_mask = BANKS'($urandom);
              for (int b = 0; b < BANKS; b++) begin
                int v;
                acc_px[b] = pix_t'($urandom);
                if (acc_mask[b]) begin
                  v = add ? pix(b, r, c0 + i) + int'(acc_px[b]) : int'(acc_px[b]);
                  v = (v > 127) ? 127 : (v < -128) ? -128 : v;
                  if (relu && v < 0) begin v = 0; n_relu++; end
                  if (add) n_add++;
                  if (r % 2) mem[b][(r / 2) * W + c0 + i][15:8] = 8'(v);
                  else       mem[b][(r / 2) * W + c0 + i][7:0]  = 8'(v);
                end
              end
              @(negedge clk);
            end
            idle();
          end
        endcase
      end
      // read everything back
      for (int b = 0; b < BANKS; b++)
        for (int a = 0; a < DEPTH; a++) begin
          @(negedge clk);
          ext_en = 1; ext_we = 0; ext_bank = 2'(b); ext_addr = 6'(a);
          @(negedge clk);
          idle();
          chk(ext_q == mem[b][a], $sformatf("final b%0d a%0d got %h exp %h", b, a, ext_q, mem[b][a]));
        end
    end
    chk(n_add > 0 && n_relu > 0 && n_pad > 0, "add, ReLU and padding all exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// fsram: one feature SRAM of the ping-pong pair.
//
// BANKS dual-port banks, one per channel. Pixels are stored two per word in
// the "double pixels per row" placement: the word at address
// (row/2)*width + col holds pixel (row, col) in its low byte when row is even
// and in its high byte when row is odd, so one word is a vertical pair. Zero
// padding is never stored: reads outside the map return zeros.
//
// Four kinds of access, at most one of the first three per cycle:
//  * ext    one word of one bank (loading from or storing to external DRAM),
//           port A, data on ext_q one cycle later.
//  * col    for every bank, the pixels (col_row+k, col_col), k = 0..3, taken
//           from the two words that hold rows 2w..2w+3 with
//           w = max(col_row,0)/2, both ports; col_px one cycle later. Rows
//           outside those two words read as zero, so col_row may be -1 (top
//           padding) or any row whose wanted pixels lie in the two words.
//  * pool   for every bank, the words at columns 2*pool_col and 2*pool_col+1
//           of word row pool_row: the 2x2 window of pooled pixel
//           (pool_row, pool_col); both ports, pool_a / pool_b one cycle later.
//  * acc    writes one pixel per bank at (acc_row, acc_col). With acc_add the
//           stored partial sum is read first (port B) and the sum written one
//           cycle later (port A, byte enable): the adder beside each bank. With
//           acc_relu the written value is max(value, 0): the MAX beside each
//           bank. Results saturate to 8 bits. acc may not overlap col or pool;
//           it may overlap ext only if the controller keeps them apart.
// Banks, dual ports, DPPR placement, padding on the fly and the adder/MAX on
// the write path follow the published data unit. The word address formula,
// the four-pixel column read (the published port is three pixels wide; the
// fourth feeds the up-shift preload), saturation and using MAX as ReLU are
// this design's choices.
module fsram
  import cnn_pkg::*;
#(
  parameter int BANKS = TM,
  parameter int DEPTH = 2048,
  localparam int AW  = $clog2(DEPTH),
  localparam int BW  = $clog2(BANKS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] img_h,
  input  logic [15:0] img_w,
  // ext
  input  logic          ext_en,
  input  logic          ext_we,
  input  logic [BW-1:0] ext_bank,
  input  logic [AW-1:0] ext_addr,
  input  logic [15:0]   ext_wdata,
  output logic [15:0]   ext_q,
  // column read
  input  logic               col_en,
  input  logic signed [15:0] col_row,
  input  logic signed [15:0] col_col,
  output pix_t               col_px [BANKS][4],
  // pooling read
  input  logic          pool_en,
  input  logic [15:0]   pool_row,
  input  logic [15:0]   pool_col,
  output logic [15:0]   pool_a [BANKS],
  output logic [15:0]   pool_b [BANKS],
  // partial-sum write
  input  logic          acc_en,
  input  logic          acc_add,
  input  logic          acc_relu,
  input  logic [BANKS-1:0] acc_mask,   // banks written by this access
  input  logic [15:0]   acc_row,
  input  logic [15:0]   acc_col,
  input  pix_t          acc_px [BANKS]
);
  // ---------------- address generation ----------------
  logic signed [16:0] wrow;           // first word row of a column read
  logic [AW-1:0] col_addr0, col_addr1, pool_addr0, pool_addr1, acc_addr;
  logic col_ok0, col_ok1, col_colok;

  always_comb begin
    wrow       = (col_row < 0) ? 17'sd0 : 17'(col_row >>> 1);
    col_colok  = (col_col >= 0) && (32'(col_col) < 32'(img_w));
    col_addr0  = AW'(32'(wrow) * 32'(img_w) + 32'(col_col));
    col_addr1  = AW'((32'(wrow) + 1) * 32'(img_w) + 32'(col_col));
    col_ok0    = col_colok && (32'(wrow) * 2 < 32'(img_h));
    col_ok1    = col_colok && ((32'(wrow) + 1) * 2 < 32'(img_h));
    pool_addr0 = AW'(32'(pool_row) * 32'(img_w) + 32'(pool_col) * 2);
    pool_addr1 = AW'(32'(pool_addr0) + 1);
    acc_addr   = AW'(32'(acc_row >> 1) * 32'(img_w) + 32'(acc_col));
  end

  // ---------------- accumulate pipeline ----------------
  logic          acc_s1, acc_add_s1, acc_relu_s1, acc_hi_s1;
  logic [AW-1:0] acc_addr_s1;
  logic [BANKS-1:0] acc_mask_s1;
  pix_t          acc_px_s1 [BANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_s1 <= 1'b0; acc_add_s1 <= 1'b0; acc_relu_s1 <= 1'b0; acc_hi_s1 <= 1'b0;
      acc_addr_s1 <= '0;
      acc_mask_s1 <= '0;
      for (int b = 0; b < BANKS; b++) acc_px_s1[b] <= '0;
    end else begin
      acc_s1      <= acc_en;
      acc_add_s1  <= acc_add;
      acc_relu_s1 <= acc_relu;
      acc_hi_s1   <= acc_row[0];
      acc_addr_s1 <= acc_addr;
      acc_mask_s1 <= acc_mask;
      acc_px_s1   <= acc_px;
    end
  end

  // ---------------- read bookkeeping for output alignment ----------------
  logic signed [16:0] rd_off;   // col_row - 2*wrow, kept for the output stage
  logic signed [15:0] rd_row;   // requested first row, for the padding test
  logic rd_ok0, rd_ok1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_off <= '0; rd_ok0 <= 1'b0; rd_ok1 <= 1'b0; rd_row <= '0;
    end else if (col_en) begin
      rd_off <= 17'(col_row) - 17'(wrow * 2);
      rd_ok0 <= col_ok0;
      rd_ok1 <= col_ok1;
      rd_row <= col_row;
    end
  end

  // ---------------- banks ----------------
  logic [15:0] qa [BANKS];
  logic [15:0] qb [BANKS];
  logic [BW-1:0] ext_bank_q;
  always_ff @(posedge clk) if (ext_en) ext_bank_q <= ext_bank;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic          a_en, b_en;
    logic [1:0]    a_we;
    logic [AW-1:0] a_addr, b_addr;
    logic [15:0]   a_wd;
    logic signed [31:0] summed;
    pix_t          res;

    always_comb begin
      summed = acc_add_s1 ? 32'(acc_px_s1[b]) + 32'($signed(acc_hi_s1 ? qb[b][15:8] : qb[b][7:0]))
                          : 32'(acc_px_s1[b]);
      res    = sat8(summed);
      if (acc_relu_s1 && res < 0) res = '0;

      a_en = 1'b0; a_we = 2'b00; a_addr = '0; a_wd = '0;
      b_en = 1'b0; b_addr = '0;
      if (acc_s1 && acc_mask_s1[b]) begin
        a_en = 1'b1; a_addr = acc_addr_s1; a_wd = {res, res};
        a_we = acc_hi_s1 ? 2'b10 : 2'b01;
      end else if (ext_en && ext_bank == BW'(b)) begin
        a_en = 1'b1; a_addr = ext_addr; a_wd = ext_wdata; a_we = {2{ext_we}};
      end else if (col_en) begin
        a_en = 1'b1; a_addr = col_addr0;
      end else if (pool_en) begin
        a_en = 1'b1; a_addr = pool_addr0;
      end
      if (acc_en && acc_add) begin
        b_en = 1'b1; b_addr = acc_addr;
      end else if (col_en) begin
        b_en = 1'b1; b_addr = col_addr1;
      end else if (pool_en) begin
        b_en = 1'b1; b_addr = pool_addr1;
      end
    end

    dp_sram #(.WIDTH(16), .DEPTH(DEPTH)) u_bank (
      .clk(clk),
      .a_en(a_en), .a_we(a_we), .a_addr(a_addr), .a_wdata(a_wd), .a_q(qa[b]),
      .b_en(b_en), .b_we(2'b00), .b_addr(b_addr), .b_wdata(16'h0), .b_q(qb[b])
    );

    // Column output: four rows starting at the requested row.
    always_comb begin
      pix_t four [4];
      four[0] = rd_ok0 ? qa[b][7:0]  : '0;
      four[1] = rd_ok0 ? qa[b][15:8] : '0;
      four[2] = rd_ok1 ? qb[b][7:0]  : '0;
      four[3] = rd_ok1 ? qb[b][15:8] : '0;
      for (int k = 0; k < 4; k++) begin
        int idx, row;
        idx = int'(rd_off) + k;
        row = int'(rd_row) + k;
        col_px[b][k] = (idx >= 0 && idx < 4 && row >= 0 && row < int'(img_h)) ? four[idx[1:0]] : '0;
      end
    end
    assign pool_a[b] = qa[b];
    assign pool_b[b] = qb[b];
  end

  assign ext_q = qa[ext_bank_q];

  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot0({ext_en, col_en, pool_en}));
  a_acc_alone: assert property (@(posedge clk) disable iff (!rst_n)
                                acc_en |-> !(col_en || pool_en));
endmodule

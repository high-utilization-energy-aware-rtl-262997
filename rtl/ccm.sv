// ccm: convolution core module, TM x TN = 32 x 4 process element arrays.
//
// PEA (m, c) multiplies input channel c of the current group by kernel m, so
// each PEA row computes one output channel. Every cycle the four PEA sums of a
// row are added in a row adder tree and saturated to an 8-bit partial sum:
// 32 partial sums per cycle, one per output channel.
//
// 3x3 mode (k1x1 = 0). All PEAs of a column hold the same input pixels and
// shift together under `mode`. Per column, col_px carries the pixels of the
// image column entering the window, rows r0..r0+3 (r0 = top row of the
// window band). In a front pass (front = 1) rows r0..r0+2 come from col_px;
// otherwise rows r0 and r0+1 come from the column's reuse module and only row
// r0+2 from col_px (ru_zero forces the reuse pixels to zero for a padding
// column). Row r0+3 (col_px[3]) is pushed into the preload register
// and used by the next SH_UP. The column leaving the PEAs (rows 1 and 2) is
// written back to the reuse module at ru_wr_addr when ru_wr_en is set.
// 1x1 mode (k1x1 = 1, mode = SH_LOAD9). PE (r, j) of PEA column c takes input
// channel 9c+3j+r from px1x1, so one row of 36 PEs covers 32 input channels
// and four PEs idle.
//
// Weights: w_ld with w_col loads PEA column w_col of every row from w_row[m],
// the 72-bit word of weight SRAM bank m (nine bytes, byte 0 = bits 7:0). In 3x3
// mode PE (r, j) takes byte 3r+(2-j) (kernel in raster order, mirrored to match
// the shift direction); in 1x1 mode byte 3j+r.
//
// Timing: a step issued in cycle t (issue = 1) yields its 32 partial sums in
// cycle t+4 with psum_valid = 1, one set per cycle.
// The array size, the two input paths, one reuse module per column and the
// adder trees follow the published design; the byte order of weight words,
// the column-major 1x1 channel placement (read off the published figure), the
// pipeline depth and the saturation of the partial sums are this design's.
module ccm
  import cnn_pkg::*;
#(
  parameter int NROW   = TM,
  parameter int NCOL   = TN,
  parameter int QSHIFT = 7,
  parameter int REUSE_DEPTH = 222,
  localparam int RAW = $clog2(REUSE_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // step control
  input  shift_e         mode,
  input  logic           k1x1,
  input  logic           front,
  input  logic           ru_zero,
  input  logic           issue,
  input  pix_t           col_px [NCOL][4],
  input  pix_t           px1x1  [NROW],
  // reuse module control (shared by all columns)
  input  logic           ru_wr_en,
  input  logic [RAW-1:0] ru_wr_addr,
  input  logic [RAW-1:0] ru_rd_addr,
  input  logic           pre_push,
  input  logic           dir_left,
  // weight load
  input  logic           w_ld,
  input  logic [$clog2(NCOL)-1:0] w_col,
  input  logic [NPE*DATA_W-1:0]   w_row [NROW],
  // results
  output pix_t           psum [NROW],
  output logic           psum_valid
);
  pea_sum_t pea_sum [NROW][NCOL];
  pix_t     new_col [NCOL][KSZ];
  pix_t     pre_q   [NCOL][KSZ];
  pix_t     ru_q    [NCOL][2];
  pix_t     ru_wd   [NCOL][2];
  pix_t     ex_r    [NCOL][KSZ];
  pix_t     ex_l    [NCOL][KSZ];
  pix_t     load9   [NCOL][NPE];

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    always_comb begin
      new_col[c][0] = front ? col_px[c][0] : (ru_zero ? '0 : ru_q[c][0]);
      new_col[c][1] = front ? col_px[c][1] : (ru_zero ? '0 : ru_q[c][1]);
      new_col[c][2] = col_px[c][2];
      ru_wd[c][0]   = dir_left ? ex_l[c][1] : ex_r[c][1];
      ru_wd[c][1]   = dir_left ? ex_l[c][2] : ex_r[c][2];
      for (int r = 0; r < KSZ; r++)
        for (int j = 0; j < KSZ; j++)
          load9[c][r*KSZ+j] = (9*c + 3*j + r < NROW) ? px1x1[9*c + 3*j + r] : '0;
    end

    reuse_module #(.DEPTH(REUSE_DEPTH)) u_reuse (
      .clk(clk), .rst_n(rst_n),
      .wr_en(ru_wr_en), .wr_addr(ru_wr_addr), .wr_data(ru_wd[c]),
      .rd_addr(ru_rd_addr), .rd_q(ru_q[c]),
      .pre_push(pre_push), .pre_dir(dir_left), .pre_in(col_px[c][3]),
      .pre_q(pre_q[c])
    );

    for (genvar m = 0; m < NROW; m++) begin : g_row
      pix_t w_in [NPE];
      pix_t unused_r [KSZ];
      pix_t unused_l [KSZ];
      always_comb begin
        for (int r = 0; r < KSZ; r++)
          for (int j = 0; j < KSZ; j++)
            w_in[r*KSZ+j] = k1x1 ? w_row[m][(3*j+r)*DATA_W +: DATA_W]
                                 : w_row[m][(3*r+(2-j))*DATA_W +: DATA_W];
      end
      // Only the PEAs of row 0 feed the reuse module: all rows of a column
      // hold identical pixels.
      if (m == 0) begin : g_first
        pea #(.QSHIFT(QSHIFT)) u_pea (
          .clk(clk), .rst_n(rst_n), .mode(mode),
          .new_col(new_col[c]), .new_row(pre_q[c]), .load9(load9[c]),
          .w_ld(w_ld && (w_col == c)), .w_in(w_in),
          .exit_r(ex_r[c]), .exit_l(ex_l[c]), .sum_q(pea_sum[m][c])
        );
      end else begin : g_other
        pea #(.QSHIFT(QSHIFT)) u_pea (
          .clk(clk), .rst_n(rst_n), .mode(mode),
          .new_col(new_col[c]), .new_row(pre_q[c]), .load9(load9[c]),
          .w_ld(w_ld && (w_col == c)), .w_in(w_in),
          .exit_r(unused_r), .exit_l(unused_l), .sum_q(pea_sum[m][c])
        );
      end
    end
  end

  // Row adder trees.
  row_sum_t rsum [NROW];
  always_comb begin
    for (int m = 0; m < NROW; m++) begin
      rsum[m] = '0;
      for (int c = 0; c < NCOL; c++) rsum[m] += row_sum_t'(pea_sum[m][c]);
    end
  end

  logic [2:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe      <= '0;
      psum_valid <= 1'b0;
      for (int m = 0; m < NROW; m++) psum[m] <= '0;
    end else begin
      vpipe      <= {vpipe[1:0], issue};
      psum_valid <= vpipe[2];
      for (int m = 0; m < NROW; m++) psum[m] <= sat8(32'(rsum[m]));
    end
  end
endmodule

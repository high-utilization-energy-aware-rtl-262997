// cnn_accel_top: the convolution accelerator.
//
// Three parts work on one layer pass of 32 output channels:
//  * the data unit: two feature SRAMs used as a ping-pong pair (one is the
//    source of the current layer, the other receives its outputs and becomes
//    the source of the next), the weight SRAM, the reuse SRAM and the
//    controller;
//  * the convolution core: 32 x 4 process element arrays (1152 multipliers);
//  * the on-the-fly pooling module.
// The host (standing in for external DRAM and its DMA) fills the SRAMs through
// the ext_* port while the accelerator is idle, sets cfg and pulses start.
// The accelerator convolves the source FSRAM with the weights, accumulating
// input-channel groups into the destination FSRAM, optionally applies ReLU
// and 2x2 max pooling, and pulses done. Pooled results leave on the 256-bit
// DRAM stream (dram_*) or are written back into the source FSRAM; unpooled
// results stay in the destination FSRAM and are read through ext_*.
//
// ext port: ext_target 0 = FSRAM1, 1 = FSRAM2 (ext_bank = channel, ext_addr =
// word address, 16-bit words of two vertically adjacent pixels), 2 = WSRAM
// (ext_bank = kernel, ext_addr = row = input channel, 72-bit words, write only),
// 3 = RSRAM (ext_rsel picks the feature or pooling reuse part). Reads return
// ext_q one cycle later. ext_* may be used only while busy is low.
// The partition, the ping-pong use of the FSRAMs, the WSRAM-to-core and
// FSRAM-to-pooling paths follow the published system overview. The reuse SRAM
// is reachable through ext_* only: the section tiling that would use it is not
// sequenced by the controller.
module cnn_accel_top
  import cnn_pkg::*;
#(
  parameter int FS_DEPTH = 2048,
  parameter int QSHIFT   = 7
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  // host access
  input  logic        ext_en,
  input  logic        ext_we,
  input  logic [1:0]  ext_target,
  input  logic        ext_rsel,
  input  logic [4:0]  ext_bank,
  input  logic [15:0] ext_addr,
  input  logic [71:0] ext_wdata,
  output logic [15:0] ext_q,
  // pooled output stream towards DRAM
  output logic        dram_valid,
  input  logic        dram_ready,
  output logic [255:0] dram_data
);
  localparam int FAW = $clog2(FS_DEPTH);

  // ---------------- controller ----------------
  logic        ws_rd_en, w_ld, fs_rd_en;
  logic [4:0]  ws_rd_row;
  logic [1:0]  w_col;
  logic [2:0]  grp;
  logic signed [15:0] fs_rd_row, fs_rd_col;
  step_t       step;
  logic        acc_en, acc_add, acc_relu;
  logic [15:0] acc_row, acc_col;
  logic        pool_rd_en, pool_in_valid, pool_in_ready;
  logic [15:0] pool_row, pool_col;
  logic        pw_en, in_pool_phase;
  logic [15:0] pw_row, pw_col;
  logic [3:0]  pw_mask_grp;
  logic        fs_valid, fs_ready;
  logic [63:0] fs_data;
  logic [1:0]  fs_grp;

  conv_controller u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .busy(busy), .done(done),
    .grp(grp),
    .ws_rd_en(ws_rd_en), .ws_rd_row(ws_rd_row), .w_ld(w_ld), .w_col(w_col),
    .fs_rd_en(fs_rd_en), .fs_rd_row(fs_rd_row), .fs_rd_col(fs_rd_col),
    .step(step),
    .acc_en(acc_en), .acc_add(acc_add), .acc_relu(acc_relu),
    .acc_row(acc_row), .acc_col(acc_col),
    .pool_rd_en(pool_rd_en), .pool_row(pool_row), .pool_col(pool_col),
    .pool_in_valid(pool_in_valid), .pool_in_ready(pool_in_ready),
    .pool_dram_beat(dram_valid && dram_ready), .pool_fs_beat(fs_valid && fs_ready),
    .pool_fs_grp(fs_grp),
    .pw_en(pw_en), .pw_row(pw_row), .pw_col(pw_col), .pw_mask_grp(pw_mask_grp),
    .in_pool_phase(in_pool_phase)
  );

  // ---------------- feature SRAMs (ping-pong) ----------------
  pix_t        col_px  [2][TM][4];
  logic [15:0] pool_a  [2][TM];
  logic [15:0] pool_b  [2][TM];
  logic [15:0] fs_ext_q [2];
  pix_t        psum [TM];
  logic        psum_valid;
  pix_t        pw_px [TM];
  logic [TM-1:0] pw_mask;

  always_comb begin
    for (int b = 0; b < TM; b++) begin
      pw_px[b]   = pix_t'(fs_data[(b % 8)*8 +: 8]);
      pw_mask[b] = pw_mask_grp[b / 8];
    end
  end

  for (genvar i = 0; i < 2; i++) begin : g_fs
    logic is_src;
    logic [15:0] h, w;
    logic a_en, a_add, a_relu;
    logic [15:0] a_row, a_col;
    logic [TM-1:0] a_mask;
    pix_t a_px [TM];
    always_comb begin
      is_src = (cfg.src_sel == 1'(i));
      h = (is_src && in_pool_phase && !cfg.pool_dram) ? (cfg.h >> 1) : cfg.h;
      w = (is_src && in_pool_phase && !cfg.pool_dram) ? (cfg.w >> 1) : cfg.w;
      if (is_src) begin
        a_en = pw_en; a_add = 1'b0; a_relu = 1'b0; a_row = pw_row; a_col = pw_col;
        a_mask = pw_mask; a_px = pw_px;
      end else begin
        a_en = acc_en; a_add = acc_add; a_relu = acc_relu; a_row = acc_row; a_col = acc_col;
        a_mask = '1; a_px = psum;
      end
    end
    fsram #(.BANKS(TM), .DEPTH(FS_DEPTH)) u_fsram (
      .clk(clk), .rst_n(rst_n), .img_h(h), .img_w(w),
      .ext_en(ext_en && !busy && ext_target == 2'(i)), .ext_we(ext_we),
      .ext_bank(ext_bank), .ext_addr(ext_addr[FAW-1:0]), .ext_wdata(ext_wdata[15:0]),
      .ext_q(fs_ext_q[i]),
      .col_en(is_src && fs_rd_en), .col_row(fs_rd_row), .col_col(fs_rd_col),
      .col_px(col_px[i]),
      .pool_en(!is_src && pool_rd_en), .pool_row(pool_row), .pool_col(pool_col),
      .pool_a(pool_a[i]), .pool_b(pool_b[i]),
      .acc_en(a_en), .acc_add(a_add), .acc_relu(a_relu), .acc_mask(a_mask),
      .acc_row(a_row), .acc_col(a_col), .acc_px(a_px)
    );
  end

  // ---------------- weight SRAM ----------------
  logic [71:0] w_rows [TM];
  wsram #(.BANKS(TM), .ROWS(32), .WORD_W(72)) u_wsram (
    .clk(clk),
    .wr_en(ext_en && ext_we && !busy && ext_target == 2'd2), .wr_bank(ext_bank),
    .wr_row(ext_addr[4:0]), .wr_data(ext_wdata),
    .rd_en(ws_rd_en), .rd_row(ws_rd_row), .rd_q(w_rows)
  );

  // ---------------- reuse SRAM ----------------
  logic [15:0] rs_q;
  rsram #(.BANKS(TM)) u_rsram (
    .clk(clk), .en(ext_en && !busy && ext_target == 2'd3), .sel(ext_rsel), .we(ext_we),
    .bank(ext_bank), .addr(ext_addr[7:0]), .wdata(ext_wdata[15:0]), .q(rs_q)
  );

  // ---------------- convolution core ----------------
  pix_t src_px [TM][4];
  pix_t core_col [TN][4];
  pix_t core_1x1 [TM];
  always_comb begin
    src_px = cfg.src_sel ? col_px[1] : col_px[0];
    for (int c = 0; c < TN; c++) begin
      for (int kk = 0; kk < 4; kk++) begin
        // front pass: rows r0..r0+3 as read; later passes read from row r0+2
        if (step.front) core_col[c][kk] = src_px[int'(grp)*TN + c][kk];
        else            core_col[c][kk] = (kk >= 2) ? src_px[int'(grp)*TN + c][kk-2] : '0;
      end
    end
    for (int b = 0; b < TM; b++) core_1x1[b] = src_px[b][0];
  end

  ccm #(.NROW(TM), .NCOL(TN), .QSHIFT(QSHIFT), .REUSE_DEPTH(RU_DEPTH)) u_ccm (
    .clk(clk), .rst_n(rst_n),
    .mode(step.mode), .k1x1(cfg.k1x1), .front(step.front), .ru_zero(step.ru_zero),
    .issue(step.issue), .col_px(core_col), .px1x1(core_1x1),
    .ru_wr_en(step.ru_wr_en), .ru_wr_addr(step.ru_wr_addr), .ru_rd_addr(step.ru_rd_addr),
    .pre_push(step.pre_push), .dir_left(step.dir_left),
    .w_ld(w_ld), .w_col(w_col), .w_row(w_rows),
    .psum(psum), .psum_valid(psum_valid)
  );

  // ---------------- pooling ----------------
  pooling_module #(.CH(TM), .FIFO_DEPTH(128)) u_pool (
    .clk(clk), .rst_n(rst_n), .dst_dram(cfg.pool_dram),
    .in_valid(pool_in_valid), .in_ready(pool_in_ready),
    .in_a(cfg.src_sel ? pool_a[0] : pool_a[1]),
    .in_b(cfg.src_sel ? pool_b[0] : pool_b[1]),
    .dram_valid(dram_valid), .dram_ready(dram_ready), .dram_data(dram_data),
    .fs_valid(fs_valid), .fs_ready(fs_ready), .fs_data(fs_data), .fs_grp(fs_grp)
  );
  assign fs_ready = 1'b1;

  // ---------------- host read-back ----------------
  logic [1:0] ext_tgt_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ext_tgt_q <= '0;
    else if (ext_en) ext_tgt_q <= ext_target;
  end
  always_comb begin
    unique case (ext_tgt_q)
      2'd0:    ext_q = fs_ext_q[0];
      2'd1:    ext_q = fs_ext_q[1];
      2'd3:    ext_q = rs_q;
      default: ext_q = '0;
    endcase
  end

  // The core's own valid flag and the controller's write tag must agree.
  a_psum_aligned: assert property (@(posedge clk) disable iff (!rst_n) psum_valid == acc_en);
endmodule

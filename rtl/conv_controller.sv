// conv_controller: sequencer of the data unit for one layer pass.
//
// For each input-channel group g (channels 4g..4g+3 in 3x3 mode, 32 channels
// in 1x1 mode) it
//  1. reads four rows of the weight SRAM, one per cycle, and loads them into
//     the four PEA columns of the core (all 32 kernels at once);
//  2. streams the tile through the core. In 3x3 mode this is the ring
//     streaming dataflow: band 0 (output row 0) is a front pass moving right,
//     fetching three rows per new column from the source FSRAM; every further
//     band starts with an up shift (one output, new bottom row from the
//     preload register) and then moves the other way, taking the two upper
//     rows of each new column from the reuse modules and one row from the
//     FSRAM. A tile of H x W outputs takes H*W+2 steps. In 1x1 mode the pixels
//     of all 32 channels at one position are loaded per step, in raster order;
//  3. writes the 32 partial sums of each output position into the destination
//     FSRAM, adding them to the stored sums from group 1 on (output reuse) and
//     applying ReLU when writing the last group. With cfg.acc_cont group 0
//     adds too, so a layer with more than 32 input channels runs as several
//     passes over the same destination, ReLU set only on the last pass.
// Then, if pooling is enabled, it reads one 2x2 window per two cycles from the
// destination FSRAM into the pooling module and, for the FSRAM destination,
// writes the pooled pixels back into the source FSRAM; finally it pulses done.
//
// Timing: step control (`step`) is registered, one cycle after the matching
// FSRAM column read (`fs_rd_*`), so it meets the read data. The partial sums
// of a step leave the core four cycles later and `acc_*` carries them with
// their coordinates. cfg must stay stable from start to done. pw_en is
// pool_fs_beat itself: a pooled beat is written into the FSRAM in the cycle
// it leaves the pooling module, at the position the controller counts.
// The phases, the ring order and the H*W+2 step count follow the published
// design; the state machine, the padding handling, the pooling rate of one
// window per two cycles (the published rate) and the interfaces are this
// design's. Stride 2 and input channel decomposition are not sequenced.
module conv_controller
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  output logic [2:0]  grp,          // current input-channel group
  // weight SRAM read and core weight load
  output logic        ws_rd_en,
  output logic [4:0]  ws_rd_row,
  output logic        w_ld,
  output logic [1:0]  w_col,
  // source FSRAM column read (data one cycle later)
  output logic        fs_rd_en,
  output logic signed [15:0] fs_rd_row,
  output logic signed [15:0] fs_rd_col,
  // core step control, aligned with the FSRAM read data
  output step_t       step,
  // destination FSRAM partial-sum write, aligned with the core's psum
  output logic        acc_en,
  output logic        acc_add,
  output logic        acc_relu,
  output logic [15:0] acc_row,
  output logic [15:0] acc_col,
  // pooling
  output logic        pool_rd_en,
  output logic [15:0] pool_row,
  output logic [15:0] pool_col,
  output logic        pool_in_valid,
  input  logic        pool_in_ready,
  input  logic        pool_dram_beat,
  input  logic        pool_fs_beat,
  input  logic [1:0]  pool_fs_grp,
  output logic        pw_en,        // pooled pixels into the source FSRAM
  output logic [15:0] pw_row,
  output logic [15:0] pw_col,
  output logic [3:0]  pw_mask_grp,  // one-hot group of eight banks
  output logic        in_pool_phase
);
  typedef enum logic [2:0] {S_IDLE, S_WLOAD, S_CONV, S_DRAIN, S_POOL, S_PDRAIN} state_e;
  state_e state;

  logic [3:0]  g;
  logic [2:0]  wi;
  logic [15:0] band, k;
  logic [7:0]  drain;
  logic [15:0] ppr, ppc;        // next pooling window
  logic        pphase;          // pooling issues every other cycle
  logic [31:0] pbeats, pbeats_need;
  logic [15:0] pwr, pwc;        // next pooled pixel to write back
  logic        last_step;

  step_t       st_c;            // combinational step of this cycle
  logic        rd_c;
  logic signed [15:0] rd_row_c, rd_col_c;

  localparam int PIPE = 5;      // FSRAM read (1) + core (4)
  logic [PIPE-1:0] v_pipe;
  logic [15:0] r_pipe [PIPE];
  logic [15:0] c_pipe [PIPE];
  logic [PIPE-1:0] add_pipe, relu_pipe;

  // ---------------- step generation ----------------
  always_comb begin
    int x, c, W, H;
    W = int'(cfg.w);
    H = int'(cfg.h);
    x = 0;
    c = 0;
    st_c = '0;
    st_c.mode = SH_HOLD;
    rd_c = 1'b0; rd_row_c = '0; rd_col_c = '0;
    last_step = 1'b0;
    if (state == S_CONV) begin
      if (cfg.k1x1) begin
        st_c.mode  = SH_LOAD9;
        st_c.issue = 1'b1;
        st_c.orow  = band;
        st_c.ocol  = k;
        rd_c = 1'b1; rd_row_c = band; rd_col_c = k;
        last_step = (int'(band) == H-1) && (int'(k) == W-1);
      end else if (band == 0) begin
        // front pass, moving right: column x = k-1 enters
        x = int'(k) - 1;
        st_c.mode     = SH_RIGHT;
        st_c.front    = 1'b1;
        st_c.pre_push = 1'b1;
        st_c.issue    = (k >= 2);
        st_c.orow     = 16'd0;
        st_c.ocol     = 16'(x - 1);
        st_c.ru_wr_en = (x - 3 >= 0);
        st_c.ru_wr_addr = RU_AW'(x - 3);
        rd_c = 1'b1; rd_row_c = -16'sd1; rd_col_c = 16'(x);
        last_step = (int'(k) == W+1) && (H == 1);
      end else if (k == 0) begin
        // up shift: window moves one row down, stays at the end column
        st_c.mode  = SH_UP;
        st_c.issue = 1'b1;
        st_c.orow  = band;
        st_c.ocol  = band[0] ? 16'(W-1) : 16'd0;
        last_step = 1'b0;
      end else if (band[0]) begin
        // odd band: moving left, window centre c, column c-1 enters
        c = W - 1 - int'(k);
        x = c - 1;
        st_c.mode     = SH_LEFT;
        st_c.dir_left = 1'b1;
        st_c.pre_push = 1'b1;
        st_c.issue    = 1'b1;
        st_c.orow     = band;
        st_c.ocol     = 16'(c);
        st_c.ru_rd_addr = (x >= 0) ? RU_AW'(x) : '0;
        st_c.ru_zero  = (x < 0);
        st_c.ru_wr_en = (c + 2 <= W - 1);
        st_c.ru_wr_addr = RU_AW'(c);
        rd_c = 1'b1; rd_row_c = 16'(int'(band) + 1); rd_col_c = 16'(x);
        last_step = (int'(k) == W-1) && (int'(band) == H-1);
      end else begin
        // even band: moving right, window centre c, column c+1 enters
        c = int'(k);
        x = c + 1;
        st_c.mode     = SH_RIGHT;
        st_c.pre_push = 1'b1;
        st_c.issue    = 1'b1;
        st_c.orow     = band;
        st_c.ocol     = 16'(c);
        st_c.ru_rd_addr = (x <= W - 1) ? RU_AW'(x - 2) : '0;
        st_c.ru_zero  = (x > W - 1);
        st_c.ru_wr_en = (c - 2 >= 0);
        st_c.ru_wr_addr = RU_AW'(c - 2);
        rd_c = 1'b1; rd_row_c = 16'(int'(band) + 1); rd_col_c = 16'(x);
        last_step = (int'(k) == W-1) && (int'(band) == H-1);
      end
    end
  end

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; g <= '0; wi <= '0; band <= '0; k <= '0; drain <= '0;
      ppr <= '0; ppc <= '0; pphase <= 1'b0; pbeats <= '0; pwr <= '0; pwc <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_WLOAD; g <= '0; wi <= '0;
        end
        S_WLOAD: begin
          wi <= wi + 1'b1;
          if (wi == 3'(TN)) begin
            state <= S_CONV; band <= '0; k <= '0;
          end
        end
        S_CONV: begin
          if (last_step) begin
            if (g == cfg.n_groups - 1) begin
              state <= S_DRAIN; drain <= '0;
            end else begin
              state <= S_WLOAD; g <= g + 1'b1; wi <= '0;
            end
          end else if (cfg.k1x1) begin
            if (int'(k) == int'(cfg.w) - 1) begin k <= '0; band <= band + 1'b1; end
            else k <= k + 1'b1;
          end else if ((band == 0 && int'(k) == int'(cfg.w) + 1) ||
                       (band != 0 && int'(k) == int'(cfg.w) - 1)) begin
            k <= '0; band <= band + 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 8'(PIPE + 2)) begin
            if (cfg.pool) begin
              state <= S_POOL; ppr <= '0; ppc <= '0; pphase <= 1'b0;
              pbeats <= '0; pwr <= '0; pwc <= '0;
            end else begin
              state <= S_IDLE; done <= 1'b1;
            end
          end
        end
        S_POOL: begin
          pphase <= !pphase;
          if (!pphase && pool_in_ready) begin
            if (int'(ppc) == int'(cfg.w) / 2 - 1) begin
              ppc <= '0; ppr <= ppr + 1'b1;
              if (int'(ppr) == int'(cfg.h) / 2 - 1) state <= S_PDRAIN;
            end else ppc <= ppc + 1'b1;
          end else if (!pphase) begin
            pphase <= 1'b0;     // wait for room in the FIFOs
          end
        end
        S_PDRAIN: begin
          if (pbeats == pbeats_need) begin
            state <= S_IDLE; done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase

      // pooled output bookkeeping (POOL and PDRAIN)
      if (pool_dram_beat) pbeats <= pbeats + 1;
      if (pool_fs_beat) begin
        pbeats <= pbeats + 1;
        if (pool_fs_grp == 2'(TM / 8 - 1)) begin
          if (int'(pwc) == int'(cfg.w) / 2 - 1) begin pwc <= '0; pwr <= pwr + 1'b1; end
          else pwc <= pwc + 1'b1;
        end
      end
    end
  end

  assign pbeats_need = 32'(int'(cfg.h) / 2) * 32'(int'(cfg.w) / 2) * (cfg.pool_dram ? 32'd1 : 32'(TM / 8));

  // ---------------- outputs ----------------
  assign busy  = (state != S_IDLE);
  assign grp   = g[2:0];
  assign ws_rd_en  = (state == S_WLOAD) && (wi < 3'(TN));
  assign ws_rd_row = cfg.k1x1 ? 5'(wi) : 5'(int'(g) * TN + int'(wi));
  assign fs_rd_en  = rd_c;
  assign fs_rd_row = rd_row_c;
  assign fs_rd_col = rd_col_c;
  assign pool_rd_en = (state == S_POOL) && !pphase && pool_in_ready;
  assign pool_row   = ppr;
  assign pool_col   = ppc;
  assign in_pool_phase = (state == S_POOL) || (state == S_PDRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= '0; w_ld <= 1'b0; w_col <= '0; pool_in_valid <= 1'b0;
      v_pipe <= '0; add_pipe <= '0; relu_pipe <= '0;
      for (int i = 0; i < PIPE; i++) begin r_pipe[i] <= '0; c_pipe[i] <= '0; end
    end else begin
      step          <= st_c;
      w_ld          <= ws_rd_en;
      w_col         <= wi[1:0];
      pool_in_valid <= pool_rd_en;
      v_pipe    <= {v_pipe[PIPE-2:0], st_c.issue};
      add_pipe  <= {add_pipe[PIPE-2:0], (g != 0) || cfg.acc_cont};
      relu_pipe <= {relu_pipe[PIPE-2:0], cfg.relu && (g == cfg.n_groups - 1)};
      r_pipe[0] <= st_c.orow;
      c_pipe[0] <= st_c.ocol;
      for (int i = 1; i < PIPE; i++) begin
        r_pipe[i] <= r_pipe[i-1];
        c_pipe[i] <= c_pipe[i-1];
      end
    end
  end

  assign acc_en   = v_pipe[PIPE-1];
  assign acc_add  = add_pipe[PIPE-1];
  assign acc_relu = relu_pipe[PIPE-1];
  assign acc_row  = r_pipe[PIPE-1];
  assign acc_col  = c_pipe[PIPE-1];

  assign pw_en       = pool_fs_beat;
  assign pw_row      = pwr;
  assign pw_col      = pwc;
  assign pw_mask_grp = 4'(1 << pool_fs_grp);

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule

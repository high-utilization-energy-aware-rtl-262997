// cnn_pkg: types and constants shared by the accelerator.
//
// The datapath is 8 bits wide (pixels, weights, partial sums), signed two's
// complement. The convolution core is TM = 32 kernel rows by TN = 4 input-channel
// columns of process element arrays (PEA), each PEA being 3x3 process elements.
// These numbers follow the published design; signedness is this design's choice.
package cnn_pkg;
  localparam int DATA_W  = 8;            // pixel / weight / partial sum width
  localparam int PROD_W  = 2 * DATA_W;   // multiplier output width
  localparam int TM      = 32;           // output channels (kernels) per pass
  localparam int TN      = 4;            // input channels per pass (3x3 mode)
  localparam int KSZ     = 3;            // kernel edge
  localparam int NPE     = KSZ * KSZ;    // PEs per PEA
  localparam int PEA_SUM_W = DATA_W + 4; // sum of nine 8-bit values
  localparam int ROW_SUM_W = PEA_SUM_W + 2; // sum of four PEA sums

  typedef logic signed [DATA_W-1:0] pix_t;
  typedef logic signed [PEA_SUM_W-1:0] pea_sum_t;
  typedef logic signed [ROW_SUM_W-1:0] row_sum_t;

  // How the data registers of a PEA are updated in one cycle.
  typedef enum logic [2:0] {
    SH_HOLD  = 3'd0,  // keep contents
    SH_RIGHT = 3'd1,  // front / rightward pass: data moves to the right-hand PE
    SH_LEFT  = 3'd2,  // leftward pass: data moves to the left-hand PE
    SH_UP    = 3'd3,  // window moves one row down: data moves to the PE above
    SH_LOAD9 = 3'd4   // 1x1 mode: every PE loads its own pixel directly
  } shift_e;

  localparam int RU_DEPTH = 222;         // reuse module register array
  localparam int RU_AW    = $clog2(RU_DEPTH);

  // Configuration of one layer pass (32 output channels).
  typedef struct packed {
    logic [15:0] h;          // output (= input) rows of the tile
    logic [15:0] w;          // output (= input) columns, 4..224 in 3x3 mode
    logic [3:0]  n_groups;   // input-channel groups of TN (3x3) or 32 (1x1), 1..8
    logic        k1x1;       // 1x1 convolution instead of 3x3
    logic        relu;       // apply max(x,0) when writing the final sums
    logic        pool;       // 2x2 max pooling after the convolution
    logic        pool_dram;  // pooled output to DRAM (1) or back to the source FSRAM (0)
    logic        acc_cont;   // group 0 also adds into the stored sums: this pass continues
                             // the input channels of an earlier pass (more than 32 inputs)
    logic        src_sel;    // 0: FSRAM1 is source, FSRAM2 destination; 1: swapped
  } layer_cfg_t;

  // Control of one convolution step of the core.
  typedef struct packed {
    shift_e             mode;
    logic               front;     // rows r0, r0+1 come from the FSRAM, not the reuse module
    logic               dir_left;
    logic               issue;     // the step completes a window: one output pixel
    logic               ru_wr_en;
    logic [RU_AW-1:0]   ru_wr_addr;
    logic [RU_AW-1:0]   ru_rd_addr;
    logic               ru_zero;   // entering column is padding
    logic               pre_push;
    logic [15:0]        orow;
    logic [15:0]        ocol;
  } step_t;

  // Saturate a signed value to DATA_W bits.
  function automatic pix_t sat8(input logic signed [31:0] v);
    if (v > 32'sd127) return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else return v[DATA_W-1:0];
  endfunction
endpackage

// reuse_module: keeps the pixels of a PEA column that the next pass can reuse.
//
// In the ring streaming dataflow the 3x3 window sweeps one band of three input
// rows left-to-right, steps one row down, and sweeps back right-to-left. The
// two lower rows of a band are the two upper rows of the next band, so as a
// column of pixels leaves the PEA its rows 1 and 2 are written here (register
// array 1 and 2) and read back, in reverse order, when the next pass needs
// them. Only the bottom pixel of each new column then comes from the feature
// SRAM. Each array holds DEPTH = 222 pixels, enough for a 224-pixel-wide map
// (a pass stores width-2 columns); the caller addresses the arrays so that a
// location is always read one step before it is rewritten.
//
// A three-entry preload register also lives here: during a pass it collects
// the pixel one row below the band for each column that enters, so that at the
// end of the pass the up shift has the three pixels of the next row at hand.
// It moves in the same direction as the PEA (pre_dir = 0: new value at index 0,
// as SH_RIGHT; 1: new value at index 2, as SH_LEFT), so pre_q[j] lines up with
// PE column j.
//
// Timing: writes take effect at the clock edge; rd_q is a combinational read
// of the arrays. Array sizes follow the published design; the addressing, the
// preload register and its placement here are this design's choices.
module reuse_module
  import cnn_pkg::*;
#(
  parameter int DEPTH = 222,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  pix_t          wr_data [2],   // [0] array 1 (PE row 1), [1] array 2 (PE row 2)
  input  logic [AW-1:0] rd_addr,
  output pix_t          rd_q    [2],
  input  logic          pre_push,
  input  logic          pre_dir,
  input  pix_t          pre_in,
  output pix_t          pre_q   [KSZ]
);
  pix_t arr1 [DEPTH];
  pix_t arr2 [DEPTH];
  pix_t pre  [KSZ];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      arr1[wr_addr] <= wr_data[0];
      arr2[wr_addr] <= wr_data[1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < KSZ; j++) pre[j] <= '0;
    end else if (pre_push) begin
      if (!pre_dir) begin
        pre[0] <= pre_in;
        for (int j = 1; j < KSZ; j++) pre[j] <= pre[j-1];
      end else begin
        pre[KSZ-1] <= pre_in;
        for (int j = 0; j < KSZ-1; j++) pre[j] <= pre[j+1];
      end
    end
  end

  assign rd_q[0] = arr1[rd_addr];
  assign rd_q[1] = arr2[rd_addr];
  assign pre_q   = pre;

  // Both addresses stay inside the arrays.
  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> int'(wr_addr) < DEPTH);
endmodule

// wsram: weight SRAM, BANKS banks of ROWS words of 72 bits.
//
// Bank m holds the weights of output kernel m; row i of every bank holds the
// nine weights of input channel i (one 3x3 kernel slice, byte k = kernel
// position k in raster order). A read of one row in all banks at once delivers
// the slice of channel i for all 32 kernels, so a PEA column is loaded in one
// cycle. In 1x1 mode a bank holds the 32 single weights of a kernel packed
// nine per row (row q, byte k = input channel 9q+k).
// Interface: wr_* writes one row of one bank (from DRAM); rd_en/rd_row reads
// the same row of all banks, data on rd_q one cycle later.
// Bank count, row count and word width follow the published weight SRAM; the
// byte order inside a word is this design's choice.
module wsram
  import cnn_pkg::*;
#(
  parameter int BANKS  = TM,
  parameter int ROWS   = 32,
  parameter int WORD_W = NPE * DATA_W,
  localparam int RW = $clog2(ROWS),
  localparam int BW = $clog2(BANKS)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [BW-1:0]     wr_bank,
  input  logic [RW-1:0]     wr_row,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [RW-1:0]     rd_row,
  output logic [WORD_W-1:0] rd_q [BANKS]
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WORD_W-1:0] mem [ROWS];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b)) mem[wr_row] <= wr_data;
      if (rd_en) rd_q[b] <= mem[rd_row];
    end
  end
endmodule

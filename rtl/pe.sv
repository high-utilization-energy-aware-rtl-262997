// pe: one process element, the 1x1 computing unit of the accelerator.
//
// A data register and a weight register (8 bits each) feed an 8x8 signed
// multiplier. The 16-bit product is quantized back to 8 bits and stored in the
// sum register. The register chain and widths are those of the published PE;
// the quantization rule (round-to-nearest arithmetic shift right by QSHIFT,
// then saturation to signed 8 bits) is this design's choice, as the rule is not
// published.
//
// Interface: data_ld loads data_in into the data register; w_ld loads w_in into
// the weight register. data_q exposes the data register so that the enclosing
// array can shift it to a neighbour.
// Timing: the product of the registers present in cycle t appears in sum_q in
// cycle t+1 (one register stage after the operand registers).
module pe
  import cnn_pkg::*;
#(
  parameter int QSHIFT = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic data_ld,
  input  pix_t data_in,
  input  logic w_ld,
  input  pix_t w_in,
  output pix_t data_q,
  output pix_t sum_q
);
  pix_t data_reg, weight_reg, sum_reg;
  logic signed [PROD_W-1:0] prod;
  logic signed [31:0] rounded;

  always_comb begin
    prod    = data_reg * weight_reg;
    rounded = (32'(prod) + (QSHIFT > 0 ? (32'sd1 <<< (QSHIFT - 1)) : 32'sd0)) >>> QSHIFT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_reg   <= '0;
      weight_reg <= '0;
      sum_reg    <= '0;
    end else begin
      if (data_ld) data_reg <= data_in;
      if (w_ld)    weight_reg <= w_in;
      sum_reg <= sat8(rounded);
    end
  end

  assign data_q = data_reg;
  assign sum_q  = sum_reg;
endmodule

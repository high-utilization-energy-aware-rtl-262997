// pooling_module: on-the-fly 2x2 max pooling for CH channels.
//
// For every channel a Max unit takes two 16-bit words, each a pair of
// vertically adjacent output pixels (one word of the feature SRAM's
// double-pixels-per-row placement), so in_a and in_b together are one 2x2
// window. The largest of the four signed pixels is pushed into that channel's
// 128 x 8-bit FIFO. A multiplexer drains the FIFOs towards one of two
// destinations chosen by dst_dram:
//   dst_dram = 1  256-bit beats, one pooled pixel of all 32 channels per beat
//                 (byte ch = channel ch), for external DRAM.
//   dst_dram = 0  64-bit beats, eight channels per beat (fs_grp tells which
//                 eight), four beats per pooled pixel, for the feature SRAM.
// Handshakes: in_valid/in_ready on the input (ready while no FIFO is full);
// valid/ready on each output. A beat moves when valid and ready are both high.
// Timing: a window accepted in cycle t is in the FIFOs at t+1 and can leave on
// an output from t+1.
// The Max units, the FIFO size and the two output widths follow the published
// pooling module; the packing of the outputs and the handshakes are this
// design's choices.
module pooling_module
  import cnn_pkg::*;
#(
  parameter int CH = TM,
  parameter int FIFO_DEPTH = 128,
  localparam int GRPS = CH / 8,
  localparam int GW = (GRPS > 1) ? $clog2(GRPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             dst_dram,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [15:0]      in_a [CH],
  input  logic [15:0]      in_b [CH],
  output logic             dram_valid,
  input  logic             dram_ready,
  output logic [CH*8-1:0]  dram_data,
  output logic             fs_valid,
  input  logic             fs_ready,
  output logic [63:0]      fs_data,
  output logic [GW-1:0]    fs_grp
);
  pix_t        mx   [CH];
  logic [7:0]  head [CH];
  logic        emp  [CH];
  logic        ful  [CH];
  logic        pop  [CH];
  logic        any_full, all_nonempty, grp_nonempty;
  logic [GW-1:0] grp;

  function automatic pix_t max2(input pix_t a, input pix_t b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    any_full = 1'b0;
    all_nonempty = 1'b1;
    for (int c = 0; c < CH; c++) begin
      mx[c] = max2(max2(pix_t'(in_a[c][7:0]), pix_t'(in_a[c][15:8])),
                   max2(pix_t'(in_b[c][7:0]), pix_t'(in_b[c][15:8])));
      any_full |= ful[c];
      all_nonempty &= !emp[c];
    end
    grp_nonempty = 1'b1;
    for (int k = 0; k < 8; k++) grp_nonempty &= !emp[int'(grp)*8 + k];
  end

  assign in_ready   = !any_full;
  assign dram_valid = dst_dram && all_nonempty;
  assign fs_valid   = !dst_dram && grp_nonempty;
  assign fs_grp     = grp;

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      dram_data[c*8 +: 8] = head[c];
      pop[c] = dst_dram ? (dram_valid && dram_ready)
                        : (fs_valid && fs_ready && (c / 8 == int'(grp)));
    end
    for (int k = 0; k < 8; k++) fs_data[k*8 +: 8] = head[int'(grp)*8 + k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grp <= '0;
    else if (!dst_dram && fs_valid && fs_ready)
      grp <= (int'(grp) == GRPS-1) ? '0 : grp + 1'b1;
  end

  for (genvar c = 0; c < CH; c++) begin : g_ch
    logic [$clog2(FIFO_DEPTH):0] cnt;
    pool_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(8)) u_fifo (
      .clk(clk), .rst_n(rst_n),
      .push(in_valid && in_ready), .d(mx[c]),
      .pop(pop[c]), .q(head[c]), .empty(emp[c]), .full(ful[c]), .count(cnt)
    );
  end
endmodule

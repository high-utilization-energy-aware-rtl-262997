// rsram: reuse SRAM, made of a feature reuse part and a pooling reuse part.
//
// Feature reuse SRAM: when an input map is split into sections, the last two
// rows of one section are also the first rows the next section needs. They are
// kept here by column: word c of bank ch holds rows (r, r+1) of column c of
// channel ch, so one read returns both pixels of a column.
// Pooling reuse SRAM: holds output pixels of the previous section that wait
// for their 2x2 pooling partners, two pixels per word.
// Each part has BANKS banks (one per channel) and a single port: sel picks the
// part, we writes, otherwise the word is read and appears on q one cycle later.
// The two parts, their purpose and the two-pixel words follow the published
// data unit. The depths are this design's choice, sized so that the parts
// total the published 24 KB (32 x 256 x 2 B + 32 x 128 x 2 B).
module rsram
  import cnn_pkg::*;
#(
  parameter int BANKS    = TM,
  parameter int FR_DEPTH = 256,
  parameter int PR_DEPTH = 128,
  localparam int FAW = $clog2(FR_DEPTH),
  localparam int PAW = $clog2(PR_DEPTH),
  localparam int AW  = (FAW > PAW) ? FAW : PAW,
  localparam int BW  = $clog2(BANKS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          sel,     // 0: feature reuse part, 1: pooling reuse part
  input  logic          we,
  input  logic [BW-1:0] bank,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   wdata,
  output logic [15:0]   q
);
  logic [15:0] fr [BANKS][FR_DEPTH];
  logic [15:0] pr [BANKS][PR_DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (!sel) begin
        if (we) fr[bank][FAW'(addr)] <= wdata;
        else    q <= fr[bank][FAW'(addr)];
      end else begin
        if (we) pr[bank][PAW'(addr)] <= wdata;
        else    q <= pr[bank][PAW'(addr)];
      end
    end
  end
endmodule

// dp_sram: dual-port SRAM bank written as an array, standing in for a foundry
// dual-port macro.
//
// Two independent ports, each with enable, per-byte write enables and address.
// Reads are synchronous: data for the address presented in cycle t appears on
// q in cycle t+1 and holds until the next enabled read. A read returns the
// contents before a write to the same address in the same cycle. Writing the
// same byte from both ports in one cycle is not allowed (port B wins here).
// The bank organisation follows the published feature SRAM (dual-port banks);
// the byte enables and read timing are this design's choices.
module dp_sram #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 2048,
  localparam int AW = $clog2(DEPTH),
  localparam int NB = WIDTH / 8
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic [NB-1:0]    a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_q,
  input  logic             b_en,
  input  logic [NB-1:0]    b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_q
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_q <= mem[a_addr];
      for (int i = 0; i < NB; i++)
        if (a_we[i]) mem[a_addr][i*8 +: 8] <= a_wdata[i*8 +: 8];
    end
    if (b_en) begin
      b_q <= mem[b_addr];
      for (int i = 0; i < NB; i++)
        if (b_we[i]) mem[b_addr][i*8 +: 8] <= b_wdata[i*8 +: 8];
    end
  end
endmodule

// pool_fifo: DEPTH x WIDTH first-in first-out buffer behind each Max unit of
// the pooling module (128 x 8 bits as published).
// push/pop in the same cycle are both honoured; push when full and pop when
// empty are ignored and flagged by assertions. q shows the oldest entry
// (combinational read of the head).
module pool_fifo #(
  parameter int DEPTH = 128,
  parameter int WIDTH = 8,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] d,
  input  logic             pop,
  output logic [WIDTH-1:0] q,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign do_push = push && (!full || do_pop);
  assign do_pop  = pop && !empty;
  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign q       = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule

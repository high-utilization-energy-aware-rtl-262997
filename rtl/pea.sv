// pea: process element array, nine PEs arranged 3x3 with an adder tree.
//
// Each PE's data register is fed through a multiplexer so that the whole 3x3
// window of input pixels can move in one of three directions, as needed by the
// ring streaming dataflow, or be loaded directly:
//   SH_RIGHT  data moves to the right-hand PE; new_col enters PE column 0.
//             (front shifting and rightward passes)
//   SH_LEFT   data moves to the left-hand PE; new_col enters PE column 2.
//   SH_UP     data moves to the PE above; new_row enters PE row 2.
//   SH_LOAD9  every PE loads its own pixel from load9 (1x1 convolution).
//   SH_HOLD   nothing moves.
// PE (r, j) is element r*3+j of the arrays below; r counts rows top-down and
// j counts PE columns left to right. Because new image columns enter at PE
// column 0 when the window moves right, PE column j holds window column 2-j:
// the caller loads the kernel mirrored in j. The directions are the published
// ones; the mirrored kernel placement is this design's consequence of them.
//
// exit_r / exit_l give the contents of PE column 2 / PE column 0, the pixels
// that leave the array on the next SH_RIGHT / SH_LEFT; the caller keeps them in
// the reuse module.
// Timing: the PE products of cycle t reach the sum registers at t+1, and the
// registered adder-tree output sum_q at t+2.
module pea
  import cnn_pkg::*;
#(
  parameter int QSHIFT = 7
) (
  input  logic   clk,
  input  logic   rst_n,
  input  shift_e mode,
  input  pix_t   new_col [KSZ],   // indexed by PE row
  input  pix_t   new_row [KSZ],   // indexed by PE column
  input  pix_t   load9   [NPE],
  input  logic   w_ld,
  input  pix_t   w_in    [NPE],
  output pix_t   exit_r  [KSZ],   // PE column 2, indexed by row
  output pix_t   exit_l  [KSZ],   // PE column 0, indexed by row
  output pea_sum_t sum_q
);
  pix_t d_q   [NPE];
  pix_t d_in  [NPE];
  pix_t s_q   [NPE];
  logic d_ld;

  assign d_ld = (mode != SH_HOLD);

  always_comb begin
    for (int r = 0; r < KSZ; r++) begin
      for (int j = 0; j < KSZ; j++) begin
        unique case (mode)
          SH_RIGHT: d_in[r*KSZ+j] = (j == 0) ? new_col[r] : d_q[r*KSZ+j-1];
          SH_LEFT:  d_in[r*KSZ+j] = (j == KSZ-1) ? new_col[r] : d_q[r*KSZ+j+1];
          SH_UP:    d_in[r*KSZ+j] = (r == KSZ-1) ? new_row[j] : d_q[(r+1)*KSZ+j];
          SH_LOAD9: d_in[r*KSZ+j] = load9[r*KSZ+j];
          default:  d_in[r*KSZ+j] = d_q[r*KSZ+j];
        endcase
      end
    end
  end

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    pe #(.QSHIFT(QSHIFT)) u_pe (
      .clk(clk), .rst_n(rst_n),
      .data_ld(d_ld), .data_in(d_in[k]),
      .w_ld(w_ld), .w_in(w_in[k]),
      .data_q(d_q[k]), .sum_q(s_q[k])
    );
  end

  for (genvar r = 0; r < KSZ; r++) begin : g_exit
    assign exit_r[r] = d_q[r*KSZ+KSZ-1];
    assign exit_l[r] = d_q[r*KSZ];
  end

  // Adder tree over the nine sum registers, registered once.
  pea_sum_t tree;
  always_comb begin
    tree = '0;
    for (int k = 0; k < NPE; k++) tree += pea_sum_t'(s_q[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum_q <= '0;
    else        sum_q <= tree;
  end
endmodule

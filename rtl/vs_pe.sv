// vs_pe: one processing element of a PE block.
//
// The PE multiplies the input activation broadcast along its row by the
// weight broadcast down its column and, if it has an adder, adds the partial
// sum handed to it diagonally by the PE one row up and one column left. The
// result goes on diagonally (or, at the right edge / bottom, out of the block).
// Following the PE figure of the paper, PEs in the first row or the first
// column have only the multiplier (HAS_ADD = 0); there psum_i is ignored.
//
// Purely combinational: the paper adds along the whole diagonal in the same
// cycle. Products and sums are kept at full width (PSUM_W); rounding to 16
// bits happens once at the block edge, which is this design's choice.
module vs_pe #(
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned PSUM_W  = 2 * DATA_W + 2,
  parameter bit          HAS_ADD = 1'b1
) (
  input  logic signed [DATA_W-1:0] in_i,    // broadcast input activation
  input  logic signed [DATA_W-1:0] wt_i,    // broadcast weight
  input  logic signed [PSUM_W-1:0] psum_i,  // diagonal partial sum in
  output logic signed [PSUM_W-1:0] psum_o   // diagonal partial sum out
);
  logic signed [2*DATA_W-1:0] prod;

  always_comb begin
    prod = in_i * wt_i;
    if (HAS_ADD) psum_o = PSUM_W'(prod) + psum_i;
    else         psum_o = PSUM_W'(prod);
  end
endmodule

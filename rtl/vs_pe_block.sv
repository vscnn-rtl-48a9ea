// vs_pe_block: one ROWS x COLS PE block (7 x 3 by default).
//
// Row r of the block receives element r of the input column vector
// (broadcast horizontally), column c receives tap c of the weight column
// vector (broadcast vertically), so PE(r,c) forms in[r]*wt[c]. Partial sums run
// diagonally: PE(r,c) adds its product to the sum of PE(r-1,c-1). A diagonal
// ending at PE(r,c) therefore collects the products that belong to one output
// row: for a 3x3 kernel with padding 1 and an input vector covering rows
// y0..y0+ROWS-1, the diagonal ending in the right column at row r gives output
// row y0+r-1, the bottom of column COLS-2 gives row y0+ROWS-1, the bottom of
// column 0 gives row y0+ROWS.
//
// psum_o[j], j = 0..ROWS+COLS-2, is the partial output for row y0-1+j:
// j < ROWS from the right column, j >= ROWS from the bottom of column
// COLS-2-(j-ROWS). This is the OB0..OB6 order of the paper's data-flow chart.
// Each edge sum is shifted right by FRAC (Q8.8 data assumed) and saturated
// to 16 bits, the width the paper gives for the array-to-accumulator bus.
// Combinational; the caller registers the result.
module vs_pe_block
  import vscnn_pkg::*;
#(
  parameter int unsigned ROWS = PE_ROWS,
  parameter int unsigned COLS = PE_COLS,
  parameter int unsigned FRAC_BITS = FRAC
) (
  input  data_t [ROWS-1:0]        in_vec_i,
  input  data_t [COLS-1:0]        wt_vec_i,
  output data_t [ROWS+COLS-2:0]   psum_o
);
  localparam int unsigned PSUM_W = 2 * DATA_W + 4;

  // edge sums: right column rows, then bottoms of columns COLS-2 .. 0
  logic signed [PSUM_W-1:0] edge_sum [ROWS+COLS-1];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic signed [PSUM_W-1:0] diag_in, po;
      if (r > 0 && c > 0) begin : g_diag
        assign diag_in = g_row[r-1].g_col[c-1].po;
      end else begin : g_nodiag
        assign diag_in = '0;
      end
      vs_pe #(
        .DATA_W (DATA_W),
        .PSUM_W (PSUM_W),
        .HAS_ADD(r > 0 && c > 0)
      ) u_pe (
        .in_i  (in_vec_i[r]),
        .wt_i  (wt_vec_i[c]),
        .psum_i(diag_in),
        .psum_o(po)
      );
      if (c == COLS - 1) begin : g_right
        assign edge_sum[r] = po;
      end else if (r == ROWS - 1) begin : g_bottom
        assign edge_sum[ROWS + COLS - 2 - c] = po;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < ROWS + COLS - 1; j++) begin
      psum_o[j] = sat(48'(edge_sum[j] >>> FRAC_BITS));
    end
  end
endmodule

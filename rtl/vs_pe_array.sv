// vs_pe_array: the eight PE blocks and the register stage behind them.
//
// Each block gets its own 7-element input vector and 3-element weight vector
// (56x16 and 24x16 bits in all, as in the paper's system diagram) together
// with the output index of that pair. In this design every block works on a
// different filter with its own sparse stream (the paper does not say how the
// blocks share the work). One cycle after a valid op enters, res_o carries the
// block's 9 partial outputs (72x16 bits in all) and the same index to the
// accumulator. Reset clears the valid bits.
module vs_pe_array
  import vscnn_pkg::*;
#(
  parameter int unsigned NB = N_BLK
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  lane_op_t [NB-1:0]    op_i,
  output blk_res_t [NB-1:0]    res_o
);
  for (genvar b = 0; b < NB; b++) begin : g_blk
    data_t [N_OUT-1:0] ps;

    vs_pe_block u_blk (
      .in_vec_i(op_i[b].in),
      .wt_vec_i(op_i[b].wt),
      .psum_o  (ps)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        res_o[b] <= '0;
      end else begin
        res_o[b].vld <= op_i[b].vld;
        res_o[b].xo  <= op_i[b].xo;
        res_o[b].ty  <= op_i[b].ty;
        res_o[b].ps  <= ps;
      end
    end
  end
endmodule

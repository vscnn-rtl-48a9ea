// vs_accumulator: index-driven accumulation into the partial-sum buffer.
//
// Every valid block result carries 9 partial outputs for output rows
// ty*7-1 .. ty*7+7 of output column xo. The accumulator adds each of them to
// the stored partial sum of that (block, row, column) in one read-modify-write
// cycle, saturating at 16 bits. Outputs whose row or column lies outside the
// w x h image are the padding-boundary terms (OA0, OB6, ... in the paper's
// data-flow chart, and the "x" cycles of its timing table) and are dropped.
// Because rows ty*7-1 and ty*7+7 belong to the neighbouring row tiles, the
// contributions that straddle a tile edge meet here.
//
// The buffer holds one MAX_Y x MAX_W plane per block. The drain port reads
// the 7 words (rd_blk_i, column rd_x_i, row tile rd_ty_i) combinationally,
// 7x16 bits toward post processing, and with rd_en_i clears them on the same
// clock edge, so a fully drained pass leaves the buffer at zero for the next
// one. After reset, and after a clr_i pulse, the buffer is swept to zero one
// column per cycle (MAX_W cycles); ready_o is low meanwhile and results must
// not arrive. The paper keeps this buffer in SRAM; here it is a flop array,
// and its size and the clearing scheme are this design's choice.
module vs_accumulator
  import vscnn_pkg::*;
#(
  parameter int unsigned NB = N_BLK
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr_i,
  output logic                    ready_o,
  input  logic [X_W:0]            w_i,
  input  logic [6:0]              h_i,
  input  blk_res_t [NB-1:0]       res_i,
  input  logic                    rd_en_i,
  input  logic [$clog2(NB)-1:0]   rd_blk_i,
  input  logic [X_W-1:0]          rd_x_i,
  input  logic [TY_W-1:0]         rd_ty_i,
  output data_t [PE_ROWS-1:0]     rd_data_o
);
  data_t          buf_q [NB][MAX_W][MAX_Y];
  logic           sweep_q;
  logic [X_W-1:0] sx_q;

  assign ready_o = !sweep_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sweep_q <= 1'b1;
      sx_q    <= '0;
    end else if (clr_i) begin
      sweep_q <= 1'b1;
      sx_q    <= '0;
    end else if (sweep_q) begin
      sx_q <= sx_q + 1'b1;
      if (int'(sx_q) == MAX_W - 1) sweep_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (sweep_q) begin
      for (int b = 0; b < NB; b++)
        for (int y = 0; y < MAX_Y; y++)
          buf_q[b][sx_q][y] <= '0;
    end else begin
      for (int b = 0; b < NB; b++) begin
        if (res_i[b].vld && res_i[b].xo >= 0 && res_i[b].xo < $signed({1'b0, w_i})) begin
          for (int j = 0; j < N_OUT; j++) begin
            int y;
            y = int'(res_i[b].ty) * PE_ROWS - 1 + j;
            if (y >= 0 && y < int'(h_i) && y < MAX_Y)
              buf_q[b][res_i[b].xo[X_W-1:0]][y] <=
                sat(48'(buf_q[b][res_i[b].xo[X_W-1:0]][y]) + 48'(res_i[b].ps[j]));
          end
        end
      end
      if (rd_en_i)
        for (int i = 0; i < PE_ROWS; i++)
          buf_q[rd_blk_i][rd_x_i][int'(rd_ty_i) * PE_ROWS + i] <= '0;
    end
  end

  always_comb begin
    for (int i = 0; i < PE_ROWS; i++)
      rd_data_o[i] = buf_q[rd_blk_i][rd_x_i][int'(rd_ty_i) * PE_ROWS + i];
  end
endmodule

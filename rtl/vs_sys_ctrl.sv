// vs_sys_ctrl: system controller, sequencing one convolution layer.
//
// Filters are processed in passes of N_BLK, filter k_base+b on block b. A pass:
//   CLEAR   on the first pass, pulse the partial-sum buffer clear; every
//           pass waits here until the buffer reports ready (the drain of
//           the previous pass has already emptied it)
//   LSTART  start the block schedulers (one cycle)
//   COMPUTE wait until every scheduler has finished its stream
//   FLUSH   FLUSH_CYC cycles for the op register, the PE-array register and
//           the accumulator write to empty
//   DRAIN   one 7-element vector per cycle, block by block, column by
//           column, row tile by row tile, read from the accumulator into post
//           processing; blocks with no filter are skipped
//   PFLUSH  two cycles for post processing and the output write
// then the next pass, or DONE (fin_o pulses to close the output list, done_o
// stays high until the next start). Output vectors leave in (filter, column,
// row tile) order, the order the input buffer expects.
//
// out_clr_o empties the output buffer on start. comp_cyc_o counts cycles spent
// in COMPUTE over the layer. The paper names this controller only; its states
// and orders are this design's choice.
module vs_sys_ctrl
  import vscnn_pkg::*;
#(
  parameter int unsigned FLUSH_CYC = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  cfg_t                    cfg_i,
  input  logic [N_BLK-1:0]        lane_done_i,
  input  logic                    acc_ready_i,
  output logic                    lane_start_o,
  output logic [N_BLK-1:0]        lane_en_o,
  output logic [CH_W:0]           k_base_o,
  output logic                    acc_clr_o,
  output logic [$clog2(N_BLK)-1:0] rd_blk_o,
  output logic [X_W-1:0]          rd_x_o,
  output logic [TY_W-1:0]         rd_ty_o,
  output logic                    acc_rd_en_o,
  output logic                    pp_vld_o,
  output logic [CH_W-1:0]         pp_ch_o,
  output logic                    out_clr_o,
  output logic                    fin_o,
  output logic                    busy_o,
  output logic                    done_o,
  output logic [31:0]             comp_cyc_o
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_LSTART, S_COMPUTE, S_FLUSH, S_DRAIN, S_PFLUSH, S_DONE} state_e;

  state_e                  st_q;
  logic [CH_W:0]           kb_q;
  logic [$clog2(N_BLK)-1:0] b_q;
  logic [X_W-1:0]          x_q;
  logic [TY_W-1:0]         ty_q;
  logic [2:0]              cnt_q;
  logic [3:0]              nt;     // row tiles = ceil(h / 7)

  always_comb begin
    nt = 4'((int'(cfg_i.h) + PE_ROWS - 1) / PE_ROWS);
    for (int b = 0; b < N_BLK; b++)
      lane_en_o[b] = ({1'b0, kb_q} + (CH_W+2)'(b)) < {1'b0, cfg_i.k};
  end

  logic blk_on;
  assign blk_on = ({1'b0, kb_q} + (CH_W+2)'(b_q)) < {1'b0, cfg_i.k};

  assign k_base_o     = kb_q;
  assign acc_clr_o    = (st_q == S_IDLE || st_q == S_DONE) && start_i;
  assign lane_start_o = (st_q == S_LSTART);
  assign rd_blk_o     = b_q;
  assign rd_x_o       = x_q;
  assign rd_ty_o      = ty_q;
  assign pp_vld_o     = (st_q == S_DRAIN) && blk_on;
  assign acc_rd_en_o  = pp_vld_o;
  assign pp_ch_o      = CH_W'(kb_q + (CH_W+1)'(b_q));
  assign out_clr_o    = (st_q == S_IDLE || st_q == S_DONE) && start_i;
  assign busy_o       = !(st_q == S_IDLE || st_q == S_DONE);
  assign done_o       = (st_q == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      kb_q       <= '0;
      b_q        <= '0;
      x_q        <= '0;
      ty_q       <= '0;
      cnt_q      <= '0;
      fin_o      <= 1'b0;
      comp_cyc_o <= '0;
    end else begin
      fin_o <= 1'b0;
      unique case (st_q)
        S_IDLE, S_DONE: if (start_i) begin
          st_q       <= S_CLEAR;
          kb_q       <= '0;
          comp_cyc_o <= '0;
        end
        S_CLEAR:  if (acc_ready_i) st_q <= S_LSTART;
        S_LSTART: st_q <= S_COMPUTE;
        S_COMPUTE: begin
          comp_cyc_o <= comp_cyc_o + 1;
          if (&lane_done_i) begin
            st_q  <= S_FLUSH;
            cnt_q <= '0;
          end
        end
        S_FLUSH: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 3'(FLUSH_CYC - 1)) begin
            st_q <= S_DRAIN;
            b_q  <= '0;
            x_q  <= '0;
            ty_q <= '0;
          end
        end
        S_DRAIN: begin
          // next (block, column, row tile); a block without filter ends the pass
          if (!blk_on) begin
            st_q  <= S_PFLUSH;
            cnt_q <= '0;
          end else if (4'(ty_q) + 1 < nt) begin
            ty_q <= ty_q + 1'b1;
          end else begin
            ty_q <= '0;
            if ((X_W+1)'(x_q) + 1 < cfg_i.w) begin
              x_q <= x_q + 1'b1;
            end else begin
              x_q <= '0;
              if (int'(b_q) == N_BLK - 1) begin
                st_q  <= S_PFLUSH;
                cnt_q <= '0;
              end else begin
                b_q <= b_q + 1'b1;
              end
            end
          end
        end
        S_PFLUSH: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 3'd1) begin
            if ({1'b0, kb_q} + (CH_W+2)'(N_BLK) < {1'b0, cfg_i.k}) begin
              kb_q <= kb_q + (CH_W+1)'(N_BLK);
              st_q <= S_CLEAR;
            end else begin
              st_q  <= S_DONE;
              fin_o <= 1'b1;
            end
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule

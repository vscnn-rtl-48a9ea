// vs_lane_sched: index scheduler (input and weight address controller) of one
// PE block.
//
// The block computes one filter. Its scheduler walks two sorted lists at once:
// the stored input vectors (all channels, address ip) and the stored weight
// vectors of its filter (address wp, range [wt_lo_i, wt_hi_i)). Whenever the
// two current entries belong to the same channel it issues the pair, so an
// input vector is held while every stored weight vector of its channel is
// applied to it, as in the paper's timing table (A1-A5 with WA, then WB, ...).
// Zero vectors are not stored and thus never issued: that is the whole
// sparsity mechanism. The output index is xo = x - dx + 1 (padding 1), row
// tile ty; the accumulator drops xo outside the image.
//
// Per cycle exactly one action:
//   weight channel < input channel  -> skip weight vector (idle cycle)
//   channels equal                  -> issue pair; advance weight, or on the
//                                      channel's last weight advance input and
//                                      rewind weights to the channel start
//   otherwise (no weights for it)   -> skip input vector (idle cycle)
//   either list used up             -> done
// Idle cycles for unmatched channels are this design's choice.
//
// Timing: start_i (one cycle) loads the pointers; from the next cycle on one
// op per cycle is registered into op_o. done_o is high when the stream has
// ended (also when en_i was low at start). Addresses go to combinational SRAM
// read ports and the entries come back the same cycle.
module vs_lane_sched
  import vscnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  logic             en_i,      // this block has a filter in this pass
  input  logic [IA_W:0]    n_in_i,    // number of stored input vectors
  input  logic [WA_W:0]    wt_lo_i,   // first weight vector of the filter
  input  logic [WA_W:0]    wt_hi_i,   // one past the last
  output logic [IA_W-1:0]  in_addr_o,
  input  in_entry_t        in_ent_i,
  output logic [WA_W-1:0]  wt_addr_o,
  input  wt_entry_t        wt_ent_i,
  output lane_op_t         op_o,
  output logic             done_o
);
  logic [IA_W:0] ip_q, n_in_q;
  logic [WA_W:0] wp_q, wbase_q, wend_q;
  logic          act_q;

  assign in_addr_o = ip_q[IA_W-1:0];
  assign wt_addr_o = wp_q[WA_W-1:0];
  assign done_o    = !act_q;

  logic in_ok, wt_ok, wt_behind, match;
  logic signed [XO_W-1:0] xo_c;
  always_comb begin
    in_ok     = act_q && (ip_q < n_in_q);
    wt_ok     = wp_q < wend_q;
    wt_behind = wt_ok && (wt_ent_i.ch < in_ent_i.ch);
    match     = wt_ok && (wt_ent_i.ch == in_ent_i.ch);
    xo_c      = XO_W'(in_ent_i.x) - XO_W'(wt_ent_i.dx) + XO_W'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ip_q    <= '0;
      n_in_q  <= '0;
      wp_q    <= '0;
      wbase_q <= '0;
      wend_q  <= '0;
      act_q   <= 1'b0;
      op_o    <= '0;
    end else begin
      op_o.vld <= 1'b0;
      if (start_i) begin
        ip_q    <= '0;
        n_in_q  <= n_in_i;
        wp_q    <= wt_lo_i;
        wbase_q <= wt_lo_i;
        wend_q  <= wt_hi_i;
        act_q   <= en_i;
      end else if (act_q) begin
        if (!in_ok || !wt_ok) begin
          act_q <= 1'b0;          // inputs or the filter's weights used up
        end else if (wt_behind) begin
          wp_q    <= wp_q + 1'b1;
          wbase_q <= wp_q + 1'b1;
        end else if (match) begin
          op_o.vld <= 1'b1;
          op_o.xo  <= xo_c;
          op_o.ty  <= in_ent_i.ty;
          op_o.in  <= in_ent_i.d;
          op_o.wt  <= wt_ent_i.d;
          if (!wt_ent_i.last) begin
            wp_q <= wp_q + 1'b1;
          end else if (!in_ent_i.last) begin
            ip_q <= ip_q + 1'b1;
            wp_q <= wbase_q;
          end else begin
            ip_q    <= ip_q + 1'b1;
            wp_q    <= wp_q + 1'b1;
            wbase_q <= wp_q + 1'b1;
          end
        end else begin
          ip_q <= ip_q + 1'b1;
        end
      end
    end
  end
endmodule

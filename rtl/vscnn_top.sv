// vscnn_top: vector-sparse CNN accelerator, 8 PE blocks of 7 x 3.
//
// Data path: the input buffer holds input column vectors (7 activations,
// tagged with channel, column and row tile), the weight buffer holds 3x3
// kernel columns of every filter. Eight block schedulers each walk the input
// list against the weight list of their own filter and issue one matching
// vector pair per cycle; vectors that are all zero are never stored and so
// never cost a cycle. Each PE block multiplies the 7-element input vector by
// the 3-element weight vector in a 7 x 3 grid, sums products along the
// diagonals and hands 9 partial outputs, with their output index, to the
// accumulator, which adds them into the partial-sum buffer. When all input
// channels are done the system controller drains the buffer through post
// processing (scale/shift, ReLU, zero detection) into the output buffer,
// which keeps only nonzero vectors in sparse mode, in the input buffer's
// format. More than 8 filters take several passes.
//
// Host side (the memory controller and off-chip memory are outside): load the
// buffers and the pointer table through the write ports, set the registers,
// pulse start_i, wait for done_o, read out_count_o entries through the output
// read port. comp_cyc_o counts compute cycles, ops_o counts issued vector
// pairs (both per layer).
//
// Latency from a scheduler issue to the buffer update: op register, PE-array
// register, accumulator write (3 edges).
module vscnn_top
  import vscnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // configuration context
  input  logic               cfg_wr_en_i,
  input  logic [2:0]         cfg_wr_addr_i,
  input  logic [15:0]        cfg_wr_data_i,
  // input buffer load
  input  logic               in_wr_en_i,
  input  logic [IA_W-1:0]    in_wr_addr_i,
  input  in_entry_t          in_wr_data_i,
  // weight buffer and pointer table load
  input  logic               wt_wr_en_i,
  input  logic [WA_W-1:0]    wt_wr_addr_i,
  input  wt_entry_t          wt_wr_data_i,
  input  logic               ptr_wr_en_i,
  input  logic [CH_W:0]      ptr_wr_addr_i,
  input  logic [WA_W:0]      ptr_wr_data_i,
  // control and status
  input  logic               start_i,
  output logic               busy_o,
  output logic               done_o,
  output logic [31:0]        comp_cyc_o,
  output logic [31:0]        ops_o,
  // output buffer read
  input  logic [OA_W-1:0]    out_rd_addr_i,
  output in_entry_t          out_rd_data_o,
  output logic [OA_W:0]      out_count_o,
  output logic               out_full_o
);
  cfg_t                        cfg;
  logic                        lane_start, acc_clr, acc_ready, acc_rd_en, pp_vld, out_clr, fin;
  logic [N_BLK-1:0]            lane_en, lane_done;
  logic [CH_W:0]               k_base;
  logic [$clog2(N_BLK)-1:0]    rd_blk;
  logic [X_W-1:0]              rd_x;
  logic [TY_W-1:0]             rd_ty;
  logic [CH_W-1:0]             pp_ch;

  logic [N_BLK-1:0][IA_W-1:0]  in_addr;
  in_entry_t [N_BLK-1:0]       in_ent;
  logic [N_BLK-1:0][WA_W-1:0]  wt_addr;
  wt_entry_t [N_BLK-1:0]       wt_ent;
  logic [N_BLK-1:0][CH_W-1:0]  ptr_k;
  logic [N_BLK-1:0][WA_W:0]    ptr_lo, ptr_hi;
  lane_op_t [N_BLK-1:0]        ops;
  blk_res_t [N_BLK-1:0]        res;
  data_t [PE_ROWS-1:0]         acc_vec;

  logic                        pp_vld_o, pp_nz;
  data_t [PE_ROWS-1:0]         pp_vec;
  logic [CH_W-1:0]             pp_ch_o;
  logic [X_W-1:0]              pp_x_o;
  logic [TY_W-1:0]             pp_ty_o;
  in_entry_t                   out_ent;

  vs_config_ctx u_cfg (
    .clk, .rst_n,
    .wr_en_i  (cfg_wr_en_i),
    .wr_addr_i(cfg_wr_addr_i),
    .wr_data_i(cfg_wr_data_i),
    .cfg_o    (cfg)
  );

  vs_sys_ctrl u_ctrl (
    .clk, .rst_n,
    .start_i     (start_i),
    .cfg_i       (cfg),
    .lane_done_i (lane_done),
    .acc_ready_i (acc_ready),
    .lane_start_o(lane_start),
    .lane_en_o   (lane_en),
    .k_base_o    (k_base),
    .acc_clr_o   (acc_clr),
    .rd_blk_o    (rd_blk),
    .rd_x_o      (rd_x),
    .rd_ty_o     (rd_ty),
    .acc_rd_en_o (acc_rd_en),
    .pp_vld_o    (pp_vld),
    .pp_ch_o     (pp_ch),
    .out_clr_o   (out_clr),
    .fin_o       (fin),
    .busy_o      (busy_o),
    .done_o      (done_o),
    .comp_cyc_o  (comp_cyc_o)
  );

  vs_input_sram u_in_sram (
    .clk,
    .wr_en_i  (in_wr_en_i),
    .wr_addr_i(in_wr_addr_i),
    .wr_data_i(in_wr_data_i),
    .rd_addr_i(in_addr),
    .rd_data_o(in_ent)
  );

  always_comb begin
    for (int b = 0; b < N_BLK; b++) ptr_k[b] = CH_W'(k_base + (CH_W+1)'(b));
  end

  vs_weight_sram u_wt_sram (
    .clk,
    .wr_en_i      (wt_wr_en_i),
    .wr_addr_i    (wt_wr_addr_i),
    .wr_data_i    (wt_wr_data_i),
    .ptr_wr_en_i  (ptr_wr_en_i),
    .ptr_wr_addr_i(ptr_wr_addr_i),
    .ptr_wr_data_i(ptr_wr_data_i),
    .rd_addr_i    (wt_addr),
    .rd_data_o    (wt_ent),
    .ptr_k_i      (ptr_k),
    .ptr_lo_o     (ptr_lo),
    .ptr_hi_o     (ptr_hi)
  );

  for (genvar b = 0; b < N_BLK; b++) begin : g_lane
    vs_lane_sched u_sched (
      .clk, .rst_n,
      .start_i  (lane_start),
      .en_i     (lane_en[b]),
      .n_in_i   (cfg.n_in),
      .wt_lo_i  (ptr_lo[b]),
      .wt_hi_i  (ptr_hi[b]),
      .in_addr_o(in_addr[b]),
      .in_ent_i (in_ent[b]),
      .wt_addr_o(wt_addr[b]),
      .wt_ent_i (wt_ent[b]),
      .op_o     (ops[b]),
      .done_o   (lane_done[b])
    );
  end

  vs_pe_array u_array (
    .clk, .rst_n,
    .op_i (ops),
    .res_o(res)
  );

  vs_accumulator u_acc (
    .clk, .rst_n,
    .clr_i    (acc_clr),
    .ready_o  (acc_ready),
    .w_i      (cfg.w),
    .h_i      (cfg.h),
    .res_i    (res),
    .rd_en_i  (acc_rd_en),
    .rd_blk_i (rd_blk),
    .rd_x_i   (rd_x),
    .rd_ty_i  (rd_ty),
    .rd_data_o(acc_vec)
  );

  vs_post_proc u_pp (
    .clk, .rst_n,
    .vld_i    (pp_vld),
    .vec_i    (acc_vec),
    .ch_i     (pp_ch),
    .x_i      (rd_x),
    .ty_i     (rd_ty),
    .scale_i  (cfg.scale),
    .shift_i  (cfg.shift),
    .relu_en_i(cfg.relu_en),
    .vld_o    (pp_vld_o),
    .vec_o    (pp_vec),
    .nz_o     (pp_nz),
    .ch_o     (pp_ch_o),
    .x_o      (pp_x_o),
    .ty_o     (pp_ty_o)
  );

  always_comb begin
    out_ent      = '0;
    out_ent.ch   = pp_ch_o;
    out_ent.x    = pp_x_o;
    out_ent.ty   = pp_ty_o;
    out_ent.d    = pp_vec;
  end

  vs_output_sram u_out_sram (
    .clk, .rst_n,
    .clr_i      (out_clr),
    .fin_i      (fin),
    .wr_en_i    (pp_vld_o),
    .wr_nz_i    (pp_nz),
    .keep_zero_i(!cfg.sparse),
    .wr_data_i  (out_ent),
    .rd_addr_i  (out_rd_addr_i),
    .rd_data_o  (out_rd_data_o),
    .count_o    (out_count_o),
    .full_o     (out_full_o)
  );

  // issued vector pairs per layer
  logic [3:0] n_issued;
  always_comb begin
    n_issued = '0;
    for (int b = 0; b < N_BLK; b++) n_issued += 4'(ops[b].vld);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 ops_o <= '0;
    else if (start_i && !busy_o) ops_o <= '0;
    else                        ops_o <= ops_o + 32'(n_issued);
  end
endmodule

// tb_vs_sys_ctrl: runs the controller for a 3-column, 9-row layer (2 row
// tiles) with 10 filters (two passes, the second with 2 blocks), with block
// schedulers modelled here as finishing 5 + 3*b cycles after their start.
// The accumulator model reports ready 4 cycles after a clear.
// Checks: one buffer clear per layer, one scheduler start per pass, the enables, drain
// order (block, column, row tile) and channel of every drained vector, the
// drain length, the compute-cycle count, the fin pulse and done.
module tb_vs_sys_ctrl;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                start, lstart, aclr, ppv, oclr, fin, busy, done, ardy, arden;
  int                  rdy_cnt;
  cfg_t                cfg;
  logic [7:0]          ldone, len;
  logic [CH_W:0]       kb;
  logic [2:0]          rb;
  logic [X_W-1:0]      rx;
  logic [TY_W-1:0]     rty;
  logic [CH_W-1:0]     pch;
  logic [31:0]         ccyc;
  int                  cnt [8];
  int                  n_clr, n_start, n_fin, n_drain, n_oclr;
  int                  exp_b, exp_x, exp_ty, exp_k, pass;

  vs_sys_ctrl u_dut (
    .clk, .rst_n, .start_i(start), .cfg_i(cfg), .lane_done_i(ldone), .acc_ready_i(ardy), .lane_start_o(lstart),
    .lane_en_o(len), .k_base_o(kb), .acc_clr_o(aclr), .rd_blk_o(rb), .rd_x_o(rx), .rd_ty_o(rty),
    .acc_rd_en_o(arden), .pp_vld_o(ppv), .pp_ch_o(pch), .out_clr_o(oclr), .fin_o(fin), .busy_o(busy), .done_o(done),
    .comp_cyc_o(ccyc));

  // scheduler model: block b finishes 5 + 3*b cycles after start (if enabled)
  always_ff @(posedge clk) begin
    for (int b = 0; b < 8; b++) begin
      if (lstart) cnt[b] <= len[b] ? 5 + 3 * b : 0;
      else if (cnt[b] > 0) cnt[b] <= cnt[b] - 1;
    end
  end
  always_comb for (int b = 0; b < 8; b++) ldone[b] = (cnt[b] == 0);
  always_ff @(posedge clk) rdy_cnt <= aclr ? 4 : (rdy_cnt > 0 ? rdy_cnt - 1 : 0);
  assign ardy = (rdy_cnt == 0);

  always @(posedge clk) if (rst_n) begin
    if (aclr) n_clr++;
    if (oclr) n_oclr++;
    if (fin) n_fin++;
    if (lstart) begin
      n_start++;
      checks++;
      if (len != ((pass == 0) ? 8'hff : 8'h03)) begin failures++; $display("FAIL enables %b pass %0d", len, pass); end
      exp_b = 0; exp_x = 0; exp_ty = 0;
    end
    if (lstart) begin
      checks++;
      if (!ardy) begin failures++; $display("FAIL started before the buffer was ready"); end
    end
    if (ppv) begin
      n_drain++;
      checks++;
      if (!arden) begin failures++; $display("FAIL drain read without clear"); end
      checks++;
      if (int'(rb) != exp_b || int'(rx) != exp_x || int'(rty) != exp_ty || int'(pch) != pass * 8 + exp_b) begin
        failures++;
        $display("FAIL drain order b%0d x%0d ty%0d ch%0d, exp b%0d x%0d ty%0d", rb, rx, rty, pch, exp_b, exp_x, exp_ty);
      end
      if (exp_ty == 1) begin
        exp_ty = 0;
        if (exp_x == 2) begin exp_x = 0; exp_b++; end else exp_x++;
      end else exp_ty++;
      if (exp_b == ((pass == 0) ? 8 : 2)) pass++;
    end
  end

  initial begin
    rdy_cnt = 0;
    cfg = '0; cfg.w = 3; cfg.h = 9; cfg.k = 10; start = 0;
    n_clr = 0; n_start = 0; n_fin = 0; n_drain = 0; n_oclr = 0; pass = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL not busy"); end
    while (!done) @(negedge clk);
    @(negedge clk);
    checks += 6;
    if (n_clr != 1)       begin failures++; $display("FAIL clears %0d", n_clr); end
    if (n_start != 2)     begin failures++; $display("FAIL starts %0d", n_start); end
    if (n_drain != 60)    begin failures++; $display("FAIL drained %0d, expected 60", n_drain); end
    if (n_fin != 1)       begin failures++; $display("FAIL fin %0d", n_fin); end
    if (n_oclr != 1)      begin failures++; $display("FAIL output clears %0d", n_oclr); end
    // compute: pass 1 waits for block 7 (5+21 cycles), pass 2 for block 1 (8)
    if (ccyc != 32'd27 + 32'd9) begin failures++; $display("FAIL compute cycles %0d", ccyc); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_vscnn_full: end-to-end test at the default buffer sizes: one 56x56 layer
// with 16 input channels and 16 filters, sparse then dense. Same checks as
// tb_vscnn_top, which it copies; the small cases there are skipped here.
//
// The test plays host and off-chip memory: it generates a layer (input
// activations with whole 7-element column vectors zeroed at random, 3x3
// kernels with whole kernel columns zeroed at random), stores it in the
// accelerator's buffers in the vector format (sparse: nonzero vectors only;
// dense: every vector), runs the layer and compares the output buffer with a
// convolution computed here (3x3, stride 1, padding 1, Q8.8, each vector
// pair's partial sums rounded by >>> 8 as the 16-bit array bus requires, then
// scale/shift/ReLU and zero-vector dropping).
//
// Runs: the 5x5 example with input column B and kernel column WC zero, dense
// (15 vector pairs issued in 15 cycles) and sparse (8 pairs in 8 cycles);
// then a multi-channel layer with two row tiles and two filter passes, sparse
// with ReLU and dense. Each mechanism must occur at least once: skipped zero
// input vectors, skipped zero weight vectors, padding outputs dropped, partial
// sums crossing a row-tile edge, more than one filter pass, scheduler idle
// cycles for unmatched channels, zero output vectors dropped, ReLU clamping,
// dense and sparse mode.
module tb_vscnn_full;
  import vscnn_pkg::*;
  localparam bit FULL = 1'b1;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---- DUT ----
  logic               cfg_we, in_we, wt_we, ptr_we, start, busy, done, ofull;
  logic [2:0]         cfg_wa;
  logic [15:0]        cfg_wd;
  logic [IA_W-1:0]    in_wa;
  in_entry_t          in_wd, out_rd;
  logic [WA_W-1:0]    wt_wa;
  wt_entry_t          wt_wd;
  logic [CH_W:0]      ptr_wa;
  logic [WA_W:0]      ptr_wd;
  logic [31:0]        ccyc, nops;
  logic [OA_W-1:0]    out_ra;
  logic [OA_W:0]      out_cnt;

  vscnn_top u_dut (
    .clk, .rst_n,
    .cfg_wr_en_i(cfg_we), .cfg_wr_addr_i(cfg_wa), .cfg_wr_data_i(cfg_wd),
    .in_wr_en_i(in_we), .in_wr_addr_i(in_wa), .in_wr_data_i(in_wd),
    .wt_wr_en_i(wt_we), .wt_wr_addr_i(wt_wa), .wt_wr_data_i(wt_wd),
    .ptr_wr_en_i(ptr_we), .ptr_wr_addr_i(ptr_wa), .ptr_wr_data_i(ptr_wd),
    .start_i(start), .busy_o(busy), .done_o(done), .comp_cyc_o(ccyc), .ops_o(nops),
    .out_rd_addr_i(out_ra), .out_rd_data_o(out_rd), .out_count_o(out_cnt), .out_full_o(ofull));

  // ---- layer held by the test ----
  localparam int MC = 16, MK = 16;
  int act [MC][MAX_H + PE_ROWS][MAX_W];   // act[c][y][x]
  int wgt [MK][MC][3][3];                 // wgt[k][c][dy][dx]
  int LW, LH, LC, LK, NT;

  // ---- mechanism counters ----
  int m_zin, m_zwt, m_pad, m_halo, m_pass, m_idle, m_zout, m_relu, m_dense, m_sparse;
  int first_op, last_op;
  int cyc = 0;

  always_ff @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < N_BLK; b++) begin
      if (u_dut.res[b].vld && ($signed(u_dut.res[b].xo) < 0 || int'($signed(u_dut.res[b].xo)) >= LW)) m_pad++;
      if (u_dut.res[b].vld && u_dut.res[b].ty != 0) m_halo++;
    end
    if (u_dut.ops[0].vld) begin
      if (first_op < 0) first_op = cyc;
      last_op = cyc;
    end
    if (u_dut.lane_start && u_dut.k_base != 0) m_pass++;
    if (u_dut.u_ctrl.st_q == 3'd3 && !u_dut.lane_done[0] && !u_dut.ops[0].vld && u_dut.u_ctrl.comp_cyc_o > 0) m_idle++;
  end

  function automatic bit in_zero(int c, int x, int ty);
    for (int r = 0; r < PE_ROWS; r++) if (act[c][ty*PE_ROWS + r][x] != 0) return 0;
    return 1;
  endfunction

  function automatic bit wt_zero(int k, int c, int dx);
    for (int dy = 0; dy < 3; dy++) if (wgt[k][c][dy][dx] != 0) return 0;
    return 1;
  endfunction

  task automatic gen_layer(int w, int h, int nc, int nk, int pz_in, int pz_wt);
    LW = w; LH = h; LC = nc; LK = nk; NT = (h + PE_ROWS - 1) / PE_ROWS;
    foreach (act[c, y, x]) act[c][y][x] = 0;
    foreach (wgt[k, c, dy, dx]) wgt[k][c][dy][dx] = 0;
    for (int c = 0; c < nc; c++)
      for (int x = 0; x < w; x++)
        for (int ty = 0; ty < NT; ty++)
          if ($urandom_range(0, 99) >= pz_in)
            for (int r = 0; r < PE_ROWS; r++)
              if (ty*PE_ROWS + r < h) act[c][ty*PE_ROWS + r][x] = $urandom_range(0, 254) - 127;
    for (int k = 0; k < nk; k++)
      for (int c = 0; c < nc; c++)
        for (int dx = 0; dx < 3; dx++)
          if ($urandom_range(0, 99) >= pz_wt)
            for (int dy = 0; dy < 3; dy++) wgt[k][c][dy][dx] = $urandom_range(0, 254) - 127;
  endtask

  task automatic cfg_write(cfg_reg_e a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_wa = a; cfg_wd = 16'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // store the layer; returns the number of vector pairs the schedulers must issue
  task automatic load(bit sparse, bit relu, int scale, int shift, output int exp_ops);
    int n, last_idx, nw;
    int n_in_ch [MC];
    int n_wt    [MC];
    n = 0;
    exp_ops = 0;
    for (int c = 0; c < LC; c++) begin
      last_idx = -1;
      n_in_ch[c] = 0;
      for (int x = 0; x < LW; x++)
        for (int ty = 0; ty < NT; ty++) begin
          if (sparse && in_zero(c, x, ty)) begin m_zin++; continue; end
          @(negedge clk);
          in_we = 1; in_wa = IA_W'(n);
          in_wd = '0; in_wd.ch = CH_W'(c); in_wd.x = X_W'(x); in_wd.ty = TY_W'(ty);
          for (int r = 0; r < PE_ROWS; r++) in_wd.d[r] = data_t'(act[c][ty*PE_ROWS + r][x]);
          // last flag: set when no later stored vector of this channel
          in_wd.last = 1'b1;
          for (int x2 = x; x2 < LW; x2++)
            for (int t2 = (x2 == x) ? ty + 1 : 0; t2 < NT; t2++)
              if (!(sparse && in_zero(c, x2, t2))) in_wd.last = 1'b0;
          n++;
          n_in_ch[c]++;
        end
    end
    @(negedge clk);
    in_we = 0;
    nw = 0;
    for (int k = 0; k < LK; k++) begin
      @(negedge clk);
      ptr_we = 1; ptr_wa = (CH_W+1)'(k); ptr_wd = (WA_W+1)'(nw);
      @(negedge clk);
      ptr_we = 0;
      for (int c = 0; c < LC; c++) begin
        int cnt, seen;
        cnt = 0;
        for (int dx = 0; dx < 3; dx++) if (!(sparse && wt_zero(k, c, dx))) cnt++; else m_zwt++;
        seen = 0;
        for (int dx = 0; dx < 3; dx++) begin
          if (sparse && wt_zero(k, c, dx)) continue;
          @(negedge clk);
          wt_we = 1; wt_wa = WA_W'(nw);
          wt_wd = '0; wt_wd.ch = CH_W'(c); wt_wd.dx = 2'(dx);
          for (int dy = 0; dy < 3; dy++) wt_wd.d[dy] = data_t'(wgt[k][c][dy][dx]);
          seen++;
          wt_wd.last = (seen == cnt);
          nw++;
        end
        @(negedge clk);
        wt_we = 0;
        exp_ops += cnt * n_in_ch[c];
      end
    end
    @(negedge clk);
    ptr_we = 1; ptr_wa = (CH_W+1)'(LK); ptr_wd = (WA_W+1)'(nw);
    @(negedge clk);
    ptr_we = 0;
    cfg_write(REG_W, LW);
    cfg_write(REG_H, LH);
    cfg_write(REG_K, LK);
    cfg_write(REG_NIN, n);
    cfg_write(REG_SCALE, scale);
    cfg_write(REG_SHIFT, shift);
    cfg_write(REG_FLAGS, 2 * int'(sparse) + int'(relu));
  endtask

  // reference output of filter k, row y, column x (before post processing)
  function automatic int ref_acc(int k, int y, int x);
    int acc = 0;
    for (int c = 0; c < LC; c++)
      for (int dx = 0; dx < 3; dx++) begin
        int xi;
        xi = x + dx - 1;
        if (xi < 0 || xi >= LW) continue;
        for (int ty = 0; ty < NT; ty++) begin
          int s = 0;
          bit hit = 0;
          for (int dy = 0; dy < 3; dy++) begin
            int yi;
            yi = y + dy - 1;
            if (yi >= ty*PE_ROWS && yi < ty*PE_ROWS + PE_ROWS && yi >= 0 && yi < LH) begin
              s += act[c][yi][xi] * wgt[k][c][dy][dx];
              hit = 1;
            end
          end
          if (hit) acc += s >>> 8;
        end
      end
    return acc;
  endfunction

  task automatic run_check(string name, bit sparse, bit relu, int scale, int shift,
                           int exp_span);
    int exp_ops, nexp, t0;
    in_entry_t e;
    in_entry_t exp_q [$];
    load(sparse, relu, scale, shift, exp_ops);
    first_op = -1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    if (sparse) m_sparse++; else m_dense++;
    // expected output list
    for (int k = 0; k < LK; k++)
      for (int x = 0; x < LW; x++)
        for (int ty = 0; ty < NT; ty++) begin
          bit nz = 0;
          e = '0; e.ch = CH_W'(k); e.x = X_W'(x); e.ty = TY_W'(ty);
          for (int r = 0; r < PE_ROWS; r++) begin
            int y;
            longint v;
            y = ty*PE_ROWS + r;
            v = 0;
            if (y < LH) begin
              int a;
              a = ref_acc(k, y, x);
              if (a > 32767 || a < -32768) $display("note: reference saturates");
              v = (longint'(a) * scale) >>> shift;
              if (v > 32767) v = 32767;
              if (v < -32768) v = -32768;
              if (relu && v < 0) begin v = 0; m_relu++; end
            end
            e.d[r] = data_t'(v);
            if (v != 0) nz = 1;
          end
          if (nz || !sparse) exp_q.push_back(e); else m_zout++;
        end
    for (int i = 0; i < exp_q.size(); i++)
      exp_q[i].last = (i == exp_q.size() - 1) || (exp_q[i+1].ch != exp_q[i].ch);
    checks++;
    if (int'(nops) != exp_ops) begin failures++; $display("FAIL %s: %0d vector pairs issued, expected %0d", name, nops, exp_ops); end
    checks++;
    if (int'(out_cnt) != exp_q.size()) begin failures++; $display("FAIL %s: %0d output vectors, expected %0d", name, out_cnt, exp_q.size()); end
    nexp = (exp_q.size() < int'(out_cnt)) ? exp_q.size() : int'(out_cnt);
    for (int i = 0; i < nexp; i++) begin
      out_ra = OA_W'(i);
      #1;
      checks++;
      if (out_rd != exp_q[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s: output %0d (ch %0d x %0d ty %0d) differs from ch %0d x %0d ty %0d",
                                    name, i, out_rd.ch, out_rd.x, out_rd.ty, exp_q[i].ch, exp_q[i].x, exp_q[i].ty);
      end
    end
    if (exp_span > 0) begin
      checks++;
      if (last_op - first_op + 1 != exp_span) begin
        failures++;
        $display("FAIL %s: block 0 issued over %0d cycles, expected %0d", name, last_op - first_op + 1, exp_span);
      end
    end
    $display("%s: %0d vector pairs, %0d compute cycles, %0d output vectors, %0d total cycles",
             name, nops, ccyc, out_cnt, cyc - t0);
  endtask

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  initial begin
    cfg_we = 0; in_we = 0; wt_we = 0; ptr_we = 0; start = 0; out_ra = '0;
    cfg_wa = '0; cfg_wd = '0; in_wa = '0; in_wd = '0; wt_wa = '0; wt_wd = '0; ptr_wa = '0; ptr_wd = '0;
    m_zin = 0; m_zwt = 0; m_pad = 0; m_halo = 0; m_pass = 0; m_idle = 0; m_zout = 0; m_relu = 0;
    m_dense = 0; m_sparse = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    if (!FULL) begin
      // 5x5 example: column B of the input and column C of the kernel are zero
      gen_layer(5, 5, 1, 1, 0, 0);
      for (int y = 0; y < 5; y++) act[0][y][1] = 0;
      for (int dy = 0; dy < 3; dy++) wgt[0][0][dy][2] = 0;
      run_check("example dense", 1'b0, 1'b0, 256, 8, 15);
      run_check("example sparse", 1'b1, 1'b0, 256, 8, 8);
      // multi-channel layer: 2 row tiles, 11 filters (2 passes), channel 2 empty
      gen_layer(9, 12, 5, 11, 35, 35);
      for (int y = 0; y < 12; y++) for (int x = 0; x < 9; x++) act[2][y][x] = 0;
      for (int c = 0; c < 5; c++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) wgt[10][c][dy][dx] = 0;
      run_check("layer sparse relu", 1'b1, 1'b1, 200, 8, 0);
      run_check("layer dense", 1'b0, 1'b0, 300, 9, 0);
    end else begin
      // default-size layer: 56x56, 16 channels, 16 filters
      gen_layer(56, 56, 16, 16, 45, 40);
      run_check("56x56x16 sparse relu", 1'b1, 1'b1, 256, 8, 0);
      run_check("56x56x16 dense", 1'b0, 1'b1, 256, 8, 0);
    end

    mech("zero input vector skipped", m_zin);
    mech("zero weight vector skipped", m_zwt);
    mech("padding output dropped", m_pad);
    mech("row tile crossing", m_halo);
    mech("second filter pass", m_pass);
    mech("scheduler idle cycle", m_idle);
    mech("zero output vector dropped", m_zout);
    mech("relu clamp", m_relu);
    mech("dense mode", m_dense);
    mech("sparse mode", m_sparse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (FULL ? 3000000 : 400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

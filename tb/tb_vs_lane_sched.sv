// tb_vs_lane_sched: checks the block scheduler against the paper's 5x5
// example and against random multi-channel lists.
//   dense : 5 input columns A..E, kernel columns WA, WB, WC -> 15 ops in 15
//           consecutive cycles, output columns B,A,x, C,B,A, D,C,B, ...
//   sparse: column B and kernel column WC all zero, not stored -> 8 ops in 8
//           cycles, output columns B,A, D,C, E,D, x,E (x = column 5, outside)
//   random: the expected op list is the nested loop "for each stored input
//           vector, for each stored weight vector of the same channel".
// The test keeps the buffers as arrays and answers the read addresses.
module tb_vs_lane_sched;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start, en;
  logic [IA_W:0]   n_in;
  logic [WA_W:0]   wlo, whi;
  logic [IA_W-1:0] ia;
  logic [WA_W-1:0] wa;
  in_entry_t       ie;
  wt_entry_t       we;
  lane_op_t        op;
  logic            done;

  in_entry_t imem [1024];
  wt_entry_t wmem [1024];
  lane_op_t  exp_q [$];
  int        n_ops, first_cyc, last_cyc, cyc;

  assign ie = imem[ia[9:0]];
  assign we = wmem[wa[9:0]];

  vs_lane_sched u_dut (
    .clk, .rst_n, .start_i(start), .en_i(en), .n_in_i(n_in), .wt_lo_i(wlo), .wt_hi_i(whi),
    .in_addr_o(ia), .in_ent_i(ie), .wt_addr_o(wa), .wt_ent_i(we), .op_o(op), .done_o(done));

  always_ff @(posedge clk) cyc <= cyc + 1;

  // compare every issued op with the head of the expected list
  always @(posedge clk) begin
    if (rst_n && op.vld) begin
      lane_op_t e;
      if (n_ops == 0) first_cyc = cyc;
      last_cyc = cyc;
      n_ops++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected op xo=%0d", op.xo);
      end else begin
        e = exp_q.pop_front();
        if (op.xo != e.xo || op.ty != e.ty || op.in != e.in || op.wt != e.wt) begin
          failures++;
          $display("FAIL op %0d: xo %0d exp %0d", n_ops, op.xo, e.xo);
        end
      end
    end
  end

  function automatic data_t rnd();
    return data_t'($urandom_range(1, 2000));
  endfunction

  // build the expected list from the stored lists
  task automatic build_expected(int ni, int lo, int hi);
    exp_q.delete();
    for (int i = 0; i < ni; i++)
      for (int w = lo; w < hi; w++)
        if (wmem[w].ch == imem[i].ch) begin
          lane_op_t e;
          e.vld = 1'b1;
          e.xo  = XO_W'(int'(imem[i].x) - int'(wmem[w].dx) + 1);
          e.ty  = imem[i].ty;
          e.in  = imem[i].d;
          e.wt  = wmem[w].d;
          exp_q.push_back(e);
        end
  endtask

  task automatic run(int ni, int lo, int hi, bit enable, int exp_ops, int exp_span, string name);
    n_ops = 0;
    build_expected(ni, lo, hi);
    @(negedge clk);
    start = 1; en = enable; n_in = (IA_W+1)'(ni); wlo = (WA_W+1)'(lo); whi = (WA_W+1)'(hi);
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (n_ops != exp_ops) begin failures++; $display("FAIL %s: %0d ops, expected %0d", name, n_ops, exp_ops); end
    if (exp_span > 0) begin
      checks++;
      if (last_cyc - first_cyc + 1 != exp_span) begin
        failures++;
        $display("FAIL %s: ops spread over %0d cycles, expected %0d", name, last_cyc - first_cyc + 1, exp_span);
      end
    end
    if (enable) begin
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL %s: %0d ops missing", name, exp_q.size()); end
    end
    $display("%s: %0d ops", name, n_ops);
  endtask

  initial begin
    int ni, nw, ch;
    cyc = 0; start = 0; en = 0; n_in = '0; wlo = '0; whi = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- dense 5x5 example: columns A..E, kernel columns WA..WC ----
    for (int x = 0; x < 5; x++) begin
      imem[x] = '0; imem[x].x = X_W'(x); imem[x].last = (x == 4);
      for (int r = 0; r < 7; r++) imem[x].d[r] = (r < 5) ? rnd() : '0;
    end
    for (int dx = 0; dx < 3; dx++) begin
      wmem[dx] = '0; wmem[dx].dx = 2'(dx); wmem[dx].last = (dx == 2);
      for (int c = 0; c < 3; c++) wmem[dx].d[c] = rnd();
    end
    run(5, 0, 3, 1'b1, 15, 15, "dense example");

    // ---- sparse example: column B and kernel column WC not stored ----
    imem[1] = imem[2]; imem[2] = imem[3]; imem[3] = imem[4];
    wmem[1].last = 1'b1;
    run(4, 0, 2, 1'b1, 8, 8, "sparse example");

    // ---- disabled lane ----
    run(4, 0, 2, 1'b0, 0, 0, "disabled");

    // ---- random channel lists with missing channels on both sides ----
    for (int t = 0; t < 20; t++) begin
      ni = 0; nw = 0;
      for (ch = 0; ch < 12; ch++) begin
        int cnt;
        cnt = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, 6);
        for (int i = 0; i < cnt; i++) begin
          imem[ni] = '0; imem[ni].ch = CH_W'(ch); imem[ni].x = X_W'($urandom_range(0, 55));
          imem[ni].ty = TY_W'($urandom); imem[ni].last = (i == cnt - 1);
          for (int r = 0; r < 7; r++) imem[ni].d[r] = rnd();
          ni++;
        end
      end
      wmem[0] = '0;
      for (ch = 0; ch < 12; ch++) begin
        int cnt, dx0;
        cnt = $urandom_range(0, 3);
        dx0 = 3 - cnt;
        for (int i = 0; i < cnt; i++) begin
          wmem[100 + nw] = '0; wmem[100 + nw].ch = CH_W'(ch); wmem[100 + nw].dx = 2'(dx0 + i);
          wmem[100 + nw].last = (i == cnt - 1);
          for (int c = 0; c < 3; c++) wmem[100 + nw].d[c] = rnd();
          nw++;
        end
      end
      build_expected(ni, 100, 100 + nw);
      run(ni, 100, 100 + nw, 1'b1, exp_q.size(), 0, "random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

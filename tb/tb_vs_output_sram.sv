// tb_vs_output_sram: writes tagged vectors, some all-zero, in channel order
// with zero dropping on (sparse) and off (dense). Checks the count, the
// stored contents and order, and the last-of-channel flags, all worked out
// here from the written sequence.
module tb_vs_output_sram;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            clr, fin, we, wnz, keep;
  in_entry_t       wd, rd;
  logic [OA_W-1:0] ra;
  logic [OA_W:0]   cnt;
  logic            full;
  in_entry_t       exp_q [$];

  vs_output_sram u_dut (
    .clk, .rst_n, .clr_i(clr), .fin_i(fin), .wr_en_i(we), .wr_nz_i(wnz), .keep_zero_i(keep),
    .wr_data_i(wd), .rd_addr_i(ra), .rd_data_o(rd), .count_o(cnt), .full_o(full));

  task automatic run(bit keep_zero, string name);
    int n_zero_dropped;
    n_zero_dropped = 0;
    exp_q.delete();
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0; keep = keep_zero;
    for (int ch = 0; ch < 6; ch++)
      for (int x = 0; x < 5; x++) begin
        bit z;
        z = ($urandom_range(0, 2) == 0) || ch == 3;   // channel 3 entirely zero
        @(negedge clk);
        we = 1;
        wd = '0; wd.ch = CH_W'(ch); wd.x = X_W'(x); wd.ty = TY_W'(x % 2);
        for (int i = 0; i < 7; i++) wd.d[i] = z ? '0 : data_t'($urandom_range(1, 99));
        wnz = !z;
        if (!z || keep_zero) exp_q.push_back(wd);
        else n_zero_dropped++;
      end
    @(negedge clk);
    we = 0;
    fin = 1;
    @(negedge clk);
    fin = 0;
    // last flags expected: entry i is last if entry i+1 has another channel or i is final
    for (int i = 0; i < exp_q.size(); i++)
      exp_q[i].last = (i == exp_q.size() - 1) || (exp_q[i+1].ch != exp_q[i].ch);
    checks++;
    if (int'(cnt) != exp_q.size()) begin failures++; $display("FAIL %s count %0d exp %0d", name, cnt, exp_q.size()); end
    for (int i = 0; i < exp_q.size(); i++) begin
      ra = OA_W'(i);
      #1;
      checks++;
      if (rd != exp_q[i]) begin failures++; $display("FAIL %s entry %0d last=%0d exp %0d", name, i, rd.last, exp_q[i].last); end
    end
    if (!keep_zero) begin
      checks++;
      if (n_zero_dropped == 0) begin failures++; $display("FAIL nothing dropped"); end
    end
  endtask

  initial begin
    clr = 0; fin = 0; we = 0; wnz = 0; keep = 0; wd = '0; ra = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1'b0, "sparse");
    run(1'b1, "dense");
    run(1'b0, "sparse again");
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

// tb_vs_pe_array: drives eight blocks with independent random ops and checks,
// one cycle later, each block's 9 partial outputs (reference computed here as
// the diagonal sums of in[r]*wt[c], r - c + 2 == j, >>> 8, saturated), its
// index and its valid bit; also checks that reset clears the valid bits.
module tb_vs_pe_array;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lane_op_t [7:0] op;
  blk_res_t [7:0] res;
  lane_op_t [7:0] prev;

  vs_pe_array u_dut (.clk, .rst_n, .op_i(op), .res_o(res));

  function automatic data_t ref_ps(lane_op_t o, int j);
    longint s = 0;
    for (int r = 0; r < 7; r++)
      for (int c = 0; c < 3; c++)
        if (r - c + 2 == j) s += longint'(o.in[r]) * longint'(o.wt[c]);
    s = s >>> 8;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return data_t'(s);
  endfunction

  initial begin
    op = '0;
    for (int b = 0; b < 8; b++) op[b].vld = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (res != '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        op[b].vld = 1'($urandom);
        op[b].xo  = XO_W'($urandom);
        op[b].ty  = TY_W'($urandom);
        for (int r = 0; r < 7; r++) op[b].in[r] = data_t'($signed(16'($urandom)) >>> 4);
        for (int c = 0; c < 3; c++) op[b].wt[c] = data_t'($signed(16'($urandom)) >>> 4);
      end
      prev = op;
      @(posedge clk);
      #1;
      for (int b = 0; b < 8; b++) begin
        checks++;
        if (res[b].vld != prev[b].vld || res[b].xo != prev[b].xo || res[b].ty != prev[b].ty) begin
          failures++;
          $display("FAIL tag blk %0d", b);
        end
        for (int j = 0; j < 9; j++) begin
          checks++;
          if (res[b].ps[j] != ref_ps(prev[b], j)) begin
            failures++;
            $display("FAIL blk %0d j %0d got %0d exp %0d", b, j, res[b].ps[j], ref_ps(prev[b], j));
          end
        end
      end
    end
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

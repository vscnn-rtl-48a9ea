// tb_vs_pe_block: checks the 7x3 PE block. The expected partial output j is
// worked out here as the sum of in[r]*wt[c] over all PEs with r - c + 2 == j
// (the output row that product belongs to for a 3x3 kernel with padding 1),
// shifted right by 8 and saturated. Includes the data-flow chart example
// (all-ones vectors give 1,2,3,3,3,3,3,2,1 taps per output) and saturation.
module tb_vs_pe_block;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  data_t [6:0] iv;
  data_t [2:0] wv;
  data_t [8:0] po;

  vs_pe_block u_dut (.in_vec_i(iv), .wt_vec_i(wv), .psum_o(po));

  task automatic run_check();
    longint s;
    longint e;
    #1;
    for (int j = 0; j < 9; j++) begin
      s = 0;
      for (int r = 0; r < 7; r++)
        for (int c = 0; c < 3; c++)
          if (r - c + 2 == j) s += longint'(iv[r]) * longint'(wv[c]);
      e = s >>> 8;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      checks++;
      if (longint'(po[j]) != e) begin
        failures++;
        $display("FAIL j=%0d got %0d exp %0d", j, po[j], e);
      end
    end
  endtask

  initial begin
    // all ones (1.0 in Q8.8): number of taps on each diagonal
    for (int r = 0; r < 7; r++) iv[r] = 16'sd256;
    for (int c = 0; c < 3; c++) wv[c] = 16'sd256;
    #1;
    checks++;
    if (po[0] != 16'sd256 || po[1] != 16'sd512 || po[2] != 16'sd768 || po[6] != 16'sd768 ||
        po[7] != 16'sd512 || po[8] != 16'sd256) begin
      failures++;
      $display("FAIL tap count pattern");
    end
    run_check();
    // saturation
    for (int r = 0; r < 7; r++) iv[r] = 16'sh7fff;
    for (int c = 0; c < 3; c++) wv[c] = 16'sh7fff;
    run_check();
    for (int c = 0; c < 3; c++) wv[c] = 16'sh8000;
    run_check();
    for (int t = 0; t < 300; t++) begin
      for (int r = 0; r < 7; r++) iv[r] = data_t'($urandom);
      for (int c = 0; c < 3; c++) wv[c] = data_t'($urandom);
      run_check();
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

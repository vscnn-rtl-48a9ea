// tb_vs_accumulator: feeds random block results (including output columns and
// rows outside the image, and row tiles whose 9 outputs straddle their
// neighbours) into the accumulator and keeps an integer model of every
// (block, row, column) here. Drain reads of all positions must match the
// model; a clear must bring every word back to zero. Values are kept small
// enough that nothing saturates, and one directed case checks saturation.
// Also checks the clear sweep after reset and after clr_i (ready low for 56
// cycles) and that a drain read clears the words it reads.
module tb_vs_accumulator;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int W = 13, H = 17;   // 3 row tiles, last one partial

  logic              clr, rdy, rden;
  blk_res_t [7:0]    res;
  logic [2:0]        rb;
  logic [X_W-1:0]    rx;
  logic [TY_W-1:0]   rty;
  data_t [6:0]       rdat;
  int                model [8][MAX_W][MAX_Y];
  int                n_drop;

  vs_accumulator u_dut (
    .clk, .rst_n, .clr_i(clr), .ready_o(rdy), .w_i((X_W+1)'(W)), .h_i(7'(H)), .res_i(res),
    .rd_en_i(rden), .rd_blk_i(rb), .rd_x_i(rx), .rd_ty_i(rty), .rd_data_o(rdat));

  task automatic drain_check(string name);
    for (int b = 0; b < 8; b++)
      for (int x = 0; x < W; x++)
        for (int ty = 0; ty < 3; ty++) begin
          rb = 3'(b); rx = X_W'(x); rty = TY_W'(ty);
          #1;
          for (int i = 0; i < 7; i++) begin
            checks++;
            if (int'(rdat[i]) != model[b][x][ty*7+i]) begin
              failures++;
              if (failures < 10)
                $display("FAIL %s b%0d x%0d y%0d got %0d exp %0d", name, b, x, ty*7+i, rdat[i], model[b][x][ty*7+i]);
            end
          end
        end
  endtask

  initial begin
    clr = 0; rden = 0; res = '0; rb = '0; rx = '0; rty = '0; n_drop = 0;
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 56; i++) begin
      checks++;
      if (rdy) begin failures++; $display("FAIL ready during sweep, cycle %0d", i); end
      @(negedge clk);
    end
    checks++;
    if (!rdy) begin failures++; $display("FAIL not ready after sweep"); end
    foreach (model[b, x, y]) model[b][x][y] = 0;
    drain_check("after clear");
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        res[b].vld = ($urandom_range(0, 3) != 0);
        res[b].xo  = XO_W'($urandom_range(0, W + 1) - 1);     // -1 .. W
        res[b].ty  = TY_W'($urandom_range(0, 2));
        for (int j = 0; j < 9; j++) res[b].ps[j] = data_t'($urandom_range(0, 200) - 100);
        if (res[b].vld) begin
          if ($signed(res[b].xo) < 0 || $signed(res[b].xo) >= W) n_drop++;
          else
            for (int j = 0; j < 9; j++) begin
              int y;
              y = int'(res[b].ty) * 7 - 1 + j;
              if (y >= 0 && y < H) model[b][int'(res[b].xo)][y] += int'(res[b].ps[j]);
            end
        end
      end
    end
    @(negedge clk);
    res = '0;
    @(negedge clk);
    drain_check("accumulated");
    checks++;
    if (n_drop == 0) begin failures++; $display("FAIL no out-of-image result was exercised"); end
    // saturation
    @(negedge clk);
    res[0].vld = 1; res[0].xo = '0; res[0].ty = '0;
    for (int j = 0; j < 9; j++) res[0].ps[j] = 16'sh7f00;
    repeat (2) @(negedge clk);
    res = '0;
    @(negedge clk);
    rb = 0; rx = 0; rty = 0;
    #1;
    checks++;
    if (rdat[2] != 16'sh7fff) begin failures++; $display("FAIL saturation %0d", rdat[2]); end
    // drain read clears what it reads: clear block 0 column 0 tile 0 .. all
    for (int b = 0; b < 8; b++)
      for (int x = 0; x < 7; x++)
        for (int ty = 0; ty < 3; ty++) begin
          rb = 3'(b); rx = X_W'(x); rty = TY_W'(ty); rden = 1;
          @(negedge clk);
          for (int i = 0; i < 7; i++) model[b][x][ty*7+i] = 0;
        end
    rden = 0;
    drain_check("drained");
    // clear sweep on request
    clr = 1;
    @(negedge clk);
    clr = 0;
    while (!rdy) @(negedge clk);
    foreach (model[b, x, y]) model[b][x][y] = 0;
    drain_check("cleared");
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

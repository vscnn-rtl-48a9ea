// tb_vs_config_ctx: checks reset values and that each register write lands
// in its field and leaves the others alone.
module tb_vs_config_ctx;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        we;
  logic [2:0]  wa;
  logic [15:0] wd;
  cfg_t        cfg, expc;

  vs_config_ctx u_dut (.clk, .rst_n, .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd), .cfg_o(cfg));

  task automatic wr(cfg_reg_e a, logic [15:0] d);
    @(negedge clk);
    we = 1; wa = a; wd = d;
    @(negedge clk);
    we = 0;
    case (a)
      REG_W:     expc.w = d[X_W:0];
      REG_H:     expc.h = d[6:0];
      REG_K:     expc.k = d[CH_W:0];
      REG_NIN:   expc.n_in = d[IA_W:0];
      REG_SCALE: expc.scale = data_t'(d);
      REG_SHIFT: expc.shift = d[4:0];
      REG_FLAGS: begin expc.relu_en = d[0]; expc.sparse = d[1]; end
      default: ;
    endcase
    checks++;
    if (cfg != expc) begin failures++; $display("FAIL after write %s", a.name()); end
  endtask

  initial begin
    we = 0; wa = '0; wd = '0;
    @(negedge clk);
    expc = '0; expc.w = 1; expc.h = 1; expc.k = 1; expc.scale = 16'sd256; expc.shift = 5'd8;
    checks++;
    if (cfg != expc) begin failures++; $display("FAIL reset values"); end
    rst_n = 1;
    for (int t = 0; t < 60; t++) wr(cfg_reg_e'($urandom_range(0, 6)), 16'($urandom));
    wr(REG_W, 16'd56); wr(REG_H, 16'd56); wr(REG_K, 16'd512); wr(REG_NIN, 16'd16384);
    wr(REG_FLAGS, 16'd3);
    checks++;
    if (cfg.w != 56 || cfg.h != 56 || cfg.k != 512 || cfg.n_in != 16384 || !cfg.sparse || !cfg.relu_en) begin
      failures++; $display("FAIL full-size setting");
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

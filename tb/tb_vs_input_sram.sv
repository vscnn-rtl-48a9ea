// tb_vs_input_sram: writes random tagged vectors to random addresses and
// reads them back through all eight read ports at once, comparing with a
// copy kept here.
module tb_vs_input_sram;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                       we;
  logic [IA_W-1:0]            wa;
  in_entry_t                  wd;
  logic [7:0][IA_W-1:0]       ra;
  in_entry_t [7:0]            rd;
  in_entry_t                  model [int];
  int                         addrs [$];

  vs_input_sram u_dut (.clk, .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd), .rd_addr_i(ra), .rd_data_o(rd));

  initial begin
    we = 0; wa = '0; wd = '0; ra = '0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      we = 1;
      wa = IA_W'($urandom);
      wd = in_entry_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      model[int'(wa)] = wd;
      addrs.push_back(int'(wa));
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 300; i += 8) begin
      for (int p = 0; p < 8; p++) ra[p] = IA_W'(addrs[(i + p * 37) % addrs.size()]);
      #1;
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (rd[p] != model[int'(ra[p])]) begin failures++; $display("FAIL port %0d addr %0d", p, ra[p]); end
      end
      @(negedge clk);
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

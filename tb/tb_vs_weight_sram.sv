// tb_vs_weight_sram: writes random weight vectors and a pointer table, then
// reads vectors through all eight ports and the [ptr[k], ptr[k+1]) range of
// eight filters at once, comparing with a copy kept here.
module tb_vs_weight_sram;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                       we, pwe;
  logic [WA_W-1:0]            wa;
  wt_entry_t                  wd;
  logic [CH_W:0]              pa;
  logic [WA_W:0]              pd;
  logic [7:0][WA_W-1:0]       ra;
  wt_entry_t [7:0]            rd;
  logic [7:0][CH_W-1:0]       pk;
  logic [7:0][WA_W:0]         plo, phi;
  wt_entry_t                  model [int];
  int                         addrs [$];
  int                         ptr_model [513];

  vs_weight_sram u_dut (
    .clk, .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd),
    .ptr_wr_en_i(pwe), .ptr_wr_addr_i(pa), .ptr_wr_data_i(pd),
    .rd_addr_i(ra), .rd_data_o(rd), .ptr_k_i(pk), .ptr_lo_o(plo), .ptr_hi_o(phi));

  initial begin
    we = 0; pwe = 0; wa = '0; wd = '0; pa = '0; pd = '0; ra = '0; pk = '0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      we = 1;
      wa = WA_W'($urandom);
      wd = wt_entry_t'({$urandom, $urandom});
      model[int'(wa)] = wd;
      addrs.push_back(int'(wa));
    end
    @(negedge clk);
    we = 0;
    for (int k = 0; k <= 512; k++) begin
      @(negedge clk);
      pwe = 1;
      pa  = (CH_W+1)'(k);
      pd  = (WA_W+1)'(k * 7 + 3);
      ptr_model[k] = k * 7 + 3;
    end
    @(negedge clk);
    pwe = 0;
    for (int i = 0; i < 200; i += 8) begin
      for (int p = 0; p < 8; p++) begin
        ra[p] = WA_W'(addrs[(i + p * 13) % addrs.size()]);
        pk[p] = CH_W'($urandom);
      end
      if (i == 0) pk[7] = CH_W'(511);
      #1;
      for (int p = 0; p < 8; p++) begin
        checks += 2;
        if (rd[p] != model[int'(ra[p])]) begin failures++; $display("FAIL port %0d", p); end
        if (int'(plo[p]) != ptr_model[int'(pk[p])] || int'(phi[p]) != ptr_model[int'(pk[p]) + 1]) begin
          failures++;
          $display("FAIL ptr k=%0d lo=%0d hi=%0d", pk[p], plo[p], phi[p]);
        end
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

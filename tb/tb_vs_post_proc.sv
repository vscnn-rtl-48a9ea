// tb_vs_post_proc: random vectors through normalisation, ReLU and zero
// detection, compared one cycle later with values computed here; includes
// all-zero vectors, vectors that ReLU turns to zero, and saturation.
module tb_vs_post_proc;
  import vscnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             vi, vo, nz, relu;
  data_t [6:0]      vec, vout, expv;
  logic [CH_W-1:0]  ch, cho;
  logic [X_W-1:0]   x, xo;
  logic [TY_W-1:0]  ty, tyo;
  data_t            scale;
  logic [4:0]       shift;
  int               n_zero;

  vs_post_proc u_dut (
    .clk, .rst_n, .vld_i(vi), .vec_i(vec), .ch_i(ch), .x_i(x), .ty_i(ty),
    .scale_i(scale), .shift_i(shift), .relu_en_i(relu),
    .vld_o(vo), .vec_o(vout), .nz_o(nz), .ch_o(cho), .x_o(xo), .ty_o(tyo));

  initial begin
    logic expnz;
    vi = 0; vec = '0; ch = '0; x = '0; ty = '0; scale = 16'sd256; shift = 5'd8; relu = 0; n_zero = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      vi = 1;
      ch = CH_W'($urandom); x = X_W'($urandom); ty = TY_W'($urandom);
      relu  = 1'($urandom);
      scale = (t % 5 == 0) ? 16'sh7fff : data_t'($urandom_range(0, 1024) - 512);
      shift = 5'($urandom_range(0, 12));
      case (t % 4)
        0: vec = '0;
        1: for (int i = 0; i < 7; i++) vec[i] = data_t'(-$urandom_range(1, 1000));
        default: for (int i = 0; i < 7; i++) vec[i] = data_t'($urandom);
      endcase
      expnz = 0;
      for (int i = 0; i < 7; i++) begin
        longint p;
        p = (longint'(vec[i]) * longint'(scale)) >>> shift;
        if (p > 32767) p = 32767;
        if (p < -32768) p = -32768;
        if (relu && p < 0) p = 0;
        expv[i] = data_t'(p);
        if (p != 0) expnz = 1;
      end
      @(posedge clk);
      #1;
      checks += 3;
      if (!vo) begin failures++; $display("FAIL valid"); end
      if (vout != expv) begin failures++; $display("FAIL vec t=%0d", t); end
      if (nz != expnz) begin failures++; $display("FAIL nz t=%0d", t); end
      if (!expnz) n_zero++;
      checks++;
      if (cho != ch || xo != x || tyo != ty) begin failures++; $display("FAIL tag"); end
    end
    @(negedge clk);
    vi = 0;
    @(posedge clk);
    #1;
    checks++;
    if (vo) begin failures++; $display("FAIL valid stays"); end
    checks++;
    if (n_zero == 0) begin failures++; $display("FAIL no zero vector seen"); end
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

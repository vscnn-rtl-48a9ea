// tb_vs_pe: checks one PE with and without its diagonal adder against
// products and sums computed here, over directed corner values and random
// operands.
module tb_vs_pe;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [15:0] a, w;
  logic signed [33:0] pin, p_add, p_mul;

  vs_pe #(.DATA_W(16), .PSUM_W(34), .HAS_ADD(1'b1)) u_add (.in_i(a), .wt_i(w), .psum_i(pin), .psum_o(p_add));
  vs_pe #(.DATA_W(16), .PSUM_W(34), .HAS_ADD(1'b0)) u_mul (.in_i(a), .wt_i(w), .psum_i(pin), .psum_o(p_mul));

  task automatic check(input longint ea, input longint ew, input longint ep);
    longint exp_add, exp_mul;
    a = 16'(ea); w = 16'(ew); pin = 34'(ep);
    #1;
    exp_mul = ea * ew;
    exp_add = exp_mul + ep;
    checks += 2;
    if (longint'(p_mul) != exp_mul) begin failures++; $display("FAIL mul %0d*%0d = %0d", ea, ew, p_mul); end
    if (longint'(p_add) != exp_add) begin failures++; $display("FAIL add %0d*%0d+%0d = %0d", ea, ew, ep, p_add); end
  endtask

  initial begin
    check(3, 4, 5);
    check(-32768, -32768, 0);
    check(32767, -32768, -1000);
    check(-1, 1, 1);
    for (int i = 0; i < 500; i++)
      check(longint'($signed(16'($urandom))), longint'($signed(16'($urandom))),
            longint'($signed(32'($urandom))));
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

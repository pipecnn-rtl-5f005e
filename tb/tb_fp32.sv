// tb_fp32 -- self-checking test of the single precision multiply, add and
// compare functions of pipecnn_pkg against the double-precision reference of
// fp_ref_pkg, on random operands (including near-cancellation and
// far-apart exponents) and on a few exact cases.
module tb_fp32;
  import pipecnn_pkg::*;
  import fp_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s got %h expected %h", what, got, exp_v);
    end
  endtask

  initial begin
    logic [31:0] a, b;
    chk("1*1", fp_mul(FP_ONE, FP_ONE), FP_ONE);
    chk("1+1", fp_add(FP_ONE, FP_ONE), 32'h4000_0000);
    chk("1-1", fp_add(FP_ONE, 32'hBF80_0000), 32'h0);
    chk("3*0.5", fp_mul(32'h4040_0000, 32'h3F00_0000), 32'h3FC0_0000);
    for (int i = 0; i < 20000; i++) begin
      a = rand_f(-20, 20);
      b = rand_f(-20, 20);
      if (i % 4 == 1) b = {~a[31], a[30:0] ^ 31'($urandom % 16)};   // cancellation
      if (i % 4 == 2) b = {b[31], a[30:23] - 8'($urandom % 30), b[22:0]};
      chk("mul", fp_mul(a, b), rmul(a, b));
      chk("add", fp_add(a, b), radd(a, b));
      checks++;
      if (fp_gt(a, b) != (f2r(a) > f2r(b))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_conv_cu -- drives one convolution pipeline with random feature and
// weight vectors for neurons of random length CN, with gaps on the input and
// back-pressure on the output, and compares every neuron bit-exactly with a
// reference computed in double precision rounded to single per operation in
// the same summation order (product tree, N interleaved partial sums, final
// tree). Also checks the 3-cycle latency and the one-step-per-cycle rate.
module tb_conv_cu;
  import pipecnn_pkg::*;
  import fp_ref_pkg::*;

  localparam int V = 8, N = 6;
  localparam int NEURONS = 60;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_ready;
  fp32_t in_d [V], in_w [V], out_data;
  int checks = 0, failures = 0;

  conv_cu #(.VEC_SIZE(V), .N(N)) dut (.*);
  always #5 clk = ~clk;

  fp32_t expected [NEURONS];
  int got_n = 0;
  longint cyc = 0;
  longint last_acc_cyc;

  always_ff @(posedge clk) cyc <= cyc + 1;

  function automatic fp32_t tree(input fp32_t v [8]);
    fp32_t t [8];
    t = v;
    for (int w = 4; w >= 1; w /= 2)
      for (int i = 0; i < w; i++) t[i] = radd(t[2*i], t[2*i+1]);
    return t[0];
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== expected[got_n]) begin
        failures++;
        if (failures < 10) $display("MISMATCH neuron %0d got %h exp %h", got_n, out_data, expected[got_n]);
      end
      got_n++;
    end
  end

  initial begin
    fp32_t reg_m [N];
    fp32_t p [8], f [8], tmp;
    int cn;
    longint t0;
    in_valid = 0; in_last = 0; out_ready = 1;
    foreach (in_d[i]) begin in_d[i] = 0; in_w[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NEURONS; n++) begin
      cn = 1 + int'($urandom % 40);
      foreach (reg_m[i]) reg_m[i] = 0;
      for (int j = 0; j < cn; j++) begin
        // random gap
        if (n > 5 && ($urandom % 4) == 0) begin
          @(negedge clk); in_valid = 0;
        end
        @(negedge clk);
        in_valid = 1;
        in_last  = (j == cn - 1);
        foreach (in_d[i]) begin in_d[i] = rand_f(-6, 6); in_w[i] = rand_f(-6, 6); end
        for (int i = 0; i < 8; i++) p[i] = rmul(in_d[i], in_w[i]);
        tmp = radd(tree(p), reg_m[N-1]);
        if (j == cn - 1) begin
          f[0] = tmp;
          for (int i = 1; i < 8; i++) f[i] = (i < N) ? reg_m[i-1] : 0;
          expected[n] = tree(f);
        end else begin
          for (int i = N - 1; i > 0; i--) reg_m[i] = reg_m[i-1];
          reg_m[0] = tmp;
        end
        out_ready = (n < 20) ? 1'b1 : (($urandom % 3) != 0);
        #1;
        while (!in_ready) begin @(negedge clk); out_ready = 1'($urandom); #1; end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (got_n != NEURONS) begin failures++; $display("got %0d neurons", got_n); end

    // latency and rate: 20 steps back to back; out_valid rises two clock
    // edges after the edge that accepts the last step
    @(negedge clk);
    t0 = cyc;
    for (int j = 0; j < 20; j++) begin
      in_valid = 1; in_last = (j == 19);
      foreach (in_d[i]) begin in_d[i] = FP_ONE; in_w[i] = FP_ONE; end
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (cyc - t0 != 20) failures++;
    t0 = cyc;  // last step was accepted at edge cyc
    while (!out_valid) @(negedge clk);
    checks++;
    if (cyc - t0 != 2) begin failures++; $display("latency %0d", cyc - t0); end
    checks++;
    if (out_data != 32'h4320_0000) begin failures++; $display("sum160 got %h", out_data); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

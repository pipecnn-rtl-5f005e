// tb_conv_kernel -- a 3-D convolution (K=3, C'=2) and an FC-style pass
// (K=1) through a small convolution kernel (4 pipelines of 4 lanes). Feature
// and weight values are small integers, so every float sum is exact and the
// expected neurons are plain integer dot products, independent of summation
// order. Checks that each pipeline gets its own weights and the shared
// features, and that a K*K*C'-step neuron takes K*K*C' cycles.
module tb_conv_kernel;
  import pipecnn_pkg::*;
  import fp_ref_pkg::*;

  localparam int V = 4, CU = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_ready;
  fp32_t in_d [V];
  fp32_t in_w [CU][V];
  fp32_t out_data [CU];
  int checks = 0, failures = 0;
  longint cyc = 0;

  conv_kernel #(.VEC_SIZE(V), .CU_NUM(CU)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;

  int exp_sum [CU];

  task automatic run_neuron(input int cn, input bit gaps);
    longint t0;
    foreach (exp_sum[c]) exp_sum[c] = 0;
    t0 = cyc;
    for (int j = 0; j < cn; j++) begin
      int d [V];
      @(negedge clk);
      if (gaps && $urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      in_last  = (j == cn - 1);
      for (int i = 0; i < V; i++) begin
        d[i] = int'($urandom % 21) - 10;
        in_d[i] = r2f(real'(d[i]));
      end
      for (int c = 0; c < CU; c++)
        for (int i = 0; i < V; i++) begin
          int w = int'($urandom % 15) - 7;
          in_w[c][i] = r2f(real'(w));
          exp_sum[c] += w * d[i];
        end
    end
    @(negedge clk);
    in_valid = 0;
    if (!gaps) begin
      checks++;
      if (cyc - t0 != cn + 1) begin failures++; $display("rate: %0d cycles for %0d", cyc - t0, cn); end
    end
    while (!out_valid) @(negedge clk);
    for (int c = 0; c < CU; c++) begin
      checks++;
      if (out_data[c] !== r2f(real'(exp_sum[c]))) begin
        failures++;
        $display("MISMATCH cu %0d got %h (%f) exp %0d", c, out_data[c], f2r(out_data[c]), exp_sum[c]);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_last = 0; out_ready = 1;
    foreach (in_d[i]) in_d[i] = 0;
    foreach (in_w[c, i]) in_w[c][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) run_neuron(3 * 3 * 2, 0);  // convolution mode, K=3, C'=2
    repeat (5) run_neuron(2, 0);          // FC mode, C'=2
    repeat (5) run_neuron(25, 1);         // with input gaps
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// conv_cu -- one convolution pipeline (compute unit) of the convolution kernel.
//
// Computes one output neuron as the sum over CN steps of the dot product of a
// feature vector D_i(j) and a weight vector W_l(j), each VEC_SIZE single
// precision floats. CN is K*K*C' for a convolution and C' for a fully
// connected layer; the unit only sees the step stream and its `last` flag.
//
// Structure, following the design's pseudo-code:
//   stage 1  VEC_SIZE parallel multipliers (registered)
//   stage 2  balanced adder tree over the products (registered)
//   stage 3  delayed buffer Reg[0..N-1]: Temp = tree + Reg[N-1], shift the
//            buffer by one, Reg[0] = Temp. The buffer therefore holds N
//            interleaved partial sums, so an adder of latency up to N could
//            sit in the loop without stalling.
//   on the step flagged last, the N partial sums (including the new Temp)
//   are added by a parallel summation tree into the output register, and the
//   buffer is cleared to zero for the next neuron.
// Handshake: in_valid/in_ready per step, out_valid/out_ready per neuron. The
// whole pipeline advances only while the output register is free or being
// read, so a blocked output channel stalls the unit. out_valid rises two
// clock edges after the edge that accepts the last step (three pipeline
// stages); one step is accepted per cycle.
// The design reports an initiation interval of two for its compiled loop;
// this RTL accepts a step every cycle. Summation order (tree, then N-way
// interleave, then tree) is this design's choice and fixes the rounding.
module conv_cu
  import pipecnn_pkg::*;
#(
  parameter int VEC_SIZE = 8,
  parameter int N        = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fp32_t in_d [VEC_SIZE],
  input  fp32_t in_w [VEC_SIZE],
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output fp32_t out_data
);
  localparam int VP = 1 << $clog2(VEC_SIZE);
  localparam int NP = 1 << $clog2(N);

  function automatic fp32_t sum_vec(input fp32_t v [VP]);
    fp32_t t [VP];
    t = v;
    for (int w = VP / 2; w >= 1; w = w / 2)
      for (int i = 0; i < w; i++) t[i] = fp_add(t[2*i], t[2*i+1]);
    return t[0];
  endfunction

  function automatic fp32_t sum_reg(input fp32_t v [NP]);
    fp32_t t [NP];
    t = v;
    for (int w = NP / 2; w >= 1; w = w / 2)
      for (int i = 0; i < w; i++) t[i] = fp_add(t[2*i], t[2*i+1]);
    return t[0];
  endfunction

  logic  en;
  logic  s1_valid, s1_last, s2_valid, s2_last;
  fp32_t s1_prod [VP];
  fp32_t s2_sum;
  fp32_t acc [N];
  fp32_t temp;
  fp32_t prod_c [VP];
  fp32_t fin_c [NP];

  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  always_comb begin
    for (int i = 0; i < VP; i++)
      prod_c[i] = (i < VEC_SIZE) ? fp_mul(in_d[i % VEC_SIZE], in_w[i % VEC_SIZE]) : FP_ZERO;
    temp = fp_add(s2_sum, acc[N-1]);
    for (int i = 0; i < NP; i++)
      fin_c[i] = (i == 0) ? temp : (i < N) ? acc[(i - 1) % N] : FP_ZERO;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_last   <= 1'b0;
      s2_valid  <= 1'b0;
      s2_last   <= 1'b0;
      s2_sum    <= FP_ZERO;
      out_valid <= 1'b0;
      out_data  <= FP_ZERO;
      for (int i = 0; i < VP; i++) s1_prod[i] <= FP_ZERO;
      for (int i = 0; i < N; i++)  acc[i] <= FP_ZERO;
    end else if (en) begin
      // stage 1: parallel multipliers
      s1_valid <= in_valid;
      s1_last  <= in_last;
      if (in_valid) s1_prod <= prod_c;
      // stage 2: multiply-add tree
      s2_valid <= s1_valid;
      s2_last  <= s1_last;
      if (s1_valid) s2_sum <= sum_vec(s1_prod);
      // stage 3: delayed buffer accumulation and final summation
      out_valid <= s2_valid && s2_last;
      if (s2_valid) begin
        if (s2_last) begin
          out_data <= sum_reg(fin_c);
          for (int i = 0; i < N; i++) acc[i] <= FP_ZERO;
        end else begin
          acc[0] <= temp;
          for (int i = 1; i < N; i++) acc[i] <= acc[i-1];
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule

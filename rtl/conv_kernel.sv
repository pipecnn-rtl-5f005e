// conv_kernel -- the convolution kernel: CU_NUM convolution pipelines
// (conv_cu) working in lock step.
//
// Each step carries one feature vector D_i(j) of VEC_SIZE floats, replicated
// to all pipelines, and CU_NUM weight vectors W_l(j), one per pipeline, so the
// CU_NUM pipelines produce CU_NUM neurons of different output feature maps
// f_o at the same (x, y) in parallel. This is the unrolling of the outer loop
// by CU_NUM and the VEC_SIZE vectorisation of the design; the peak rate is
// VEC_SIZE * CU_NUM multiply-adds per cycle. The same circuit serves
// convolution (CN = K*K*C' steps per neuron) and fully connected layers
// (CN = C'); `in_last` marks the last step of a neuron.
// Handshake: in_valid/in_ready per step, out_valid/out_ready per group of
// CU_NUM neurons (one channel word). All pipelines see the same controls and
// therefore stall together; pipeline 0's handshake stands for all.
module conv_kernel
  import pipecnn_pkg::*;
#(
  parameter int VEC_SIZE = 8,
  parameter int CU_NUM   = 16,
  parameter int N        = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fp32_t in_d [VEC_SIZE],
  input  fp32_t in_w [CU_NUM][VEC_SIZE],
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output fp32_t out_data [CU_NUM]
);
  logic cu_in_ready [CU_NUM];
  logic cu_out_valid [CU_NUM];

  for (genvar c = 0; c < CU_NUM; c++) begin : g_cu
    conv_cu #(.VEC_SIZE(VEC_SIZE), .N(N)) u_cu (
      .clk, .rst_n,
      .in_valid,
      .in_ready  (cu_in_ready[c]),
      .in_d,
      .in_w      (in_w[c]),
      .in_last,
      .out_valid (cu_out_valid[c]),
      .out_ready,
      .out_data  (out_data[c])
    );
  end

  assign in_ready  = cu_in_ready[0];
  assign out_valid = cu_out_valid[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               cu_out_valid[CU_NUM-1] == cu_out_valid[0]);
endmodule

// pipecnn_top -- the accelerator: a deep pipeline of four kernels joined by
// channels, plus a stand-alone LRN kernel.
//
//   global memory --> memrd ==> conv_kernel --ch--> pool_kernel --ch--> memwr --> global memory
//   global memory <-> lrn_kernel
//
// One pipeline launch (start with a layer_cfg_t) runs one convolution or
// fully connected layer, optionally followed by max or average pooling,
// without storing the un-pooled result: MemRD streams feature and weight
// vectors, the CU_NUM convolution pipelines produce CU_NUM output maps at a
// time, the pooling kernel reduces them on the fly through its line buffers,
// and MemWR stores the result in the layout MemRD reads, so the host can
// launch the next layer on it directly. `done` pulses when the last result is
// written. LRN runs separately (lrn_start, lrn_cfg) from global memory to
// global memory, because it reads across neighbouring maps.
// The channels between the kernels are channel_fifo instances of CH_DEPTH
// words (CU_NUM floats each); MemRD's response buffer is the channel in front
// of the convolution kernel. All memory ports are brought out: the off-chip
// memory and its controller are outside this design.
// Default sizes: VEC_SIZE = 8 and CU_NUM = 16, the configuration the design
// reports as best for its board; L = 2 line buffers (3x3 pooling). The other
// sizes (weight cache, line length, LRN channels, table depth, channel depth,
// delayed-buffer depth N) are this design's choices.
module pipecnn_top
  import pipecnn_pkg::*;
#(
  parameter int VEC_SIZE   = 8,
  parameter int CU_NUM     = 16,
  parameter int N          = 6,
  parameter int WBUF_DEPTH = 4096,
  parameter int RESP_DEPTH = 32,
  parameter int CH_DEPTH   = 4,
  parameter int POOL_L     = 2,
  parameter int POOL_MAX_W = 224,
  parameter int LRN_MAX_C  = 256,
  parameter int LRN_LOCAL  = 5,
  parameter int SEG_BITS   = 2,
  parameter int LUT_DEPTH  = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // pipeline launch (from the host)
  input  layer_cfg_t        cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // LRN launch and table load (from the host)
  input  lrn_cfg_t          lrn_cfg,
  input  logic              lrn_start,
  output logic              lrn_busy,
  output logic              lrn_done,
  input  logic              lut_we,
  input  logic [$clog2(LUT_DEPTH)-1:0] lut_addr,
  input  fp32_t             lut_slope,
  input  fp32_t             lut_icpt,
  // MemRD feature read port (vector address, VEC_SIZE words per response)
  output logic              fr_req_valid,
  input  logic              fr_req_ready,
  output logic [ADDR_W-1:0] fr_req_addr,
  input  logic              fr_resp_valid,
  input  fp32_t             fr_resp_data [VEC_SIZE],
  // MemRD weight read port
  output logic              wr_req_valid,
  input  logic              wr_req_ready,
  output logic [ADDR_W-1:0] wr_req_addr,
  input  logic              wr_resp_valid,
  input  fp32_t             wr_resp_data [VEC_SIZE],
  // MemWR word write port
  output logic              ww_valid,
  input  logic              ww_ready,
  output logic [ADDR_W-1:0] ww_addr,
  output fp32_t             ww_data,
  // LRN read and vector write ports
  output logic              lr_req_valid,
  input  logic              lr_req_ready,
  output logic [ADDR_W-1:0] lr_req_addr,
  input  logic              lr_resp_valid,
  input  fp32_t             lr_resp_data [VEC_SIZE],
  output logic              lw_valid,
  input  logic              lw_ready,
  output logic [ADDR_W-1:0] lw_addr,
  output fp32_t             lw_data [VEC_SIZE]
);
  localparam int CHW = CU_NUM * 32;

  // MemRD -> Conv.
  logic  rd_valid, rd_ready, rd_last, rd_busy;
  fp32_t rd_d [VEC_SIZE];
  fp32_t rd_w [CU_NUM][VEC_SIZE];
  // Conv. -> channel -> Pooling -> channel -> MemWR
  logic  cv_valid, cv_ready, pi_valid, pi_ready, po_valid, po_ready, wi_valid, wi_ready;
  fp32_t cv_data [CU_NUM], pi_data [CU_NUM], po_data [CU_NUM], wi_data [CU_NUM];
  logic [CHW-1:0] cv_flat, pi_flat, po_flat, wi_flat;
  logic  wr_busy;

  memrd #(.VEC_SIZE(VEC_SIZE), .CU_NUM(CU_NUM), .WBUF_DEPTH(WBUF_DEPTH),
          .RESP_DEPTH(RESP_DEPTH)) u_memrd (
    .clk, .rst_n, .cfg, .start, .busy(rd_busy),
    .fr_req_valid, .fr_req_ready, .fr_req_addr, .fr_resp_valid, .fr_resp_data,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_resp_valid, .wr_resp_data,
    .out_valid(rd_valid), .out_ready(rd_ready), .out_d(rd_d), .out_w(rd_w), .out_last(rd_last));

  conv_kernel #(.VEC_SIZE(VEC_SIZE), .CU_NUM(CU_NUM), .N(N)) u_conv (
    .clk, .rst_n,
    .in_valid(rd_valid), .in_ready(rd_ready), .in_d(rd_d), .in_w(rd_w), .in_last(rd_last),
    .out_valid(cv_valid), .out_ready(cv_ready), .out_data(cv_data));

  for (genvar c = 0; c < CU_NUM; c++) begin : g_flat
    assign cv_flat[c*32 +: 32] = cv_data[c];
    assign pi_data[c]          = pi_flat[c*32 +: 32];
    assign po_flat[c*32 +: 32] = po_data[c];
    assign wi_data[c]          = wi_flat[c*32 +: 32];
  end

  channel_fifo #(.WIDTH(CHW), .DEPTH(CH_DEPTH)) u_ch_conv_pool (
    .clk, .rst_n,
    .in_valid(cv_valid), .in_ready(cv_ready), .in_data(cv_flat),
    .out_valid(pi_valid), .out_ready(pi_ready), .out_data(pi_flat));

  pool_kernel #(.CU_NUM(CU_NUM), .L(POOL_L), .MAX_W(POOL_MAX_W)) u_pool (
    .clk, .rst_n, .cfg, .start,
    .in_valid(pi_valid), .in_ready(pi_ready), .in_data(pi_data),
    .out_valid(po_valid), .out_ready(po_ready), .out_data(po_data));

  channel_fifo #(.WIDTH(CHW), .DEPTH(CH_DEPTH)) u_ch_pool_wr (
    .clk, .rst_n,
    .in_valid(po_valid), .in_ready(po_ready), .in_data(po_flat),
    .out_valid(wi_valid), .out_ready(wi_ready), .out_data(wi_flat));

  memwr #(.VEC_SIZE(VEC_SIZE), .CU_NUM(CU_NUM)) u_memwr (
    .clk, .rst_n, .cfg, .start, .busy(wr_busy), .done,
    .in_valid(wi_valid), .in_ready(wi_ready), .in_data(wi_data),
    .ww_valid, .ww_ready, .ww_addr, .ww_data);

  assign busy = rd_busy || wr_busy;

  lrn_kernel #(.VEC_SIZE(VEC_SIZE), .MAX_C(LRN_MAX_C), .LOCAL_SIZE(LRN_LOCAL),
               .SEG_BITS(SEG_BITS), .LUT_DEPTH(LUT_DEPTH)) u_lrn (
    .clk, .rst_n, .cfg(lrn_cfg), .start(lrn_start), .busy(lrn_busy), .done(lrn_done),
    .lut_we, .lut_addr, .lut_slope, .lut_icpt,
    .rq_valid(lr_req_valid), .rq_ready(lr_req_ready), .rq_addr(lr_req_addr),
    .rs_valid(lr_resp_valid), .rs_data(lr_resp_data),
    .vw_valid(lw_valid), .vw_ready(lw_ready), .vw_addr(lw_addr), .vw_data(lw_data));
endmodule

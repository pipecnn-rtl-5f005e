// memrd -- the MemRD data mover: fetches feature vectors and weights from
// global memory and feeds the convolution kernel.
//
// Work is done group by group: a group is CU_NUM consecutive output feature
// maps (the work-group index z of the read NDRange). For each group:
//   1. LOADW   the CU_NUM filters of the group, CN = K*K*C' vectors each, are
//              read into the on-chip weight cache. Every output position of
//              the group then reuses them without touching global memory.
//   2. STREAM  for every output position (oy, ox) of the conv_w x conv_h
//              output plane, in raster order, the K*K*C' feature vectors of
//              its window are read (kx fastest, then ky, then channel plane c,
//              the local work size (K, K, C')) and each is sent once to the
//              convolution kernel together with the matching weight vector of
//              all CU_NUM filters; the kernel replicates the feature vector to
//              its pipelines. The last step of each window carries `last`.
// A fully connected layer is run with K = 1 over a batch laid out as an
// in_w x in_h grid of input vectors, so its weights are reused across the
// batch the same way.
// Memory ports: two in-order read ports (features, weights) with a request
// valid/ready handshake and a response valid (no back-pressure). Feature reads
// are only issued while the response buffer (a channel_fifo of RESP_DEPTH)
// has room for their data, so responses are never dropped.
// Memory layout (pipecnn_pkg): feature vector (c, y, x) at
// in_base + (c*in_h + y)*in_w + x; filter f, step j = (c*K + ky)*K + kx at
// w_base + f*CN + j. Output step rate: one per cycle while memory keeps up.
// The weight cache is a plain buffer of WBUF_DEPTH vectors per pipeline
// rather than a compiler-generated cache; its size, the layout, the ports and
// the group-by-group order are this design's choices.
module memrd
  import pipecnn_pkg::*;
#(
  parameter int VEC_SIZE   = 8,
  parameter int CU_NUM     = 16,
  parameter int WBUF_DEPTH = 4096,
  parameter int RESP_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  layer_cfg_t        cfg,
  input  logic              start,
  output logic              busy,
  // feature read port
  output logic              fr_req_valid,
  input  logic              fr_req_ready,
  output logic [ADDR_W-1:0] fr_req_addr,
  input  logic              fr_resp_valid,
  input  fp32_t             fr_resp_data [VEC_SIZE],
  // weight read port
  output logic              wr_req_valid,
  input  logic              wr_req_ready,
  output logic [ADDR_W-1:0] wr_req_addr,
  input  logic              wr_resp_valid,
  input  fp32_t             wr_resp_data [VEC_SIZE],
  // stream to the convolution kernel
  output logic              out_valid,
  input  logic              out_ready,
  output fp32_t             out_d [VEC_SIZE],
  output fp32_t             out_w [CU_NUM][VEC_SIZE],
  output logic              out_last
);
  localparam int VW  = VEC_SIZE * 32;
  localparam int WAW = $clog2(WBUF_DEPTH);
  localparam int CW  = $clog2(CU_NUM) + 1;
  localparam int CUW = (CU_NUM > 1) ? $clog2(CU_NUM) : 1;
  localparam int FW  = $clog2(RESP_DEPTH) + 1;

  typedef enum logic [1:0] {S_IDLE, S_LOADW, S_STREAM} state_e;
  state_e state;

  layer_cfg_t c_q;
  logic [31:0] cn;              // steps per neuron, K*K*C'
  logic [DIM_W-1:0] groups;     // M / CU_NUM
  logic [DIM_W-1:0] grp;

  // weight cache
  logic [VW-1:0] wcache [CU_NUM][WBUF_DEPTH];
  logic [CW-1:0] wq_cu, wr_cu;  // request / response filter counters
  logic [31:0]   wq_j,  wr_j;
  logic [ADDR_W-1:0] w_addr;
  logic          wq_done;

  // feature issue counters
  logic [7:0]       kx, ky;
  logic [DIM_W-1:0] ci, ox, oy;
  logic             fq_done;
  logic [FW-1:0]    inflight;   // issued and not yet passed to the kernel

  // output side
  logic [31:0] jo;
  logic [DIM_W-1:0] px, py;
  logic        fifo_in_ready, fifo_valid, pop, issue_f;
  logic [VW-1:0] fifo_in, fifo_out;

  assign cn = 32'(c_q.k) * 32'(c_q.k) * 32'(c_q.in_cv);

  assign busy = (state != S_IDLE);

  // ---- weight requests ----
  assign wr_req_valid = (state == S_LOADW) && !wq_done;
  assign wr_req_addr  = w_addr;

  // ---- feature requests ----
  assign fr_req_valid = (state == S_STREAM) && !fq_done && (inflight < FW'(RESP_DEPTH));
  assign fr_req_addr  = c_q.in_base
                      + ADDR_W'((32'(ci) * 32'(c_q.in_h) + 32'(oy) * 32'(c_q.s) + 32'(ky)) * 32'(c_q.in_w))
                      + ADDR_W'(32'(ox) * 32'(c_q.s) + 32'(kx));
  assign issue_f = fr_req_valid && fr_req_ready;

  for (genvar i = 0; i < VEC_SIZE; i++) begin : g_pack
    assign fifo_in[i*32 +: 32] = fr_resp_data[i];
    assign out_d[i]            = fifo_out[i*32 +: 32];
  end

  channel_fifo #(.WIDTH(VW), .DEPTH(RESP_DEPTH)) u_resp (
    .clk, .rst_n,
    .in_valid (fr_resp_valid),
    .in_ready (fifo_in_ready),
    .in_data  (fifo_in),
    .out_valid(fifo_valid),
    .out_ready(pop),
    .out_data (fifo_out)
  );

  assign out_valid = (state == S_STREAM) && fifo_valid;
  assign pop       = out_valid && out_ready;
  assign out_last  = (jo == cn - 1);

  always_comb begin
    for (int c = 0; c < CU_NUM; c++)
      for (int i = 0; i < VEC_SIZE; i++)
        out_w[c][i] = wcache[c][WAW'(jo)][i*32 +: 32];
  end

  logic [VW-1:0] w_packed;
  for (genvar i = 0; i < VEC_SIZE; i++) begin : g_wpack
    assign w_packed[i*32 +: 32] = wr_resp_data[i];
  end

  always_ff @(posedge clk) begin
    if (state == S_LOADW && wr_resp_valid)
      wcache[CUW'(wr_cu)][WAW'(wr_j)] <= w_packed;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      c_q      <= '0;
      groups   <= '0;
      grp      <= '0;
      wq_cu    <= '0; wq_j <= '0; wr_cu <= '0; wr_j <= '0;
      w_addr   <= '0;
      wq_done  <= 1'b0;
      kx <= '0; ky <= '0; ci <= '0; ox <= '0; oy <= '0;
      fq_done  <= 1'b0;
      inflight <= '0;
      jo <= '0; px <= '0; py <= '0;
    end else begin
      inflight <= inflight + FW'(issue_f) - FW'(pop);
      case (state)
        S_IDLE: if (start) begin
          c_q    <= cfg;
          groups <= DIM_W'(cfg.out_m / DIM_W'(CU_NUM));
          grp    <= '0;
          w_addr <= cfg.w_base;
          wq_cu <= '0; wq_j <= '0; wr_cu <= '0; wr_j <= '0; wq_done <= 1'b0;
          state  <= S_LOADW;
        end
        S_LOADW: begin
          if (wr_req_valid && wr_req_ready) begin
            w_addr <= w_addr + 1'b1;
            if (wq_j == cn - 1) begin
              wq_j <= '0;
              wq_cu <= wq_cu + 1'b1;
              if (wq_cu == CW'(CU_NUM - 1)) wq_done <= 1'b1;
            end else wq_j <= wq_j + 1'b1;
          end
          if (wr_resp_valid) begin
            if (wr_j == cn - 1) begin
              wr_j <= '0;
              wr_cu <= wr_cu + 1'b1;
              if (wr_cu == CW'(CU_NUM - 1)) begin
                state <= S_STREAM;
                kx <= '0; ky <= '0; ci <= '0; ox <= '0; oy <= '0;
                fq_done <= 1'b0;
                jo <= '0; px <= '0; py <= '0;
              end
            end else wr_j <= wr_j + 1'b1;
          end
        end
        S_STREAM: begin
          if (issue_f) begin
            if (kx == c_q.k - 1) begin
              kx <= '0;
              if (ky == c_q.k - 1) begin
                ky <= '0;
                if (ci == c_q.in_cv - 1) begin
                  ci <= '0;
                  if (ox == c_q.conv_w - 1) begin
                    ox <= '0;
                    if (oy == c_q.conv_h - 1) begin
                      oy <= '0;
                      fq_done <= 1'b1;
                    end else oy <= oy + 1'b1;
                  end else ox <= ox + 1'b1;
                end else ci <= ci + 1'b1;
              end else ky <= ky + 1'b1;
            end else kx <= kx + 1'b1;
          end
          if (pop) begin
            if (jo == cn - 1) begin
              jo <= '0;
              if (px == c_q.conv_w - 1) begin
                px <= '0;
                if (py == c_q.conv_h - 1) begin
                  py <= '0;
                  // group finished: next group or done
                  if (grp == groups - 1) state <= S_IDLE;
                  else begin
                    grp <= grp + 1'b1;
                    wq_cu <= '0; wq_j <= '0; wr_cu <= '0; wr_j <= '0; wq_done <= 1'b0;
                    state <= S_LOADW;
                  end
                end else py <= py + 1'b1;
              end else px <= px + 1'b1;
            end else jo <= jo + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cache_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                 state != S_IDLE |-> cn <= 32'(WBUF_DEPTH));
  a_resp_room: assert property (@(posedge clk) disable iff (!rst_n)
                                fr_resp_valid |-> fifo_in_ready);
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);
endmodule

// lrn_kernel -- local response normalisation across feature maps, run as a
// kernel of its own between pipeline launches (global memory to global
// memory).
//
// For every input neuron v(c, y, x):
//   s        = sum of v(c', y, x)^2 over the LOCAL_SIZE maps c' centred on c
//              (maps outside 0..C-1 left out)
//   pwlf(s)  = a[addr] * s + b[addr]      piece-wise linear approximation of
//                                         the normalisation factor, e.g.
//                                         (k + alpha/n * s)^-beta for AlexNet
//   out      = v * pwlf(s)
// The look-up table is segmented by powers of 2^-SEG_BITS: the table address
// is taken straight from the float bits of s, its exponent and top SEG_BITS
// mantissa bits, i.e. code = s >> SHIFT_BIT with SHIFT_BIT = 23 - SEG_BITS,
// so no comparator tree is needed. addr = code - seg_base + 1 for codes at or
// above seg_base (clamped to the last entry); every s below the first segment
// (including 0) uses entry 0. The host fills the table (slope a, intercept b
// per entry) through the lut_* port, so the function and its range are
// run-time choices.
// Per pixel (x, y) the kernel:
//   LOAD   reads the C/VEC_SIZE vectors of the pixel into the local memory FIN
//   COMP   for one channel per cycle reads the LOCAL_SIZE neighbours of FIN in
//          parallel, evaluates the formula above and stores into FOUT
//   STORE  writes the C/VEC_SIZE result vectors back
// Memory layout as in pipecnn_pkg. Ports: in-order vector read port
// (request valid/ready, response valid), vector write port (valid/ready).
// start latches cfg; done pulses after the last store. The pixel-at-a-time
// tiling, the squares in s and the table loading are this design's choices;
// the exponent-addressed table follows the design.
module lrn_kernel
  import pipecnn_pkg::*;
#(
  parameter int VEC_SIZE   = 8,
  parameter int MAX_C      = 256,
  parameter int LOCAL_SIZE = 5,
  parameter int SEG_BITS   = 2,
  parameter int LUT_DEPTH  = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  lrn_cfg_t          cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // look-up table load
  input  logic              lut_we,
  input  logic [$clog2(LUT_DEPTH)-1:0] lut_addr,
  input  fp32_t             lut_slope,
  input  fp32_t             lut_icpt,
  // read port
  output logic              rq_valid,
  input  logic              rq_ready,
  output logic [ADDR_W-1:0] rq_addr,
  input  logic              rs_valid,
  input  fp32_t             rs_data [VEC_SIZE],
  // vector write port
  output logic              vw_valid,
  input  logic              vw_ready,
  output logic [ADDR_W-1:0] vw_addr,
  output fp32_t             vw_data [VEC_SIZE]
);
  localparam int SHIFT_BIT = 23 - SEG_BITS;
  localparam int CODE_W    = 31 - SHIFT_BIT;
  localparam int LA        = $clog2(LUT_DEPTH);
  localparam int CI        = $clog2(MAX_C);
  localparam int HALF      = LOCAL_SIZE / 2;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_COMP, S_STORE} state_e;
  state_e state;

  lrn_cfg_t c_q;
  fp32_t fin  [MAX_C];
  fp32_t fout [MAX_C];
  fp32_t lut_a [LUT_DEPTH];
  fp32_t lut_b [LUT_DEPTH];

  logic [DIM_W-1:0] x, y, qv, rv, wv;  // pixel, request / response / write plane
  logic [DIM_W:0]   ch;                // channel being normalised
  logic [DIM_W:0]   nch;               // C
  logic             q_done;

  // ---- per-channel datapath ----
  fp32_t s_sum, sq, pwlf, nb;
  logic [CODE_W-1:0] code;
  logic [LA-1:0]     addr;
  int                idx;

  always_comb begin
    s_sum = FP_ZERO;
    for (int d = -HALF; d <= HALF; d++) begin
      idx = int'(ch) + d;
      nb  = (idx >= 0 && idx < int'(nch)) ? fin[CI'(idx)] : FP_ZERO;
      sq  = fp_mul(nb, nb);
      s_sum = (d == -HALF) ? sq : fp_add(s_sum, sq);
    end
    code = s_sum[30:SHIFT_BIT];
    if (code < CODE_W'(c_q.seg_base))
      addr = '0;
    else if (32'(code) - 32'(c_q.seg_base) + 1 >= 32'(LUT_DEPTH - 1))
      addr = LA'(LUT_DEPTH - 1);
    else
      addr = LA'(32'(code) - 32'(c_q.seg_base) + 1);
    pwlf = fp_add(fp_mul(lut_a[addr], s_sum), lut_b[addr]);
  end

  assign busy     = (state != S_IDLE);
  assign rq_valid = (state == S_LOAD) && !q_done;
  assign rq_addr  = c_q.in_base + ADDR_W'((32'(qv) * 32'(c_q.in_h) + 32'(y)) * 32'(c_q.in_w) + 32'(x));
  assign vw_valid = (state == S_STORE);
  assign vw_addr  = c_q.out_base + ADDR_W'((32'(wv) * 32'(c_q.in_h) + 32'(y)) * 32'(c_q.in_w) + 32'(x));

  always_comb begin
    for (int i = 0; i < VEC_SIZE; i++) vw_data[i] = fout[CI'(32'(wv) * 32'(VEC_SIZE) + 32'(i))];
  end

  always_ff @(posedge clk) begin
    if (lut_we) begin
      lut_a[lut_addr] <= lut_slope;
      lut_b[lut_addr] <= lut_icpt;
    end
    if (state == S_LOAD && rs_valid)
      for (int i = 0; i < VEC_SIZE; i++) fin[CI'(32'(rv) * 32'(VEC_SIZE) + 32'(i))] <= rs_data[i];
    if (state == S_COMP)
      fout[CI'(ch)] <= fp_mul(fin[CI'(ch)], pwlf);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c_q <= '0; done <= 1'b0;
      x <= '0; y <= '0; qv <= '0; rv <= '0; wv <= '0; ch <= '0; nch <= '0; q_done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          c_q <= cfg;
          nch <= (DIM_W+1)'(32'(cfg.in_cv) * 32'(VEC_SIZE));
          x <= '0; y <= '0; qv <= '0; rv <= '0; q_done <= 1'b0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (rq_valid && rq_ready) begin
            if (qv == c_q.in_cv - 1) q_done <= 1'b1;
            else qv <= qv + 1'b1;
          end
          if (rs_valid) begin
            if (rv == c_q.in_cv - 1) begin
              rv <= '0;
              ch <= '0;
              state <= S_COMP;
            end else rv <= rv + 1'b1;
          end
        end
        S_COMP: begin
          if (ch == nch - 1) begin
            wv <= '0;
            state <= S_STORE;
          end else ch <= ch + 1'b1;
        end
        S_STORE: if (vw_ready) begin
          if (wv == c_q.in_cv - 1) begin
            qv <= '0; rv <= '0; q_done <= 1'b0;
            state <= S_LOAD;
            if (x == c_q.in_w - 1) begin
              x <= '0;
              if (y == c_q.in_h - 1) begin
                y <= '0;
                state <= S_IDLE;
                done <= 1'b1;
              end else y <= y + 1'b1;
            end else x <= x + 1'b1;
          end else wv <= wv + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fits: assert property (@(posedge clk) disable iff (!rst_n)
                           state != S_IDLE |-> nch <= (DIM_W+1)'(MAX_C));
endmodule

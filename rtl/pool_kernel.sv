// pool_kernel -- line-buffer pooling kernel between the convolution kernel
// and MemWR.
//
// Each channel word carries CU_NUM neurons, one per output feature map, at the
// same (x, y); every map is pooled by its own lane. The convolution output
// arrives row by row (conv_w x conv_h per group of maps, groups back to back).
// Per lane, as in the design's line-buffer structure with L line buffers:
//   * LineBuffer-0..L-1 hold the previous L rows. For the incoming pixel at
//     column x, the column {row y-L, ..., row y-1, row y} is read from the
//     line buffers and the input, and the buffers shift down by one row.
//   * A first pooling logic reduces the column (max, or sum for average).
//   * L registers keep the last L column results; a second pooling logic
//     reduces them with the current column result over the (L+1) x (L+1)
//     window ending at (x, y).
//   * The window result is emitted when x >= L and y >= L and the window
//     start lies on the pooling stride grid (pool_s), i.e. a pooled output is
//     ready as soon as its last input pixel arrives.
// Average pooling multiplies the window sum by 1/(L+1)^2. Both reductions
// fold oldest-first (row y-L first, column x-L first). With pool_on = 0 the
// kernel is turned off and forwards every word unchanged.
// Handshake: valid/ready on both sides; one input word per cycle; an output
// appears in the cycle after the input that completes it and holds until
// taken, stalling the input. `start` (with the layer configuration) clears
// the position counters. The window size L+1 is a build parameter; the
// pooling stride, mode and on/off are run-time settings (this design's split).
module pool_kernel
  import pipecnn_pkg::*;
#(
  parameter int CU_NUM = 16,
  parameter int L      = 2,
  parameter int MAX_W  = 224
) (
  input  logic       clk,
  input  logic       rst_n,
  input  layer_cfg_t cfg,
  input  logic       start,
  input  logic       in_valid,
  output logic       in_ready,
  input  fp32_t      in_data [CU_NUM],
  output logic       out_valid,
  input  logic       out_ready,
  output fp32_t      out_data [CU_NUM]
);
  localparam int XW = $clog2(MAX_W);

  // single precision 1/(L+1)^2, rounded from double
  function automatic fp32_t inv_area();
    logic [63:0] d;
    logic [23:0] m;
    d = $realtobits(1.0 / real'((L + 1) * (L + 1)));
    m = {1'b1, d[51:29]} + 24'(d[28]);
    return {1'b0, 8'(int'(d[62:52]) - 1023 + 127), m[22:0]};
  endfunction
  localparam fp32_t INV_AREA = inv_area();

  logic             on_q;
  pool_mode_e       mode_q;
  logic [7:0]       ps_q;
  logic [DIM_W-1:0] w_q, h_q;
  logic [DIM_W-1:0] x, y, nx, ny;   // position and next pooled column/row

  fp32_t lbuf [CU_NUM][L][MAX_W];
  fp32_t hregs [CU_NUM][L];
  fp32_t vcol [CU_NUM];
  fp32_t win [CU_NUM];
  logic  acc, emit;

  assign in_ready = !out_valid || out_ready;
  assign acc      = in_valid && in_ready;
  assign emit     = (x >= DIM_W'(L)) && (y >= DIM_W'(L)) && (x == nx) && (y == ny);

  function automatic fp32_t pool2(input fp32_t a, input fp32_t b, input pool_mode_e m);
    return (m == POOL_MAX) ? fp_max(a, b) : fp_add(a, b);
  endfunction

  always_comb begin
    for (int c = 0; c < CU_NUM; c++) begin
      // first pooling logic: column, oldest row first
      vcol[c] = lbuf[c][L-1][XW'(x)];
      for (int i = L - 2; i >= 0; i--) vcol[c] = pool2(vcol[c], lbuf[c][i][XW'(x)], mode_q);
      vcol[c] = pool2(vcol[c], in_data[c], mode_q);
      // second pooling logic: registered columns, oldest first, then this one
      win[c] = hregs[c][L-1];
      for (int i = L - 2; i >= 0; i--) win[c] = pool2(win[c], hregs[c][i], mode_q);
      win[c] = pool2(win[c], vcol[c], mode_q);
      if (mode_q == POOL_AVG) win[c] = fp_mul(win[c], INV_AREA);
    end
  end

  // line buffers and column registers (no reset needed: only read after fill)
  always_ff @(posedge clk) begin
    if (acc && on_q) begin
      for (int c = 0; c < CU_NUM; c++) begin
        lbuf[c][0][XW'(x)] <= in_data[c];
        for (int i = 1; i < L; i++) lbuf[c][i][XW'(x)] <= lbuf[c][i-1][XW'(x)];
        hregs[c][0] <= vcol[c];
        for (int i = 1; i < L; i++) hregs[c][i] <= hregs[c][i-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      on_q <= 1'b0; mode_q <= POOL_MAX; ps_q <= 8'd1; w_q <= '0; h_q <= '0;
      x <= '0; y <= '0; nx <= DIM_W'(L); ny <= DIM_W'(L);
      out_valid <= 1'b0;
      for (int c = 0; c < CU_NUM; c++) out_data[c] <= FP_ZERO;
    end else if (start) begin
      on_q <= cfg.pool_on; mode_q <= cfg.pool_mode; ps_q <= cfg.pool_s;
      w_q <= cfg.conv_w; h_q <= cfg.conv_h;
      x <= '0; y <= '0; nx <= DIM_W'(L); ny <= DIM_W'(L);
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (acc) begin
        if (!on_q) begin
          out_valid <= 1'b1;
          out_data  <= in_data;
        end else begin
          if (emit) begin
            out_valid <= 1'b1;
            out_data  <= win;
          end
          // position bookkeeping
          if (x == w_q - 1) begin
            x  <= '0;
            nx <= DIM_W'(L);
            if (y == h_q - 1) begin
              y  <= '0;
              ny <= DIM_W'(L);
            end else begin
              y <= y + 1'b1;
              if (y == ny) ny <= ny + DIM_W'(ps_q);
            end
          end else begin
            x <= x + 1'b1;
            if (x == nx) nx <= nx + DIM_W'(ps_q);
          end
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready && !start |=> out_valid);
  a_width: assert property (@(posedge clk) disable iff (!rst_n)
                            on_q |-> w_q <= DIM_W'(MAX_W));
endmodule

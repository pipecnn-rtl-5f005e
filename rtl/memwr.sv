// memwr -- the MemWR data mover: writes the results of the pipeline back to
// global memory.
//
// Each input channel word holds the CU_NUM results of one output position
// (x, y) of one group of CU_NUM output maps, in the order the convolution
// kernel produces them (raster order per group, groups in turn), after
// pooling when the pooling kernel is on. The write NDRange is therefore
// (out_w, out_h, M) with out_w x out_h the conv or pooled plane.
// The kernel writes the CU_NUM words one per cycle, map m = group*CU_NUM + lane
// going to word address
//   out_base + ((m / VEC_SIZE)*out_h + y)*out_w*VEC_SIZE + x*VEC_SIZE + m % VEC_SIZE
// which is the vector-plane layout that MemRD reads, so the next layer can
// take the result as its input unchanged.
// Handshake: in_valid/in_ready (a word is taken after its last lane is
// written); write port ww_valid/ww_ready/ww_addr/ww_data. `start` latches the
// configuration; busy stays high until all out_w*out_h*M results are written,
// then `done` pulses for one cycle. Serial word writes and the layout are this
// design's choices.
module memwr
  import pipecnn_pkg::*;
#(
  parameter int VEC_SIZE = 8,
  parameter int CU_NUM   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  layer_cfg_t        cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic              in_valid,
  output logic              in_ready,
  input  fp32_t             in_data [CU_NUM],
  output logic              ww_valid,
  input  logic              ww_ready,
  output logic [ADDR_W-1:0] ww_addr,
  output fp32_t             ww_data
);
  localparam int LW = (CU_NUM > 1) ? $clog2(CU_NUM) : 1;

  logic [DIM_W-1:0]  ow, oh, groups;
  logic [DIM_W-1:0]  x, y, g;
  logic [LW-1:0]     lane;
  logic [ADDR_W-1:0] base;
  logic [31:0]       m;

  assign m        = 32'(g) * 32'(CU_NUM) + 32'(lane);
  assign ww_valid = busy && in_valid;
  assign ww_data  = in_data[lane];
  assign ww_addr  = base
                  + ADDR_W'(((m / 32'(VEC_SIZE)) * 32'(oh) + 32'(y)) * 32'(ow) * 32'(VEC_SIZE))
                  + ADDR_W'(32'(x) * 32'(VEC_SIZE) + (m % 32'(VEC_SIZE)));
  assign in_ready = busy && ww_ready && (lane == LW'(CU_NUM - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      ow <= '0; oh <= '0; groups <= '0; base <= '0;
      x <= '0; y <= '0; g <= '0; lane <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy   <= 1'b1;
        ow     <= cfg.pool_on ? cfg.pool_w : cfg.conv_w;
        oh     <= cfg.pool_on ? cfg.pool_h : cfg.conv_h;
        groups <= DIM_W'(cfg.out_m / DIM_W'(CU_NUM));
        base   <= cfg.out_base;
        x <= '0; y <= '0; g <= '0; lane <= '0;
      end else if (ww_valid && ww_ready) begin
        if (lane != LW'(CU_NUM - 1)) lane <= lane + 1'b1;
        else begin
          lane <= '0;
          if (x == ow - 1) begin
            x <= '0;
            if (y == oh - 1) begin
              y <= '0;
              if (g == groups - 1) begin
                g    <= '0;
                busy <= 1'b0;
                done <= 1'b1;
              end else g <= g + 1'b1;
            end else y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
      end
    end
  end

  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid && !in_ready && !start |=> in_valid);
endmodule

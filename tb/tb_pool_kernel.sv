// tb_pool_kernel -- streams two 7x7 frames (two groups of maps) of random
// floats on 2 lanes through the pooling kernel with L = 2 (3x3 windows) and
// checks: max pooling with stride 2, average pooling with stride 2, max
// pooling with stride 1, and the kernel turned off (every word forwarded).
// Expected outputs are computed in the testbench from the frames, with the
// reference float arithmetic, in the kernel's fold order. Random gaps on the
// input and back-pressure on the output.
module tb_pool_kernel;
  import pipecnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int CU = 2, L = 2, W = 7, H = 7, FR = 2;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start, in_valid, in_ready, out_valid, out_ready;
  fp32_t in_data [CU], out_data [CU];
  int checks = 0, failures = 0;
  fp32_t img [FR][CU][H][W];
  fp32_t expq [$];   // expected words, lane-interleaved
  int outs = 0;

  pool_kernel #(.CU_NUM(CU), .L(L), .MAX_W(16)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    if (rst_n && out_valid && out_ready) begin
      outs++;
      for (int c = 0; c < CU; c++) begin
        fp32_t e;
        checks++;
        if (expq.size() == 0) begin failures++; $display("extra output"); end
        else begin
          e = expq.pop_front();
          if (out_data[c] !== e) begin
            failures++;
            if (failures < 10) $display("MISMATCH out %0d lane %0d got %h exp %h", outs, c, out_data[c], e);
          end
        end
      end
    end
  end

  task automatic run(input bit on, input pool_mode_e mode, input int ps);
    cfg = '0;
    cfg.conv_w = DIM_W'(W); cfg.conv_h = DIM_W'(H);
    cfg.pool_on = on; cfg.pool_mode = mode; cfg.pool_s = 8'(ps);
    foreach (img[f, c, yy, xx]) img[f][c][yy][xx] = rand_f(-4, 4);
    for (int f = 0; f < FR; f++)
      if (!on) begin
        for (int yy = 0; yy < H; yy++)
          for (int xx = 0; xx < W; xx++)
            for (int c = 0; c < CU; c++) expq.push_back(img[f][c][yy][xx]);
      end else begin
        for (int yy = L; yy < H; yy += ps)
          for (int xx = L; xx < W; xx += ps)
            for (int c = 0; c < CU; c++) begin
              fp32_t col [L+1];
              fp32_t acc;
              for (int dx = 0; dx <= L; dx++) begin
                fp32_t v;
                v = img[f][c][yy-L][xx-L+dx];
                for (int dy = 1; dy <= L; dy++) begin
                  fp32_t p;
                  p = img[f][c][yy-L+dy][xx-L+dx];
                  if (mode == POOL_MAX) v = (f2r(p) > f2r(v)) ? p : v;
                  else v = radd(v, p);
                end
                col[dx] = v;
              end
              acc = col[0];
              for (int dx = 1; dx <= L; dx++)
                if (mode == POOL_MAX) acc = (f2r(col[dx]) > f2r(acc)) ? col[dx] : acc;
                else acc = radd(acc, col[dx]);
              if (mode == POOL_AVG) acc = rmul(acc, r2f(1.0 / 9.0));
              expq.push_back(acc);
            end
      end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int f = 0; f < FR; f++)
      for (int yy = 0; yy < H; yy++)
        for (int xx = 0; xx < W; xx++) begin
          if ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int c = 0; c < CU; c++) in_data[c] = img[f][c][yy][xx];
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size() / CU); end
  endtask

  initial begin
    start = 0; in_valid = 0; cfg = '0;
    foreach (in_data[c]) in_data[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, POOL_MAX, 2);
    checks++; if (outs != FR * 9) begin failures++; $display("max s2 outputs %0d", outs); end
    outs = 0;
    run(1, POOL_AVG, 2);
    run(1, POOL_MAX, 1);
    checks++; if (outs != FR * 9 + FR * 25) begin failures++; $display("outputs %0d", outs); end
    run(0, POOL_MAX, 2);
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

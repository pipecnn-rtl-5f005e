// tb_pipecnn_top -- end-to-end test of the accelerator at its default sizes
// (VEC_SIZE 8, CU_NUM 16, 3x3 pooling) against the behavioural global memory
// with random latency and stalls. Four launches, as a host would issue them:
//   1. convolution 7x7x16 -> 5x5x32 (K 3, S 1, two groups of 16 maps, so the
//      weight cache is loaded twice), max pooling 3x3 stride 2 -> 2x2x32
//   2. convolution with stride 2: 7x7x8 -> 3x3x16, average pooling stride 1
//      -> 1x1x16
//   3. fully connected 32 -> 16 on a batch of 32 inputs laid out 8x4 (K 1),
//      pooling turned off
//   4. LRN across the 32 maps of result 1 and of the small-valued FC input
//      (AlexNet constants), table loaded by the testbench
// Features and weights are small integers, so the convolution sums are exact
// and the expected results are computed here in double precision. LRN
// results are checked against the exact formula to 0.5 %. The testbench
// also counts the mechanisms of the design and fails if one never occurred:
// memory stalls, kernel back-pressure (a stalled convolution pipeline), the
// weight cache reload per group, each pooling mode and the turned-off
// pooling kernel, convolution and FC modes, and LRN table look-ups in the
// first and higher segments.
module tb_pipecnn_top;
  import pipecnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int V = 8, CU = 16;
  localparam real LK = 2.0, ALPHA = 1.0e-4, BETA = 0.75;

  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  lrn_cfg_t   lcfg;
  logic start, busy, done, lrn_start, lrn_busy, lrn_done, lut_we;
  logic [5:0] lut_addr;
  fp32_t lut_slope, lut_icpt;
  logic        rq_v [3], rq_r [3], rs_v [3];
  logic [31:0] rq_a [3];
  logic [31:0] rs_d [3][V];
  logic ww_valid, lw_valid;
  logic [31:0] ww_addr, lw_addr;
  fp32_t ww_data, lw_data [V];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gmem_model #(.VEC_SIZE(V), .MEM_WORDS(65536), .NRD(3)) u_mem (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .ww_valid, .ww_addr, .ww_data, .vw_valid(lw_valid), .vw_addr(lw_addr), .vw_data(lw_data));

  pipecnn_top dut (
    .clk, .rst_n, .cfg, .start, .busy, .done,
    .lrn_cfg(lcfg), .lrn_start, .lrn_busy, .lrn_done,
    .lut_we, .lut_addr, .lut_slope, .lut_icpt,
    .fr_req_valid(rq_v[0]), .fr_req_ready(rq_r[0]), .fr_req_addr(rq_a[0]),
    .fr_resp_valid(rs_v[0]), .fr_resp_data(rs_d[0]),
    .wr_req_valid(rq_v[1]), .wr_req_ready(rq_r[1]), .wr_req_addr(rq_a[1]),
    .wr_resp_valid(rs_v[1]), .wr_resp_data(rs_d[1]),
    .ww_valid, .ww_ready(1'b1), .ww_addr, .ww_data,
    .lr_req_valid(rq_v[2]), .lr_req_ready(rq_r[2]), .lr_req_addr(rq_a[2]),
    .lr_resp_valid(rs_v[2]), .lr_resp_data(rs_d[2]),
    .lw_valid, .lw_ready(1'b1), .lw_addr, .lw_data);

  // ---------------- mechanism counters ----------------
  int n_mem_stall = 0, n_conv_stall = 0, n_wload = 0, n_pool_max = 0, n_pool_avg = 0;
  int n_pool_off = 0, n_conv_mode = 0, n_fc_mode = 0, n_lut0 = 0, n_lutn = 0;
  logic loadw_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (rq_v[0] && !rq_r[0]) n_mem_stall++;
    if (dut.rd_valid && !dut.rd_ready) n_conv_stall++;
    loadw_q <= (dut.u_memrd.state == dut.u_memrd.S_LOADW);
    if (dut.u_memrd.state == dut.u_memrd.S_LOADW && !loadw_q) n_wload++;
    if (dut.u_lrn.state == dut.u_lrn.S_COMP) begin
      if (dut.u_lrn.addr == 0) n_lut0++; else n_lutn++;
    end
  end

  // ---------------- helpers ----------------
  function automatic int faddr(input int base, input int c, input int y, input int x,
                               input int h, input int w);
    return (base + (c / V * h + y) * w + x) * V + c % V;   // word address
  endfunction

  task automatic launch(input int w, h, c, k, s, m, input bit pon, input pool_mode_e pm,
                        input int ps, input int in_b, w_b, out_b);
    int cw, ch;
    cw = (w - k) / s + 1; ch = (h - k) / s + 1;
    cfg = '0;
    cfg.in_w = DIM_W'(w); cfg.in_h = DIM_W'(h); cfg.in_cv = DIM_W'(c / V);
    cfg.k = 8'(k); cfg.s = 8'(s); cfg.conv_w = DIM_W'(cw); cfg.conv_h = DIM_W'(ch);
    cfg.out_m = DIM_W'(m); cfg.pool_on = pon; cfg.pool_mode = pm; cfg.pool_s = 8'(ps);
    cfg.pool_w = DIM_W'((cw - 3) / ps + 1); cfg.pool_h = DIM_W'((ch - 3) / ps + 1);
    cfg.in_base = 32'(in_b); cfg.w_base = 32'(w_b); cfg.out_base = 32'(out_b);
    if (!pon) n_pool_off++;
    else if (pm == POOL_MAX) n_pool_max++;
    else n_pool_avg++;
    if (k == 1) n_fc_mode++; else n_conv_mode++;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  // reference convolution result (exact, small integers)
  function automatic real conv_ref(input int w, h, c, k, s, input int in_b, w_b,
                                   input int m, input int oy, input int ox);
    real acc;
    int cn;
    acc = 0.0;
    cn = k * k * c / V;
    for (int ci = 0; ci < c; ci++)
      for (int ky = 0; ky < k; ky++)
        for (int kx = 0; kx < k; kx++)
          acc += f2r(u_mem.mem[faddr(in_b, ci, oy * s + ky, ox * s + kx, h, w)])
               * f2r(u_mem.mem[(w_b + m * cn + ((ci / V) * k + ky) * k + kx) * V + ci % V]);
    return acc;
  endfunction

  task automatic check_word(input string what, input int a, input logic [31:0] e);
    checks++;
    if (u_mem.mem[a] !== e) begin
      failures++;
      if (failures < 10) $display("%s: word %0d got %h (%g) exp %h (%g)", what, a,
                                  u_mem.mem[a], f2r(u_mem.mem[a]), e, f2r(e));
    end
  endtask

  function automatic real lf(input real s);
    return (LK + ALPHA / 5.0 * s) ** (-BETA);
  endfunction

  task automatic load_entry(input int i, input real lo, input real hi);
    real a, b;
    a = (lf(hi) - lf(lo)) / (hi - lo);
    b = lf(lo) - a * lo;
    @(negedge clk);
    lut_we = 1; lut_addr = 6'(i); lut_slope = r2f(a); lut_icpt = r2f(b);
    @(negedge clk);
    lut_we = 0;
  endtask

  // LRN over a w x h x 32 volume, checked against the exact formula
  task automatic run_lrn(input int w, h, in_b, out_b);
    lcfg = '0;
    lcfg.in_w = DIM_W'(w); lcfg.in_h = DIM_W'(h); lcfg.in_cv = 4;
    lcfg.in_base = 32'(in_b); lcfg.out_base = 32'(out_b);
    lcfg.seg_base = 16'((127 + 4) << 2);
    @(negedge clk); lrn_start = 1; @(negedge clk); lrn_start = 0;
    while (!lrn_done) @(negedge clk);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int c = 0; c < 32; c++) begin
          real s, e, g, err;
          s = 0.0;
          for (int d = -2; d <= 2; d++)
            if (c + d >= 0 && c + d < 32) s += f2r(u_mem.mem[faddr(in_b, c + d, y, x, h, w)]) ** 2;
          e = f2r(u_mem.mem[faddr(in_b, c, y, x, h, w)]) * lf(s);
          g = f2r(u_mem.mem[faddr(out_b, c, y, x, h, w)]);
          err = (e == 0.0) ? g : (g - e) / e;
          if (err < 0) err = -err;
          checks++;
          if (err > 0.005) begin
            failures++;
            if (failures < 10) $display("lrn c %0d (%0d,%0d) got %g exp %g", c, y, x, g, e);
          end
        end
  endtask

  initial begin
    start = 0; lrn_start = 0; lut_we = 0; lut_addr = 0; lut_slope = 0; lut_icpt = 0;
    cfg = '0; lcfg = '0;
    foreach (u_mem.mem[i]) u_mem.mem[i] = 32'h0;
    // layer 1 input (vec 0), layer 3 input (vec 5000): integers -3..3
    for (int i = 0; i < 7 * 7 * 16; i++) u_mem.mem[i] = r2f(real'(int'($urandom % 7) - 3));
    for (int i = 0; i < 8 * 4 * 32; i++) u_mem.mem[5000 * V + i] = r2f(real'(int'($urandom % 7) - 3));
    // weights: layer 1 at vec 1000, layer 2 at vec 3000, layer 3 at vec 6000
    for (int i = 0; i < 32 * 18 * V; i++) u_mem.mem[1000 * V + i] = r2f(real'(int'($urandom % 5) - 2));
    for (int i = 0; i < 16 * 9 * V; i++)  u_mem.mem[3000 * V + i] = r2f(real'(int'($urandom % 5) - 2));
    for (int i = 0; i < 16 * 4 * V; i++)  u_mem.mem[6000 * V + i] = r2f(real'(int'($urandom % 5) - 2));
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1: conv 3x3 s1, 32 maps, max pool 3x3 s2 ----
    launch(7, 7, 16, 3, 1, 32, 1, POOL_MAX, 2, 0, 1000, 2000 * V);
    for (int m = 0; m < 32; m++)
      for (int py = 0; py < 2; py++)
        for (int px = 0; px < 2; px++) begin
          real mx;
          mx = -1.0e30;
          for (int dy = 0; dy < 3; dy++)
            for (int dx = 0; dx < 3; dx++) begin
              real v;
              v = conv_ref(7, 7, 16, 3, 1, 0, 1000, m, py * 2 + dy, px * 2 + dx);
              if (v > mx) mx = v;
            end
          check_word("layer1", faddr(2000, m, py, px, 2, 2), r2f(mx));
        end

    // ---- 2: conv 3x3 s2 on 8 channels, 16 maps, average pool s1 ----
    launch(7, 7, 8, 3, 2, 16, 1, POOL_AVG, 1, 0, 3000, 4000 * V);
    for (int m = 0; m < 16; m++) begin
      real sm;
      sm = 0.0;
      for (int dy = 0; dy < 3; dy++)
        for (int dx = 0; dx < 3; dx++) sm += conv_ref(7, 7, 8, 3, 2, 0, 3000, m, dy, dx);
      check_word("layer2", faddr(4000, m, 0, 0, 1, 1), rmul(r2f(sm), r2f(1.0 / 9.0)));
    end

    // ---- 3: fully connected 32 -> 16, batch of 32 as an 8x4 grid, no pooling ----
    launch(8, 4, 32, 1, 1, 16, 0, POOL_MAX, 1, 5000, 6000, 7000 * V);
    for (int m = 0; m < 16; m++)
      for (int b = 0; b < 32; b++)
        check_word("fc", faddr(7000, m, b / 8, b % 8, 4, 8),
                   r2f(conv_ref(8, 4, 32, 1, 1, 5000, 6000, m, b / 8, b % 8)));

    // ---- 4: LRN over result 1 (2x2x32) ----
    load_entry(0, 0.0, 16.0);
    for (int i = 1; i < 64; i++) begin
      real lo;
      lo = (2.0 ** real'(4 + (i - 1) / 4)) * (1.0 + real'((i - 1) % 4) / 4.0);
      load_entry(i, lo, lo + (2.0 ** real'(4 + (i - 1) / 4)) / 4.0);
    end
    run_lrn(2, 2, 2000, 7500);   // on the pooled result of layer 1
    run_lrn(8, 4, 5000, 7700);   // on small-valued data (first table segment)

    // ---- mechanisms ----
    $display("memory stalls %0d, conv stalls %0d, weight loads %0d, pool max/avg/off %0d/%0d/%0d",
             n_mem_stall, n_conv_stall, n_wload, n_pool_max, n_pool_avg, n_pool_off);
    $display("conv/fc launches %0d/%0d, lrn lookups seg0/segN %0d/%0d",
             n_conv_mode, n_fc_mode, n_lut0, n_lutn);
    checks++; if (n_mem_stall == 0) failures++;
    checks++; if (n_conv_stall == 0) failures++;
    checks++; if (n_wload != 4) failures++;   // 2 groups + 1 + 1
    checks++; if (n_pool_max == 0 || n_pool_avg == 0 || n_pool_off == 0) failures++;
    checks++; if (n_conv_mode == 0 || n_fc_mode == 0) failures++;
    checks++; if (n_lut0 == 0 || n_lutn == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

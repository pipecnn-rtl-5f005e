// tb_lrn_kernel -- normalises a 3x2 pixel, 16-channel volume (VEC_SIZE 4)
// with AlexNet's LRN settings (k = 2, alpha = 1e-4, beta = 0.75, 5 maps).
// The testbench builds the piece-wise linear table itself: entry 0 is the
// chord of f(s) = (k + alpha/5*s)^-beta over [0, 16), entry i >= 1 the chord
// over the i-th quarter-octave segment above 16 (SEG_BITS = 2). Each output
// is checked against the exact v * f(s) to within 0.5 %, the bound the
// approximation is meant to hold, and to within 1e-5 against v * (a*s + b)
// with the entry (a, b) that the segment code of s selects, which pins down
// the table addressing. Memory outside the destination must stay untouched.
module tb_lrn_kernel;
  import pipecnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int V = 4, W = 3, H = 2, CV = 4, C = CV * V, DEPTH = 64;
  localparam real K = 2.0, ALPHA = 1.0e-4, BETA = 0.75;
  localparam int SEG_BASE = (127 + 4) << 2;   // code of 16.0
  logic clk = 0, rst_n = 0;
  lrn_cfg_t cfg;
  logic start, busy, done, lut_we;
  logic [5:0] lut_addr;
  fp32_t lut_slope, lut_icpt;
  logic        rq_v [1], rq_r [1], rs_v [1];
  logic [31:0] rq_a [1];
  logic [31:0] rs_d [1][V];
  logic vw_valid;
  logic [31:0] vw_addr;
  fp32_t vw_data [V];
  int checks = 0, failures = 0;
  real max_err = 0.0;

  always #5 clk = ~clk;

  gmem_model #(.VEC_SIZE(V), .MEM_WORDS(1024), .NRD(1)) u_mem (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .ww_valid(1'b0), .ww_addr(32'h0), .ww_data(32'h0),
    .vw_valid, .vw_addr, .vw_data);

  lrn_kernel #(.VEC_SIZE(V), .MAX_C(32), .LUT_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .cfg, .start, .busy, .done, .lut_we, .lut_addr, .lut_slope, .lut_icpt,
    .rq_valid(rq_v[0]), .rq_ready(rq_r[0]), .rq_addr(rq_a[0]),
    .rs_valid(rs_v[0]), .rs_data(rs_d[0]),
    .vw_valid, .vw_ready(1'b1), .vw_addr, .vw_data);

  function automatic real f(input real s);
    return (K + ALPHA / 5.0 * s) ** (-BETA);
  endfunction

  real ta [DEPTH], tb [DEPTH];   // table as loaded (after rounding to float)

  task automatic load_entry(input int i, input real lo, input real hi);
    real a, b;
    a = (f(hi) - f(lo)) / (hi - lo);
    b = f(lo) - a * lo;
    ta[i] = f2r(r2f(a));
    tb[i] = f2r(r2f(b));
    @(negedge clk);
    lut_we = 1; lut_addr = 6'(i); lut_slope = r2f(a); lut_icpt = r2f(b);
    @(negedge clk);
    lut_we = 0;
  endtask

  function automatic real val(input int c, input int yy, input int xx);
    return f2r(u_mem.mem[((c / V * H + yy) * W + xx) * V + c % V]);
  endfunction

  initial begin
    lut_we = 0; lut_addr = 0; lut_slope = 0; lut_icpt = 0; start = 0; cfg = '0;
    foreach (u_mem.mem[i]) u_mem.mem[i] = 32'h7F7F_7F7F;
    // source volume at vector address 0, destination at vector address 64
    for (int i = 0; i < W * H * C; i++) u_mem.mem[i] = rand_f(-3, 8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_entry(0, 0.0, 16.0);
    for (int i = 1; i < DEPTH; i++) begin
      real lo;
      lo = (2.0 ** real'(4 + (i - 1) / 4)) * (1.0 + real'((i - 1) % 4) / 4.0);
      load_entry(i, lo, lo + (2.0 ** real'(4 + (i - 1) / 4)) / 4.0);
    end
    cfg.in_w = W; cfg.in_h = H; cfg.in_cv = CV;
    cfg.in_base = 0; cfg.out_base = 64; cfg.seg_base = 16'(SEG_BASE);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    for (int yy = 0; yy < H; yy++)
      for (int xx = 0; xx < W; xx++)
        for (int c = 0; c < C; c++) begin
          real s, e, g, err, ep;
          int code, ad;
          s = 0.0;
          for (int d = -2; d <= 2; d++)
            if (c + d >= 0 && c + d < C) s += val(c + d, yy, xx) ** 2;
          e = val(c, yy, xx) * f(s);
          g = f2r(u_mem.mem[64 * V + ((c / V * H + yy) * W + xx) * V + c % V]);
          // the table entry the segment code of s selects, evaluated exactly
          code = int'(r2f(s) >> 21);
          ad = (code < SEG_BASE) ? 0 : (code - SEG_BASE + 1 > DEPTH - 1) ? DEPTH - 1 : code - SEG_BASE + 1;
          ep = val(c, yy, xx) * (ta[ad] * s + tb[ad]);
          checks++;
          if ((g - ep) / ep > 1.0e-5 || (ep - g) / ep > 1.0e-5) begin
            failures++;
            if (failures < 10) $display("c %0d (%0d,%0d): got %g, table entry %0d gives %g", c, yy, xx, g, ad, ep);
          end
          err = (g - e) / e;
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          checks++;
          if (err > 0.005) begin
            failures++;
            if (failures < 10) $display("c %0d (%0d,%0d): got %g exp %g", c, yy, xx, g, e);
          end
        end
    checks++;
    if (u_mem.mem[64 * V - 1] !== 32'h7F7F_7F7F || u_mem.mem[64 * V + W * H * C] !== 32'h7F7F_7F7F) begin
      failures++; $display("write outside destination");
    end
    $display("max relative error %g", max_err);
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

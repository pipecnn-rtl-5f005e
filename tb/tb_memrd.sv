// tb_memrd -- runs the MemRD data mover on a small strided convolution
// (5x5 input, 2 channel planes, K=3, S=2, 4 output maps in 2 groups) and on an
// FC-style batch (K=1), against the behavioural global memory with random
// latency and stalls and random back-pressure from the kernel side. Every
// emitted step is compared with the feature and weight vectors the loop nest
// of the read NDRange says it should carry; also checks the `last` flags and
// that each weight is read from memory exactly once (weight reuse).
module tb_memrd;
  import pipecnn_pkg::*;
  localparam int V = 4, CU = 2;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start, busy;
  logic        rq_v [3], rq_r [3], rs_v [3];
  logic [31:0] rq_a [3];
  logic [31:0] rs_d [3][V];
  logic out_valid, out_ready, out_last;
  fp32_t out_d [V];
  fp32_t out_w [CU][V];
  logic [31:0] vwd [V];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gmem_model #(.VEC_SIZE(V), .MEM_WORDS(8192), .NRD(3)) u_mem (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .ww_valid(1'b0), .ww_addr(32'h0), .ww_data(32'h0),
    .vw_valid(1'b0), .vw_addr(32'h0), .vw_data(vwd));

  memrd #(.VEC_SIZE(V), .CU_NUM(CU), .WBUF_DEPTH(64), .RESP_DEPTH(8)) dut (
    .clk, .rst_n, .cfg, .start, .busy,
    .fr_req_valid(rq_v[0]), .fr_req_ready(rq_r[0]), .fr_req_addr(rq_a[0]),
    .fr_resp_valid(rs_v[0]), .fr_resp_data(rs_d[0]),
    .wr_req_valid(rq_v[1]), .wr_req_ready(rq_r[1]), .wr_req_addr(rq_a[1]),
    .wr_resp_valid(rs_v[1]), .wr_resp_data(rs_d[1]),
    .out_valid, .out_ready, .out_d, .out_w, .out_last);

  assign rq_v[2] = 1'b0;
  assign rq_a[2] = 32'h0;
  assign vwd = '{default: 32'h0};

  // expected step sequence
  int exp_faddr [$];
  int exp_widx  [$];   // j + group*CU*CN  (filter offset added per CU below)
  bit exp_last  [$];
  int cn_q;

  always @(posedge clk) begin
    out_ready <= ($urandom % 3) != 0;
    if (rst_n && out_valid && out_ready) begin
      int fa, wi; bit l;
      checks++;
      if (exp_faddr.size() == 0) begin
        failures++; $display("unexpected step");
      end else begin
        fa = exp_faddr.pop_front(); wi = exp_widx.pop_front(); l = exp_last.pop_front();
        for (int i = 0; i < V; i++)
          if (out_d[i] !== u_mem.mem[fa * V + i]) begin
            failures++; $display("feature mismatch addr %0d lane %0d", fa, i); break;
          end
        for (int c = 0; c < CU; c++)
          for (int i = 0; i < V; i++)
            if (out_w[c][i] !== u_mem.mem[(cfg.w_base + wi + c * cn_q) * V + i]) begin
              failures++; $display("weight mismatch cu %0d wi %0d got %h exp %h", c, wi, out_w[c][i], u_mem.mem[(cfg.w_base + wi + c * cn_q) * V + i]); break;
            end
        if (out_last !== l) begin failures++; $display("last flag"); end
      end
    end
  end

  task automatic run(input int w, h, cv, k, s, m);
    int cw, ch, wreads0;
    cw = (w - k) / s + 1; ch = (h - k) / s + 1;
    cn_q = k * k * cv;
    cfg = '0;
    cfg.in_w = DIM_W'(w); cfg.in_h = DIM_W'(h); cfg.in_cv = DIM_W'(cv);
    cfg.k = 8'(k); cfg.s = 8'(s); cfg.conv_w = DIM_W'(cw); cfg.conv_h = DIM_W'(ch);
    cfg.out_m = DIM_W'(m); cfg.in_base = 32'd0; cfg.w_base = 32'd1024;
    for (int g = 0; g < m / CU; g++)
      for (int oy = 0; oy < ch; oy++)
        for (int ox = 0; ox < cw; ox++)
          for (int c = 0; c < cv; c++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                exp_faddr.push_back((c * h + oy * s + ky) * w + ox * s + kx);
                exp_widx.push_back(g * CU * cn_q + (c * k + ky) * k + kx);
                exp_last.push_back(c == cv - 1 && ky == k - 1 && kx == k - 1);
              end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks++;
    if (exp_faddr.size() != 0) begin failures++; $display("%0d steps missing", exp_faddr.size()); end
  endtask

  initial begin
    int r0;
    foreach (u_mem.mem[i]) u_mem.mem[i] = $urandom;
    start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    r0 = u_mem.reads;
    run(5, 5, 2, 3, 2, 4);
    // feature reads: 2 groups * 4 positions * 18; weight reads: 4 filters * 18
    checks++;
    if (u_mem.reads - r0 != 2 * 4 * 18 + 4 * 18) begin failures++; $display("reads %0d", u_mem.reads - r0); end
    run(4, 2, 3, 1, 1, 2);   // FC batch of 8 images of 12 inputs, 2 outputs
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

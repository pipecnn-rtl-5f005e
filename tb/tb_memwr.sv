// tb_memwr -- feeds MemWR with 3x2 positions of 2 groups of 4 maps (VEC_SIZE
// 2, so each group spans two vector planes), then a pooled-size plane, and
// checks every word landed at its vector-plane address in the behavioural
// memory, that nothing else was written, that `done` pulses once per run and
// that each position takes CU_NUM write cycles.
module tb_memwr;
  import pipecnn_pkg::*;
  localparam int V = 2, CU = 4;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start, busy, done, in_valid, in_ready, ww_valid;
  fp32_t in_data [CU], ww_data;
  logic [31:0] ww_addr;
  logic        rq_v [1], rq_r [1], rs_v [1];
  logic [31:0] rq_a [1];
  logic [31:0] rs_d [1][V];
  logic [31:0] vwd [V];
  int checks = 0, failures = 0, dones = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (done) dones <= dones + 1;
  end

  gmem_model #(.VEC_SIZE(V), .MEM_WORDS(1024), .NRD(1)) u_mem (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .ww_valid, .ww_addr, .ww_data,
    .vw_valid(1'b0), .vw_addr(32'h0), .vw_data(vwd));

  memwr #(.VEC_SIZE(V), .CU_NUM(CU)) dut (.*, .ww_ready(1'b1));

  assign rq_v[0] = 1'b0;
  assign rq_a[0] = 32'h0;
  assign vwd = '{default: 32'h0};

  task automatic run(input int ow, oh, m, input bit pooled, input int base);
    longint t0;
    int d0;
    cfg = '0;
    cfg.conv_w = DIM_W'(pooled ? 99 : ow); cfg.conv_h = DIM_W'(pooled ? 99 : oh);
    cfg.pool_on = pooled; cfg.pool_w = DIM_W'(ow); cfg.pool_h = DIM_W'(oh);
    cfg.out_m = DIM_W'(m); cfg.out_base = 32'(base);
    foreach (u_mem.mem[i]) u_mem.mem[i] = 32'hDEAD_BEEF;
    d0 = dones;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < m / CU; g++)
      for (int yy = 0; yy < oh; yy++)
        for (int xx = 0; xx < ow; xx++) begin
          in_valid = 1;
          for (int c = 0; c < CU; c++) in_data[c] = 32'((g * CU + c) << 16 | yy << 8 | xx);
          t0 = cyc;
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          checks++;
          if (cyc - t0 != CU) begin failures++; $display("position took %0d cycles", cyc - t0); end
        end
    in_valid = 0;
    repeat (3) @(negedge clk);
    for (int mm = 0; mm < m; mm++)
      for (int yy = 0; yy < oh; yy++)
        for (int xx = 0; xx < ow; xx++) begin
          int a;
          a = base + ((mm / V) * oh + yy) * ow * V + xx * V + mm % V;
          checks++;
          if (u_mem.mem[a] !== 32'(mm << 16 | yy << 8 | xx)) begin
            failures++; $display("addr %0d got %h", a, u_mem.mem[a]);
          end
          u_mem.mem[a] = 32'hDEAD_BEEF;
        end
    checks++;
    foreach (u_mem.mem[i]) if (u_mem.mem[i] !== 32'hDEAD_BEEF) begin
      failures++; $display("stray write at %0d", i); break;
    end
    checks++;
    if (dones - d0 != 1 || busy) begin failures++; $display("done pulses %0d", dones - d0); end
  endtask

  initial begin
    start = 0; in_valid = 0; cfg = '0;
    foreach (in_data[c]) in_data[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 2, 8, 0, 100);
    run(2, 2, 4, 1, 7);
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

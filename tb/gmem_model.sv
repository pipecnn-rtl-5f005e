// gmem_model -- behavioural model of the off-chip global memory (DDR3 behind
// a memory controller); not synthesizable, for the testbenches only.
//
// A word array `mem` of MEM_WORDS 32-bit words, which testbenches fill and
// inspect hierarchically. NRD vector read ports: a request (valid/ready,
// vector address) returns the VEC_SIZE words at address*VEC_SIZE, in order,
// LAT_MIN..LAT_MAX cycles later; when STALLS is set, request ready drops at
// random. Requests and writes are ignored while rst_n is low; the
// testbench fills `mem` before use. One word write port (word address) and one vector write port
// (vector address), both always ready.
module gmem_model #(
  parameter int VEC_SIZE  = 8,
  parameter int MEM_WORDS = 65536,
  parameter int NRD       = 3,
  parameter int LAT_MIN   = 2,
  parameter int LAT_MAX   = 12,
  parameter bit STALLS    = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req_valid  [NRD],
  output logic        rd_req_ready  [NRD],
  input  logic [31:0] rd_req_addr   [NRD],
  output logic        rd_resp_valid [NRD],
  output logic [31:0] rd_resp_data  [NRD][VEC_SIZE],
  input  logic        ww_valid,
  input  logic [31:0] ww_addr,
  input  logic [31:0] ww_data,
  input  logic        vw_valid,
  input  logic [31:0] vw_addr,
  input  logic [31:0] vw_data [VEC_SIZE]
);
  logic [31:0] mem [MEM_WORDS];
  longint cyc = 0;
  longint q_time [NRD][$];
  logic [31:0] q_addr [NRD][$];
  longint last_t [NRD];
  int reads = 0, word_writes = 0, vec_writes = 0;

  initial begin
    foreach (last_t[p]) last_t[p] = 0;
    foreach (rd_req_ready[p]) rd_req_ready[p] = 1'b1;
    foreach (rd_resp_valid[p]) rd_resp_valid[p] = 1'b0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ww_valid) begin
      mem[ww_addr % MEM_WORDS] <= ww_data;
      word_writes++;
    end
    if (rst_n && vw_valid) begin
      for (int i = 0; i < VEC_SIZE; i++) mem[(vw_addr * VEC_SIZE + i) % MEM_WORDS] <= vw_data[i];
      vec_writes++;
    end
    for (int p = 0; p < NRD; p++) begin
      if (rst_n && rd_req_valid[p] && rd_req_ready[p]) begin
        longint t;
        t = cyc + LAT_MIN + longint'($urandom % (LAT_MAX - LAT_MIN + 1));
        if (t <= last_t[p]) t = last_t[p] + 1;
        last_t[p] = t;
        q_time[p].push_back(t);
        q_addr[p].push_back(rd_req_addr[p]);
        reads++;
      end
      rd_resp_valid[p] <= 1'b0;
      if (q_time[p].size() > 0 && q_time[p][0] <= cyc) begin
        logic [31:0] a;
        a = q_addr[p].pop_front();
        void'(q_time[p].pop_front());
        rd_resp_valid[p] <= 1'b1;
        for (int i = 0; i < VEC_SIZE; i++) rd_resp_data[p][i] <= mem[(a * VEC_SIZE + i) % MEM_WORDS];
      end
      rd_req_ready[p] <= STALLS ? (($urandom % 4) != 0) : 1'b1;
    end
  end
endmodule

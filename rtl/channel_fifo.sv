// channel_fifo -- a kernel-to-kernel channel ("pipe") as used between the
// data movers, the convolution kernel and the pooling kernel.
//
// A synchronous first-in first-out buffer of DEPTH entries of WIDTH bits with
// a valid/ready handshake on both sides. A write that finds the channel full
// and a read that finds it empty block the kernel (ready / valid low), which is
// what stalls the pipeline. Data written in cycle t can be read in cycle t+1;
// a full channel accepts a write in the same cycle as a read. The channel
// semantics follow the design; the depth and the handshake are this design's
// choice.
module channel_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count;
  logic             push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != (AW+1)'(DEPTH)) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  // a value offered to the channel stays offered until taken
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid && !in_ready |=> in_valid);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (AW+1)'(DEPTH));
endmodule

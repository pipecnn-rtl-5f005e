// tb_channel_fifo -- random producer and consumer on a channel; checks that
// every word comes out once, in order, that a full channel refuses writes
// and that a steady stream passes at one word per cycle.
module tb_channel_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  int sent = 0, recvd = 0, full_seen = 0;
  int mode = 0;

  channel_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) sent <= sent + 1;
      if (out_valid && out_ready) begin
        recvd <= recvd + 1;
        checks <= checks + 1;
        if (out_data != W'(recvd * 7 + 3)) begin
          failures <= failures + 1;
          $display("MISMATCH word %0d got %h", recvd, out_data);
        end
      end
      if (in_valid && !in_ready) full_seen <= full_seen + 1;
    end
  end

  always_comb begin
    in_data = W'(sent * 7 + 3);
  end

  initial begin
    int t0;
    in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random phase
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) in_valid = ($urandom % 3) != 0;
      out_ready = ($urandom % 3) == 0;
    end
    // stall consumer: channel must fill to exactly D words
    @(negedge clk); in_valid = 1; out_ready = 0;
    repeat (D + 3) @(negedge clk);
    checks++;
    if (sent - recvd != D) begin failures++; $display("occupancy %0d", sent - recvd); end
    // streaming phase: one word per cycle
    out_ready = 1;
    t0 = recvd;
    repeat (100) @(negedge clk);
    checks++;
    if (recvd - t0 != 100) begin failures++; $display("rate %0d/100", recvd - t0); end
    in_valid = 0;
    repeat (D + 2) @(negedge clk);
    checks++;
    if (sent != recvd) failures++;
    checks++;
    if (full_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

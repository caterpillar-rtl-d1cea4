// tb_ring_link: streams 2000 numbered beats through a ring link with random
// valid at the input and random ready at the output. Checks order and
// content (no loss, no duplication), the one-cycle hop latency when the
// output is always ready, and full throughput in that case.
module tb_ring_link;
  localparam int W = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  int sent = 0, rcvd = 0;
  bit rand_mode = 1;

  ring_link #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer and consumer change their signals at the negative edge
  always @(negedge clk) if (rst_n) begin
    if (rand_mode) begin
      in_valid  <= (sent < 2000) && 1'($urandom);
      out_ready <= 1'($urandom);
    end else begin
      in_valid  <= (sent < 2100);
      out_ready <= 1'b1;
    end
    in_data <= W'(sent);
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) sent <= sent + 1;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != W'(rcvd)) begin
        failures++;
        if (failures < 10) $display("FAIL beat %0d got %0d", rcvd, out_data);
      end
      rcvd <= rcvd + 1;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (rcvd == 2000);
    @(negedge clk);
    rand_mode = 0;
    // full-throughput phase: 100 beats in about 100 cycles, latency one cycle
    begin
      int t0;
      t0 = 0;
      repeat (20) @(posedge clk);
      t0 = rcvd;
      repeat (50) @(posedge clk);
      checks++;
      if (rcvd - t0 != 50) begin failures++; $display("FAIL throughput %0d in 50 cycles", rcvd - t0); end
      checks++;
      if (sent - rcvd != 1) begin failures++; $display("FAIL latency: %0d in flight", sent - rcvd); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

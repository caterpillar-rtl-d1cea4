// tb_pe_sram: writes a pseudo-random pattern into a small bank, reads it back
// with the one-cycle read latency, checks read-during-write returns the old
// word, and checks that rdata holds its value while re is low.
module tb_pe_sram;
  localparam int DEPTH = 64;
  logic clk = 0;
  logic re = 0, we = 0;
  logic [5:0] raddr = 0, waddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  pe_sram #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [15:0] expv, input string what);
    checks++;
    if (rdata !== expv) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, expv);
    end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = 16'(i * 16'h9E37 + 16'h1234);
    // write all
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = model[i];
    end
    @(negedge clk); we = 0;
    // read all
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      re = 1; raddr = 6'(DEPTH - 1 - i);
      @(negedge clk);
      re = 0;
      chk(model[DEPTH-1-i], "read");
    end
    // read during write to the same address: old value
    @(negedge clk);
    re = 1; raddr = 6'd7; we = 1; waddr = 6'd7; wdata = 16'hBEEF;
    @(negedge clk);
    re = 0; we = 0;
    chk(model[7], "read-during-write");
    @(negedge clk);
    chk(model[7], "hold");
    re = 1;
    @(negedge clk);
    re = 0;
    chk(16'hBEEF, "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spad: fills a small SPAD through the host port, reads it through the
// core port, writes through the core port and reads through the host port,
// and checks that a simultaneous write of the same line from both ports keeps
// the core's data. Expected values come from a testbench array.
module tb_spad;
  localparam int NR = 4, LINES = 32;
  logic clk = 0;
  logic c_re = 0, c_we = 0, h_en = 0, h_we = 0;
  logic [4:0] c_raddr = 0, c_waddr = 0, h_addr = 0;
  logic [NR-1:0][15:0] c_rdata, c_wdata = '0, h_wdata = '0, h_rdata;
  logic [NR*16-1:0] model [LINES];
  int checks = 0, failures = 0;

  spad #(.NR(NR), .LINES(LINES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [NR*16-1:0] got, expv, input string what);
    checks++;
    if (got !== expv) begin failures++; $display("FAIL %s: %h vs %h", what, got, expv); end
  endtask

  initial begin
    for (int i = 0; i < LINES; i++) model[i] = {$urandom, $urandom};
    for (int i = 0; i < LINES; i++) begin
      @(negedge clk); h_en = 1; h_we = 1; h_addr = 5'(i); h_wdata = model[i];
    end
    @(negedge clk); h_en = 0; h_we = 0;
    for (int i = 0; i < LINES; i++) begin
      @(negedge clk); c_re = 1; c_raddr = 5'(i);
      @(negedge clk); c_re = 0; chk(c_rdata, model[i], "core read");
    end
    for (int i = 0; i < LINES; i += 3) begin
      model[i] = ~model[i];
      @(negedge clk); c_we = 1; c_waddr = 5'(i); c_wdata = model[i];
    end
    @(negedge clk); c_we = 0;
    for (int i = 0; i < LINES; i++) begin
      @(negedge clk); h_en = 1; h_addr = 5'(i);
      @(negedge clk); h_en = 0; chk(h_rdata, model[i], "host read");
    end
    @(negedge clk); c_we = 1; c_waddr = 9; c_wdata = 64'h1111; h_en = 1; h_we = 1; h_addr = 9; h_wdata = 64'h2222;
    @(negedge clk); c_we = 0; h_we = 0; h_en = 1; h_addr = 9;
    @(negedge clk); h_en = 0; chk(h_rdata, 64'h1111, "write collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

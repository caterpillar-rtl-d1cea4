// tb_bcast_bus: drives each single PE, the external source, no driver and
// random single drivers onto an 8-PE bus and checks the bus value and the
// conflict flag against the expected driver.
module tb_bcast_bus;
  import cat_pkg::*;
  localparam int N = 8;
  logic [N-1:0] drv;
  fp16_t data [N];
  logic ext_en;
  fp16_t ext_data, bus;
  logic conflict;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bcast_bus #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input fp16_t expv, input logic expc);
    #1;
    checks++;
    if (bus !== expv || conflict !== expc) begin
      failures++;
      $display("FAIL drv=%b ext=%b bus=%h exp %h conflict=%b exp %b", drv, ext_en, bus, expv, conflict, expc);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) data[i] = 16'(16'h1111 * (i + 1));
    ext_data = 16'hABCD;
    ext_en = 0; drv = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    chk(16'h0000, 1'b0);
    for (int i = 0; i < N; i++) begin
      drv = N'(1) << i;
      chk(16'(16'h1111 * (i + 1)), 1'b0);
    end
    drv = '0; ext_en = 1;
    chk(16'hABCD, 1'b0);
    ext_en = 0;
    for (int t = 0; t < 200; t++) begin
      int k;
      k = int'($urandom % N);
      for (int i = 0; i < N; i++) data[i] = 16'($urandom);
      drv = N'(1) << k;
      chk(data[k], 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

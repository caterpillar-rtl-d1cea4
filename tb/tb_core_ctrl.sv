// tb_core_ctrl: checks the micro-operation stream of the core controller
// (NR = 4) against loop nests written out independently here: GEMV_FWD
// (3 x 2 blocks), GEMV_BWD and UPDATE address orders, LOAD column/address
// and SPAD read addresses, STORE's delayed SPAD write, and a RING_RECV that
// must stall while no ring data is offered and a RING_SEND that must stall
// while the output FIFO reports no room.
module tb_core_ctrl;
  import cat_pkg::*;
  localparam int NR = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  pe_ctrl_t pc;
  logic spad_re, spad_we, row_from_spad, ring_in_valid = 0, ring_in_ready, row_from_ring, ring_push, stall;
  logic [SPAD_AW-1:0] spad_raddr, spad_waddr;
  logic [2:0] ring_out_free = 3'd4;
  int checks = 0, failures = 0;

  core_ctrl #(.NR(NR)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .pe_ctrl(pc),
    .spad_re, .spad_raddr, .spad_we, .spad_waddr, .row_from_spad, .ring_in_valid, .ring_in_ready,
    .row_from_ring, .ring_out_free, .ring_push, .stall);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, expv);
    end
  endtask

  task automatic start(input cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;   // now in the first issue cycle
  endtask

  // check the micro-op present in this cycle, then advance one cycle
  task automatic expect_op(input pe_op_e op, input int a, b, w, sel, first);
    chk(int'(pc.op), int'(op), "op");
    if (op inside {PE_MAC_FWD, PE_MAC_BWD, PE_UPD}) chk(int'(pc.addr_a), a, "addr_a");
    if (op inside {PE_MAC_FWD, PE_MAC_BWD, PE_UPD, PE_LATCH_X}) chk(int'(pc.addr_b), b, "addr_b");
    if (op inside {PE_WB, PE_UPD, PE_LD}) chk(int'(pc.waddr), w, "waddr");
    if (op inside {PE_RED_COL, PE_RED_ROW, PE_LD, PE_ST}) chk(int'(pc.sel), sel, "sel");
    if (op inside {PE_MAC_FWD, PE_MAC_BWD}) chk(int'(pc.first), first, "first");
    @(negedge clk);
  endtask

  cmd_t c;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // GEMV_FWD nin=2, nout=3
    c = '0; c.op = CMD_GEMV_FWD; c.w_base = 10; c.x_base = 20; c.y_base = 30; c.nin = 2; c.nout = 3;
    start(c);
    for (int ob = 0; ob < 3; ob++) begin
      for (int ib = 0; ib < 2; ib++) expect_op(PE_MAC_FWD, 10 + ib * 3 + ob, 20 + ib, 0, 0, ib == 0);
      for (int s = 0; s < NR - 1; s++) expect_op(PE_RED_COL, 0, 0, 0, s, 0);
      expect_op(PE_WB, 0, 0, 30 + ob, 0, 0);
    end
    chk(int'(pc.op), int'(PE_NOP), "drain");
    chk(int'(busy), 1, "busy in drain");
    @(negedge clk);
    chk(int'(busy), 0, "idle");
    // GEMV_BWD nin=2 (output blocks), nout=3
    c.op = CMD_GEMV_BWD; c.z_base = 40;
    start(c);
    for (int ob = 0; ob < 2; ob++) begin
      for (int ib = 0; ib < 3; ib++) expect_op(PE_MAC_BWD, 10 + ob * 3 + ib, 20 + ib, 0, 0, ib == 0);
      for (int s = 0; s < NR - 1; s++) expect_op(PE_RED_ROW, 0, 0, 0, s, 0);
      chk(int'(pc.addr_b), 40 + ob, "mask address");
      expect_op(PE_WB, 0, 0, 30 + ob, 0, 0);
    end
    // UPDATE
    c.op = CMD_UPDATE; c.x_base = 50;
    start(c);
    for (int ob = 0; ob < 2; ob++) begin
      expect_op(PE_LATCH_X, 0, 50 + ob, 0, 0, 0);
      for (int ib = 0; ib < 3; ib++) expect_op(PE_UPD, 10 + ob * 3 + ib, 40 + ib, 10 + ob * 3 + ib, 0, 0);
    end
    // LOAD 6 lines from SPAD 100 into PE address 5..
    c = '0; c.op = CMD_LOAD; c.spad_addr = 100; c.y_base = 5; c.count = 6;
    start(c);
    for (int t = 0; t < 6; t++) begin
      chk(int'(spad_re), 1, "spad_re");
      chk(int'(spad_raddr), 100 + t, "spad_raddr");
      if (t > 0) chk(int'(row_from_spad), 1, "row_from_spad");
      expect_op(PE_LD, 0, 0, 5 + t / NR, t % NR, 0);
    end
    // STORE: SPAD write one cycle after each issue
    c = '0; c.op = CMD_STORE; c.spad_addr = 200; c.y_base = 1; c.count = 3;
    start(c);
    for (int t = 0; t < 3; t++) begin
      if (t > 0) begin chk(int'(spad_we), 1, "spad_we"); chk(int'(spad_waddr), 200 + t - 1, "spad_waddr"); end
      expect_op(PE_ST, 0, 0, 0, t, 0);
    end
    chk(int'(spad_we), 1, "last spad_we");
    chk(int'(spad_waddr), 202, "last spad_waddr");
    // RING_RECV: no data for 3 cycles -> 3 stall cycles
    c = '0; c.op = CMD_RING_RECV; c.y_base = 7; c.count = 2;
    start(c);
    for (int i = 0; i < 3; i++) begin
      chk(int'(stall), 1, "recv stall");
      chk(int'(ring_in_ready), 0, "no ready while stalled");
      chk(int'(pc.op), int'(PE_NOP), "nop while stalled");
      @(negedge clk);
    end
    ring_in_valid = 1; #1;
    chk(int'(ring_in_ready), 1, "ready");
    expect_op(PE_RING_IN, 0, 0, 7, 0, 0);
    chk(int'(row_from_ring), 1, "row_from_ring");
    expect_op(PE_RING_IN, 0, 0, 8, 0, 0);
    ring_in_valid = 0;
    // RING_SEND with no room: stalls until free
    ring_out_free = 0;
    c = '0; c.op = CMD_RING_SEND; c.x_base = 3; c.count = 1;
    start(c);
    chk(int'(stall), 1, "send stall");
    @(negedge clk);
    chk(int'(stall), 1, "send stall 2");
    ring_out_free = 2; #1;
    chk(int'(pc.op), int'(PE_RING_OUT), "send issues");
    chk(int'(pc.addr_b), 3, "send address");
    @(negedge clk);
    chk(int'(ring_push), 1, "push in stage 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

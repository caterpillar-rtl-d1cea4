// tb_pe: exercises one off-diagonal PE (row 1, column 2) and one diagonal PE
// (row 2, column 2) of a 4 x 4 core with every micro-operation, driving the
// buses from the testbench. Expected values come from fp16_ref_pkg: MAC
// chains, the reduction add, ReLU and ReLU'-masked write-back, scaling, weight
// update and ring receive with add, plus the bus-drive decode (who drives
// which bus in which reduction step) and load/store through the row bus.
module tb_pe;
  import cat_pkg::*;
  import fp16_ref_pkg::*;

  localparam int NR = 4;
  logic clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  fp16_t rb_o, rb_d, cb;              // buses seen by the off-diagonal / diagonal PE
  logic  o_rdrv, o_cdrv, d_rdrv, d_cdrv;
  fp16_t o_rout, o_cout, d_rout, d_cout;
  int checks = 0, failures = 0;

  pe #(.NR(NR), .MEMA_DEPTH(16), .MEMB_DEPTH(16)) u_off (
    .clk, .rst_n, .my_row(8'd1), .my_col(8'd2), .ctrl, .row_bus(rb_o), .col_bus(cb),
    .row_drv(o_rdrv), .row_out(o_rout), .col_drv(o_cdrv), .col_out(o_cout));
  pe #(.NR(NR), .MEMA_DEPTH(16), .MEMB_DEPTH(16)) u_dia (
    .clk, .rst_n, .my_row(8'd2), .my_col(8'd2), .ctrl, .row_bus(rb_d), .col_bus(cb),
    .row_drv(d_rdrv), .row_out(d_rout), .col_drv(d_cdrv), .col_out(d_cout));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [15:0] got, expv, input string what);
    checks++;
    if (got !== expv) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, expv);
    end
  endtask

  function automatic pe_ctrl_t mk(pe_op_e op);
    pe_ctrl_t c;
    c = '0;
    c.op = op;
    return c;
  endfunction

  // issue one micro-operation, present the buses in its stage 1
  task automatic step(input pe_ctrl_t c, input fp16_t rbo, rbd, cbv);
    @(negedge clk);
    ctrl = c;
    @(negedge clk);
    ctrl = mk(PE_NOP);
    rb_o = rbo; rb_d = rbd; cb = cbv;
    #1;
  endtask

  fp16_t w [4], x [4], accr, d, h, v;
  pe_ctrl_t c;

  initial begin
    ctrl = mk(PE_NOP); rb_o = 0; rb_d = 0; cb = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      w[i] = rand_fp16(-3, 3);
      x[i] = rand_fp16(-3, 3);
    end
    // load weights into MEM A of column 2 (both PEs), x into diag MEM B
    for (int i = 0; i < 4; i++) begin
      c = mk(PE_LD); c.sel = 8'd2; c.waddr = PE_AW'(i); c.mem_b = 0;
      step(c, w[i], w[i], 0);
      c = mk(PE_LD); c.sel = 8'd2; c.waddr = PE_AW'(i); c.mem_b = 1;
      step(c, 16'h0, x[i], 0);
    end
    // column select: column 3 load must not write column 2
    c = mk(PE_LD); c.sel = 8'd3; c.waddr = 0; step(c, 16'h1234, 16'h1234, 0);
    // store back: PE in column 2 drives its row bus with MEM A[i]
    for (int i = 0; i < 4; i++) begin
      c = mk(PE_ST); c.sel = 8'd2; c.addr_a = PE_AW'(i);
      step(c, 0, 0, 0);
      chk({15'd0, o_rdrv}, 16'd1, "st drive");
      chk(o_rout, w[i], "st data");
    end
    c = mk(PE_ST); c.sel = 8'd1; step(c, 0, 0, 0);
    chk({15'd0, o_rdrv}, 16'd0, "st other column");
    // MAC_FWD chain: diag drives row bus with x; off-diag uses the bus value
    accr = 16'h0;
    for (int i = 0; i < 4; i++) begin
      c = mk(PE_MAC_FWD); c.addr_a = PE_AW'(i); c.addr_b = PE_AW'(i); c.first = (i == 0);
      step(c, x[i], x[i], 0);
      chk({15'd0, d_rdrv}, 16'd1, "diag drives row");
      chk(d_rout, x[i], "diag row value");
      chk({15'd0, o_rdrv}, 16'd0, "off-diag silent");
      accr = fma_ref(x[i], w[i], (i == 0) ? 16'h0 : accr);
    end
    // reduction: off-diag (row 1, col 2) drives at step s with 1 == (2+1+s)%4 -> s = 2
    for (int s = 0; s < 3; s++) begin
      c = mk(PE_RED_COL); c.sel = 8'(s);
      d = rand_fp16(-3, 3);
      step(c, 0, 0, (s == 2) ? o_cout : d);
      chk({15'd0, o_cdrv}, (s == 2) ? 16'd1 : 16'd0, "reduction turn");
      if (s == 2) chk(o_cout, accr, "off-diag partial sum");
      chk({15'd0, d_cdrv}, 16'd0, "diag never drives in reduction");
      // diag accumulated the same chain (same x, w) then adds the bus
      if (s == 2) v = cb;
    end
    // diag acc = ((accr + d0) + d1) + accr : recompute by write-back with no relu
    c = mk(PE_WB); c.waddr = 8; step(c, 0, 0, 0);
    chk({15'd0, d_rdrv}, 16'd1, "wb drives row");
    h = d_rout;
    c = mk(PE_ST); c.sel = 2; c.mem_b = 1; c.addr_b = 8; step(c, 0, 0, 0);
    chk(d_rout, h, "wb stored");
    // ReLU write-back of a negative value, and ReLU' mask
    c = mk(PE_LD); c.sel = 2; c.mem_b = 1; c.waddr = 9; step(c, 0, 16'hC000, 0);  // -2
    c = mk(PE_LD); c.sel = 2; c.mem_b = 1; c.waddr = 10; step(c, 0, 16'h3800, 0); // 0.5
    c = mk(PE_RING_IN); c.waddr = 11; c.addr_b = 9; c.add = 1; c.relu = 1;
    step(c, 0, 16'h3C00, 0);                      // relu(-2 + 1) = 0
    c = mk(PE_ST); c.sel = 2; c.mem_b = 1; c.addr_b = 11; step(c, 0, 0, 0);
    chk(d_rout, 16'h0000, "ring-in add relu");
    c = mk(PE_RING_IN); c.waddr = 12; c.addr_b = 10; c.add = 1;
    step(c, 0, 16'h3C00, 0);                      // 0.5 + 1 = 1.5
    c = mk(PE_ST); c.sel = 2; c.mem_b = 1; c.addr_b = 12; step(c, 0, 0, 0);
    chk(d_rout, 16'h3E00, "ring-in add");
    // MAC_BWD: diag drives column bus with MEMB; then dmask write-back
    c = mk(PE_MAC_BWD); c.addr_a = 0; c.addr_b = 10; c.first = 1;   // acc = 0.5 * w0
    step(c, 0, 0, 16'h3800);
    chk({15'd0, d_cdrv}, 16'd1, "bwd diag drives col");
    chk(d_cout, 16'h3800, "bwd col value");
    c = mk(PE_WB); c.waddr = 13; c.addr_b = 9; c.dmask = 1; step(c, 0, 0, 0);  // h=-2 -> 0
    chk(d_rout, 16'h0000, "dmask zero");
    c = mk(PE_WB); c.waddr = 13; c.addr_b = 10; c.dmask = 1; step(c, 0, 0, 0); // h=0.5 -> keep
    chk(d_rout, fma_ref(16'h3800, w[0], 16'h0), "dmask keep");
    // SCALE on diag
    c = mk(PE_SCALE); c.addr_b = 12; c.waddr = 14; c.eta = 16'hB400;          // 1.5 * -0.25
    step(c, 0, 0, 0);
    c = mk(PE_ST); c.sel = 2; c.mem_b = 1; c.addr_b = 14; step(c, 0, 0, 0);
    chk(d_rout, 16'hB600, "scale");
    // LATCH_X + UPD on off-diag: w1 += x * d
    v = rand_fp16(-2, 2); d = rand_fp16(-2, 2);
    c = mk(PE_LATCH_X); step(c, v, v, 0);
    c = mk(PE_UPD); c.addr_a = 1; c.waddr = 1; step(c, 0, 0, d);
    c = mk(PE_ST); c.sel = 2; c.addr_a = 1; step(c, 0, 0, 0);
    chk(o_rout, fma_ref(v, d, w[1]), "update");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

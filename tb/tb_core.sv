// tb_core: one 4 x 4 core with a small SPAD runs a layer end to end.
// The host port fills the SPAD with an 8 x 8 weight matrix W, an input x and
// an error vector d (random binary16); the core then
//   LOADs them into the PEs, runs GEMV_FWD with ReLU, GEMV_BWD with the ReLU'
//   mask of x, SCALE and UPDATE, and STOREs the results back to the SPAD,
//   SENDs x over the ring (with random backpressure) and RECVs a vector with
//   add + ReLU (with random gaps in the input).
// Every result is compared with a model that applies fp16_ref_pkg::fma_ref in
// the order the hardware sums (per-PE chains, then the diagonal reduction
// order), and the cycle count of each GEMV/UPDATE command is compared with
// the issue-count formula of core_ctrl. Stalls must occur during the ring
// phase.
module tb_core;
  import cat_pkg::*;
  import fp16_ref_pkg::*;

  localparam int NR = 4, NB = 2, N = NR * NB;   // 8 x 8 layer
  localparam int LINES = 256;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy, stall, bus_conflict;
  cmd_t cmd;
  logic s_re, s_we;
  logic [SPAD_AW-1:0] s_raddr, s_waddr;
  logic [NR-1:0][15:0] s_rdata, s_wdata;
  logic h_en = 0, h_we = 0;
  logic [7:0] h_addr = 0;
  logic [NR-1:0][15:0] h_wdata = '0, h_rdata;
  logic ri_valid = 0, ri_ready, ro_valid, ro_ready = 0;
  logic [NR-1:0][15:0] ri_data = '0, ro_data;
  int checks = 0, failures = 0, stalls = 0;

  core #(.NR(NR), .MEMA_DEPTH(64), .MEMB_DEPTH(64)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .stall, .bus_conflict,
    .spad_re(s_re), .spad_raddr(s_raddr), .spad_rdata(s_rdata),
    .spad_we(s_we), .spad_waddr(s_waddr), .spad_wdata(s_wdata),
    .ring_in_valid(ri_valid), .ring_in_ready(ri_ready), .ring_in_data(ri_data),
    .ring_out_valid(ro_valid), .ring_out_ready(ro_ready), .ring_out_data(ro_data));

  spad #(.NR(NR), .LINES(LINES)) u_spad (
    .clk, .c_re(s_re), .c_raddr(s_raddr[7:0]), .c_rdata(s_rdata),
    .c_we(s_we), .c_waddr(s_waddr[7:0]), .c_wdata(s_wdata),
    .h_en, .h_we, .h_addr, .h_wdata, .h_rdata);

  always #5 clk = ~clk;
  always @(posedge clk) if (stall) stalls++;
  always @(posedge clk) if (rst_n && bus_conflict) begin failures++; $display("FAIL bus conflict"); end

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
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, expv);
    end
  endtask

  task automatic hwrite(input int a, input logic [NR-1:0][15:0] d);
    @(negedge clk); h_en = 1; h_we = 1; h_addr = 8'(a); h_wdata = d;
    @(negedge clk); h_en = 0; h_we = 0;
  endtask
  task automatic hread(input int a, output logic [NR-1:0][15:0] d);
    @(negedge clk); h_en = 1; h_we = 0; h_addr = 8'(a);
    @(negedge clk); h_en = 0; d = h_rdata;
  endtask

  // issue a command; cyc counts the cycles from the one in which it is accepted
  // to the first one in which busy is low (issue count + 2 without stalls)
  task automatic run(input cmd_t c, output int cyc);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
  endtask

  function automatic cmd_t blank(cmd_op_e op);
    cmd_t c;
    c = '0; c.op = op;
    return c;
  endfunction

  fp16_t W [N][N], Wn [N][N], x [N], d [N], z [N], y [N], din [N], rin [N];
  fp16_t part [NR];
  logic [NR-1:0][15:0] line;
  cmd_t c;
  int cyc;

  // SPAD layout used by the test
  localparam int SP_W = 0, SP_X = 16, SP_D = 24, SP_Y = 32, SP_DI = 40, SP_WO = 48;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) begin
      x[j] = rand_fp16(-2, 2);
      d[j] = rand_fp16(-2, 2);
      for (int k = 0; k < N; k++) W[j][k] = rand_fp16(-3, 1);
    end
    // weight lines: line t -> column t%NR, PE address t/NR; lane r = W(j,k)
    for (int t = 0; t < NR * NB * NB; t++) begin
      int col, a;
      col = t % NR; a = t / NR;
      for (int r = 0; r < NR; r++) line[r] = W[(a / NB) * NR + r][(a % NB) * NR + col];
      hwrite(SP_W + t, line);
    end
    // vectors: element i in diag PE(i%NR) at base + i/NR -> line i, lane i%NR
    for (int i = 0; i < N; i++) begin
      line = '0; line[i % NR] = x[i]; hwrite(SP_X + i, line);
      line = '0; line[i % NR] = d[i]; hwrite(SP_D + i, line);
    end
    // ---- LOAD -------------------------------------------------------------
    c = blank(CMD_LOAD); c.spad_addr = SP_W; c.y_base = 0; c.count = NR * NB * NB; c.mem_b = 0;
    run(c, cyc); chk(16'(cyc), 16'(NR * NB * NB + 2), "load cycles");
    c = blank(CMD_LOAD); c.spad_addr = SP_X; c.y_base = 0; c.count = N; c.mem_b = 1; run(c, cyc);
    c = blank(CMD_LOAD); c.spad_addr = SP_D; c.y_base = 4; c.count = N; c.mem_b = 1; run(c, cyc);
    // ---- GEMV_FWD with ReLU: y = relu(x^T W) -------------------------------
    c = blank(CMD_GEMV_FWD); c.w_base = 0; c.x_base = 0; c.y_base = 8; c.nin = NB; c.nout = NB; c.relu = 1;
    run(c, cyc);
    chk(16'(cyc), 16'(NB * (NB + NR) + 2), "gemv_fwd cycles");
    for (int k = 0; k < N; k++) begin
      int cc;
      cc = k % NR;
      for (int r = 0; r < NR; r++) begin
        part[r] = 0;
        for (int jb = 0; jb < NB; jb++) part[r] = fma_ref(x[jb * NR + r], W[jb * NR + r][k], part[r]);
      end
      y[k] = part[cc];
      for (int s = 0; s < NR - 1; s++) y[k] = fma_ref(part[(cc + 1 + s) % NR], 16'h3C00, y[k]);
      y[k] = relu_ref(y[k]);
    end
    c = blank(CMD_STORE); c.spad_addr = SP_Y; c.y_base = 8; c.count = N; c.mem_b = 1; run(c, cyc);
    for (int k = 0; k < N; k++) begin hread(SP_Y + k, line); chk(line[k % NR], y[k], "fwd y"); end
    // ---- GEMV_BWD with ReLU'(x) mask: din = (W d) .* (x > 0) ----------------
    c = blank(CMD_GEMV_BWD); c.w_base = 0; c.x_base = 4; c.y_base = 12; c.z_base = 0;
    c.nin = NB; c.nout = NB; c.dmask = 1;
    run(c, cyc);
    chk(16'(cyc), 16'(NB * (NB + NR) + 2), "gemv_bwd cycles");
    for (int j = 0; j < N; j++) begin
      int rr;
      rr = j % NR;
      for (int cc = 0; cc < NR; cc++) begin
        part[cc] = 0;
        for (int kb = 0; kb < NB; kb++) part[cc] = fma_ref(d[kb * NR + cc], W[j][kb * NR + cc], part[cc]);
      end
      din[j] = part[rr];
      for (int s = 0; s < NR - 1; s++) din[j] = fma_ref(part[(rr + 1 + s) % NR], 16'h3C00, din[j]);
      if (relu_ref(x[j]) == 16'h0) din[j] = 16'h0;
    end
    c = blank(CMD_STORE); c.spad_addr = SP_DI; c.y_base = 12; c.count = N; c.mem_b = 1; run(c, cyc);
    for (int j = 0; j < N; j++) begin hread(SP_DI + j, line); chk(line[j % NR], din[j], "bwd din"); end
    // ---- SCALE z = d * (-0.125), UPDATE W += x^T z --------------------------
    c = blank(CMD_SCALE); c.x_base = 4; c.y_base = 16; c.count = NB; c.eta = 16'hB000; run(c, cyc);
    chk(16'(cyc), 16'(NB + 2), "scale cycles");
    for (int k = 0; k < N; k++) z[k] = fma_ref(d[k], 16'hB000, 16'h0);
    c = blank(CMD_UPDATE); c.w_base = 0; c.x_base = 0; c.z_base = 16; c.nin = NB; c.nout = NB; run(c, cyc);
    chk(16'(cyc), 16'(NB * (NB + 1) + 2), "update cycles");
    for (int j = 0; j < N; j++) for (int k = 0; k < N; k++) Wn[j][k] = fma_ref(x[j], z[k], W[j][k]);
    c = blank(CMD_STORE); c.spad_addr = SP_WO; c.y_base = 0; c.count = NR * NB * NB; c.mem_b = 0; run(c, cyc);
    for (int t = 0; t < NR * NB * NB; t++) begin
      int col, a;
      col = t % NR; a = t / NR;
      hread(SP_WO + t, line);
      for (int r = 0; r < NR; r++) chk(line[r], Wn[(a / NB) * NR + r][(a % NB) * NR + col], "updated W");
    end
    // ---- RING_SEND x with backpressure (receiver taken by the testbench) ------
    fork
      begin
        c = blank(CMD_RING_SEND); c.x_base = 0; c.count = NB; run(c, cyc);
      end
      begin
        int got;
        got = 0;
        ro_ready = 0;
        repeat (12) @(negedge clk);   // hold off: the FIFO must absorb the beats
        while (got < NB) begin
          @(negedge clk);
          ro_ready = 1'($urandom);
          #1;
          if (ro_ready && ro_valid) begin
            for (int r = 0; r < NR; r++) chk(ro_data[r], x[got * NR + r], "ring out");
            got++;
          end
        end
        @(negedge clk); ro_ready = 0;
      end
    join
    // long send: more beats than the FIFO holds, so the core must stall
    fork
      begin
        c = blank(CMD_RING_SEND); c.x_base = 0; c.count = 8; run(c, cyc);
      end
      begin
        int got;
        got = 0;
        repeat (15) @(negedge clk);
        while (got < 8) begin
          @(negedge clk); ro_ready = 1; #1;
          if (ro_valid) begin
            // diag MEM B addresses 0-1 hold x, 4-5 hold d, 2-3 and 6-7 were never written
            for (int r = 0; r < NR; r++)
              chk(ro_data[r], (got < 2) ? x[got * NR + r] : (got == 4 || got == 5) ? d[(got - 4) * NR + r] : 16'h0,
                  "ring out long");
            got++;
          end
        end
        @(negedge clk); ro_ready = 0;
      end
    join
    // ---- RING_RECV with add + ReLU into x's slot copy (y_base 20) ------------
    c = blank(CMD_LOAD); c.spad_addr = SP_X; c.y_base = 20; c.count = N; c.mem_b = 1; run(c, cyc);
    for (int i = 0; i < N; i++) rin[i] = rand_fp16(-2, 2);
    fork
      begin
        c = blank(CMD_RING_RECV); c.y_base = 20; c.count = NB; c.add = 1; c.relu = 1; run(c, cyc);
      end
      begin
        int sent;
        sent = 0;
        while (sent < NB) begin
          @(negedge clk);
          ri_valid = 1'($urandom);
          for (int r = 0; r < NR; r++) ri_data[r] = rin[sent * NR + r];
          @(posedge clk);
          if (ri_valid && ri_ready) sent++;
        end
        @(negedge clk); ri_valid = 0;
      end
    join
    c = blank(CMD_STORE); c.spad_addr = SP_Y; c.y_base = 20; c.count = N; c.mem_b = 1; run(c, cyc);
    for (int i = 0; i < N; i++) begin
      hread(SP_Y + i, line);
      chk(line[i % NR], relu_ref(fma_ref(rin[i], 16'h3C00, x[i])), "ring recv");
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall observed"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

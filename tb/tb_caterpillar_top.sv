// tb_caterpillar_top: end-to-end training step of one layer split over two
// cores, on a 2 x 2 ring of 4 x 4-PE cores (the paper's scheme of Fig. 4).
//
//   W is 16 x 8. Core 0 holds rows 0-7 and inputs x[0..7], core 1 rows 8-15
//   and x[8..15]. Both compute partial outputs (GEMV_FWD); core 1 receives
//   core 0's partials over the ring, adds them and applies ReLU (cross-core
//   reduction). The result is all-gathered: core 1 sends it on, the other cores
//   store and forward it, core 0 stores it. The error d, loaded in core 1,
//   travels the ring the same way to core 0. Both cores then run GEMV_BWD on
//   their weights in place (transpose) with the ReLU' mask of their inputs,
//   scale d by -eta and update their weights.
//
// All results are read back through the SPAD host ports and compared with a
// model built from fp16_ref_pkg in the hardware's summation order. The test
// counts each mechanism: stall cycles (core 1 starts receiving before core 0
// sends), ring forwarding, outputs clipped by ReLU, errors zeroed by ReLU',
// the cross-core add and weight updates; a mechanism that never happened is
// a failure.
module tb_caterpillar_top;
  import cat_pkg::*;
  import fp16_ref_pkg::*;

  localparam int NR = 4, C = 2, NC = 2 * C, LINES = 256;
  localparam int NBI = 2, NBO = 2;            // per-core input blocks, output blocks
  localparam int MI = NR * NBI, N = NR * NBO; // 8 inputs per core, 8 outputs

  logic clk = 0, rst_n = 0;
  logic [NC-1:0] cmd_valid = '0, cmd_ready, busy, stall, bus_conflict;
  cmd_t cmd [NC];
  logic [NC-1:0] h_en = '0, h_we = '0;
  logic [7:0] h_addr [NC];
  logic [NR-1:0][15:0] h_wdata [NC], h_rdata [NC];
  int checks = 0, failures = 0;
  int n_stall = 0, n_fwd = 0, n_relu = 0, n_mask = 0, n_xadd = 0, n_upd = 0;

  caterpillar_top #(.NR(NR), .C(C), .MEMA_DEPTH(64), .MEMB_DEPTH(64), .SPAD_LINES(LINES)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .stall, .bus_conflict,
    .h_en, .h_we, .h_addr, .h_wdata, .h_rdata);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NC; i++) if (stall[i]) n_stall++;
    if (dut.g_core[2].u_core.ring_push) n_fwd++;
    if (dut.g_core[3].u_core.ring_push) n_fwd++;
    if (|bus_conflict) begin failures++; $display("FAIL bus conflict"); end
  end

  initial begin
    repeat (30000) @(posedge clk);
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

  task automatic hwrite(input int core, input int a, input logic [NR-1:0][15:0] d);
    @(negedge clk); h_en[core] = 1; h_we[core] = 1; h_addr[core] = 8'(a); h_wdata[core] = d;
    @(negedge clk); h_en[core] = 0; h_we[core] = 0;
  endtask
  task automatic hread(input int core, input int a, output logic [NR-1:0][15:0] d);
    @(negedge clk); h_en[core] = 1; h_we[core] = 0; h_addr[core] = 8'(a);
    @(negedge clk); h_en[core] = 0; d = h_rdata[core];
  endtask

  // hand a command to a core (returns once accepted) / wait until idle
  task automatic give(input int core, input cmd_t c);
    @(negedge clk);
    while (!cmd_ready[core]) @(negedge clk);
    cmd[core] = c; cmd_valid[core] = 1;
    @(negedge clk); cmd_valid[core] = 0;
  endtask
  task automatic wait_idle(input int core);
    @(negedge clk);
    while (busy[core]) @(negedge clk);
  endtask

  function automatic cmd_t mk(cmd_op_e op, int x_base, int y_base, int count);
    cmd_t c;
    c = '0; c.op = op; c.x_base = PE_AW'(x_base); c.y_base = PE_AW'(y_base);
    c.count = CNT_W'(count); c.nin = NBI; c.nout = NBO;
    return c;
  endfunction

  fp16_t W [2*MI][N], x [2*MI], d [N], p [2][N], y [N], din [2*MI], z [N];
  fp16_t part [NR];
  logic [NR-1:0][15:0] line;
  cmd_t c;

  initial begin
    for (int i = 0; i < NC; i++) begin cmd[i] = '0; h_addr[i] = 0; h_wdata[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 2 * MI; j++) begin
      x[j] = rand_fp16(-2, 1);
      for (int k = 0; k < N; k++) W[j][k] = rand_fp16(-3, 0);
    end
    for (int k = 0; k < N; k++) d[k] = rand_fp16(-2, 1);
    // SPAD images: weights at line 0 (16 lines), x at 32, d at 48 (core 1)
    for (int cr = 0; cr < 2; cr++) begin
      for (int t = 0; t < NR * NBI * NBO; t++) begin
        int col, a;
        col = t % NR; a = t / NR;
        for (int r = 0; r < NR; r++) line[r] = W[cr * MI + (a / NBO) * NR + r][(a % NBO) * NR + col];
        hwrite(cr, t, line);
      end
      for (int i = 0; i < MI; i++) begin line = '0; line[i % NR] = x[cr * MI + i]; hwrite(cr, 32 + i, line); end
    end
    for (int i = 0; i < N; i++) begin line = '0; line[i % NR] = d[i]; hwrite(1, 48 + i, line); end

    // ---- load ------------------------------------------------------------
    for (int cr = 0; cr < 2; cr++) begin
      c = mk(CMD_LOAD, 0, 0, NR * NBI * NBO); c.spad_addr = 0; give(cr, c);
    end
    for (int cr = 0; cr < 2; cr++) begin
      wait_idle(cr);
      c = mk(CMD_LOAD, 0, 0, MI); c.spad_addr = 32; c.mem_b = 1; give(cr, c);
    end
    c = mk(CMD_LOAD, 0, 16, N); c.spad_addr = 48; c.mem_b = 1; wait_idle(1); give(1, c);
    wait_idle(0); wait_idle(1);
    // ---- forward: partial GEMVs on both cores ------------------------------
    c = mk(CMD_GEMV_FWD, 0, 8, 0); give(0, c); give(1, c);
    wait_idle(0); wait_idle(1);
    // ---- cross-core reduction: core 1 waits (stalls) for core 0's partials ---
    c = mk(CMD_RING_RECV, 0, 8, NBO); c.add = 1; c.relu = 1; give(1, c);
    repeat (5) @(negedge clk);
    c = mk(CMD_RING_SEND, 8, 0, NBO); give(0, c);
    wait_idle(0); wait_idle(1);
    n_xadd += NBO;
    // ---- all-gather of y: 1 -> 2 .. NC-1 (store and forward) -> 0 -----------------------
    c = mk(CMD_RING_RECV, 0, 8, NBO); c.fwd = 1;
    for (int i = 2; i < NC; i++) give(i, c);
    c = mk(CMD_RING_RECV, 0, 12, NBO); give(0, c);
    c = mk(CMD_RING_SEND, 8, 0, NBO); give(1, c);
    for (int i = 0; i < NC; i++) wait_idle(i);
    // ---- error d: core 1 -> 2 .. NC-1 -> 0 ------------------------------------
    c = mk(CMD_RING_RECV, 0, 16, NBO); c.fwd = 1;
    for (int i = 2; i < NC; i++) give(i, c);
    c = mk(CMD_RING_RECV, 0, 16, NBO); give(0, c);
    c = mk(CMD_RING_SEND, 16, 0, NBO); give(1, c);
    for (int i = 0; i < NC; i++) wait_idle(i);
    // ---- backward through the layer, in place, masked by ReLU'(x) -----------
    c = mk(CMD_GEMV_BWD, 16, 20, 0); c.z_base = 0; c.dmask = 1; give(0, c); give(1, c);
    wait_idle(0); wait_idle(1);
    // ---- weight update W -= eta * x^T d, eta = 0.25 --------------------------
    c = mk(CMD_SCALE, 16, 24, NBO); c.eta = 16'hB400; give(0, c); give(1, c);
    wait_idle(0); wait_idle(1);
    c = mk(CMD_UPDATE, 0, 0, 0); c.z_base = 24; give(0, c); give(1, c);
    wait_idle(0); wait_idle(1);
    n_upd += 2 * MI * N;
    // ---- read back ---------------------------------------------------------
    c = mk(CMD_STORE, 0, 8, N); c.spad_addr = 64; c.mem_b = 1; give(1, c);      // y at core 1
    c = mk(CMD_STORE, 0, 12, N); c.spad_addr = 64; c.mem_b = 1; give(0, c);     // y at core 0
    c = mk(CMD_STORE, 0, 8, N); c.spad_addr = 64; c.mem_b = 1; give(2, c);      // y at core 2
    for (int i = 0; i < 3; i++) wait_idle(i);
    for (int cr = 0; cr < 2; cr++) begin
      c = mk(CMD_STORE, 0, 20, MI); c.spad_addr = 80; c.mem_b = 1; give(cr, c);
    end
    for (int cr = 0; cr < 2; cr++) begin
      wait_idle(cr);
      c = mk(CMD_STORE, 0, 0, NR * NBI * NBO); c.spad_addr = 96; c.mem_b = 0; give(cr, c);
    end
    for (int i = 0; i < NC; i++) wait_idle(i);

    // ---- reference model ---------------------------------------------------
    for (int cr = 0; cr < 2; cr++)
      for (int k = 0; k < N; k++) begin
        for (int r = 0; r < NR; r++) begin
          part[r] = 0;
          for (int jb = 0; jb < NBI; jb++)
            part[r] = fma_ref(x[cr * MI + jb * NR + r], W[cr * MI + jb * NR + r][k], part[r]);
        end
        p[cr][k] = part[k % NR];
        for (int s = 0; s < NR - 1; s++) p[cr][k] = fma_ref(part[(k % NR + 1 + s) % NR], 16'h3C00, p[cr][k]);
      end
    for (int k = 0; k < N; k++) begin
      y[k] = fma_ref(p[0][k], 16'h3C00, p[1][k]);
      if (relu_ref(y[k]) != y[k]) n_relu++;
      y[k] = relu_ref(y[k]);
      z[k] = fma_ref(d[k], 16'hB400, 16'h0);
    end
    for (int j = 0; j < 2 * MI; j++) begin
      int rr;
      rr = j % NR;
      for (int cc = 0; cc < NR; cc++) begin
        part[cc] = 0;
        for (int kb = 0; kb < NBO; kb++) part[cc] = fma_ref(d[kb * NR + cc], W[j][kb * NR + cc], part[cc]);
      end
      din[j] = part[rr];
      for (int s = 0; s < NR - 1; s++) din[j] = fma_ref(part[(rr + 1 + s) % NR], 16'h3C00, din[j]);
      if (relu_ref(x[j]) == 16'h0) begin din[j] = 16'h0; n_mask++; end
    end
    // ---- compare -----------------------------------------------------------
    for (int cr = 0; cr < 3; cr++)
      for (int k = 0; k < N; k++) begin hread(cr, 64 + k, line); chk(line[k % NR], y[k], "y"); end
    for (int cr = 0; cr < 2; cr++)
      for (int j = 0; j < MI; j++) begin hread(cr, 80 + j, line); chk(line[j % NR], din[cr * MI + j], "din"); end
    for (int cr = 0; cr < 2; cr++)
      for (int t = 0; t < NR * NBI * NBO; t++) begin
        int col, a;
        col = t % NR; a = t / NR;
        hread(cr, 96 + t, line);
        for (int r = 0; r < NR; r++) begin
          int j, k;
          j = cr * MI + (a / NBO) * NR + r; k = (a % NBO) * NR + col;
          chk(line[r], fma_ref(x[j], z[k], W[j][k]), "W updated");
        end
      end
    // ---- mechanisms ----------------------------------------------------------
    $display("mechanisms: stall_cycles=%0d ring_forwards=%0d relu_clipped=%0d relu_masked=%0d cross_core_adds=%0d weight_updates=%0d",
             n_stall, n_fwd, n_relu, n_mask, n_xadd, n_upd);
    checks += 6;
    if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (n_fwd == 0)   begin failures++; $display("FAIL no ring forwarding"); end
    if (n_relu == 0)  begin failures++; $display("FAIL no ReLU clipping"); end
    if (n_mask == 0)  begin failures++; $display("FAIL no ReLU' masking"); end
    if (n_xadd == 0)  begin failures++; $display("FAIL no cross-core add"); end
    if (n_upd == 0)   begin failures++; $display("FAIL no update"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

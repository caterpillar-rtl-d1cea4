// pe: one processing element of a core.
//
// A PE holds a half-precision fused multiply-add unit with its accumulator,
// a one-word register (xr), and two local memory banks: MEM A (12 KB) for its
// share of the weights and MEM B (4 KB) for vectors (the diagonal PEs keep the activations and
// errors there). It reads from and writes to one row broadcast bus and one
// column broadcast bus. As in the paper, weights are spread over the PEs in 2D
// round-robin order, W(j,k) in PE(j mod NR, k mod NR); inputs are broadcast
// on one set of buses, each PE multiplies and accumulates, partial sums are
// reduced over the other set of buses into the diagonal PEs, and the diagonal
// PEs write back and rebroadcast the result.
//
// The PE does not sequence itself: every cycle the core controller issues one
// micro-operation (cat_pkg::pe_ctrl_t) to all PEs, and each PE works out from
// its coordinates whether it is the diagonal PE, the driver of the current
// reduction step, or in the selected column (see cat_pkg for the list). This
// shared decoder stands in for the per-PE micro-programmed controller that the
// paper only names.
//
// Timing: two stages. In stage 0 (the cycle ctrl is presented) the memories
// are read. In stage 1 (the next cycle) the PE drives its buses, reads the bus
// values, runs the FMA and writes the accumulator, xr or a memory word at the
// clock edge that ends stage 1. Bus outputs are combinational from stage-1
// registers; bus inputs are used combinationally in the same cycle.
module pe
  import cat_pkg::*;
#(
  parameter int unsigned NR        = 16,
  parameter int unsigned MEMA_DEPTH = 6144,
  parameter int unsigned MEMB_DEPTH = 2048
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic [7:0] my_row,
  input  logic [7:0] my_col,
  input  pe_ctrl_t ctrl,
  input  fp16_t    row_bus,
  input  fp16_t    col_bus,
  output logic     row_drv,
  output fp16_t    row_out,
  output logic     col_drv,
  output fp16_t    col_out
);

  localparam int unsigned AWA = (MEMA_DEPTH > 1) ? $clog2(MEMA_DEPTH) : 1;
  localparam int unsigned AWB = (MEMB_DEPTH > 1) ? $clog2(MEMB_DEPTH) : 1;

  pe_ctrl_t c1;        // stage-1 micro-operation
  fp16_t    acc, xr;
  fp16_t    ra, rb;    // MEM A / MEM B read data (stage 1)
  fp16_t    fa, fb, fc, fy;
  fp16_t    wb_val;
  logic     is_diag, row_turn, col_turn, in_sel_col;
  logic     a_we, b_we;
  logic [AWA-1:0] a_waddr;
  logic [AWB-1:0] b_waddr;
  fp16_t    a_wdata, b_wdata;
  logic     acc_we, xr_we;

  // ---- stage 0: memory reads ------------------------------------------------
  pe_sram #(.DEPTH(MEMA_DEPTH)) u_mem_a (
    .clk, .re(ctrl.op != PE_NOP), .raddr(ctrl.addr_a[AWA-1:0]), .rdata(ra),
    .we(a_we), .waddr(a_waddr), .wdata(a_wdata)
  );
  pe_sram #(.DEPTH(MEMB_DEPTH)) u_mem_b (
    .clk, .re(ctrl.op != PE_NOP), .raddr(ctrl.addr_b[AWB-1:0]), .rdata(rb),
    .we(b_we), .waddr(b_waddr), .wdata(b_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c1 <= '0;
    else        c1 <= ctrl;
  end

  // ---- stage 1: role decode ---------------------------------------------------
  function automatic fp16_t relu(fp16_t v);
    return (v[15] || v[14:10] == 5'd0) ? FP16_ZERO : v;
  endfunction

  always_comb begin
    is_diag    = (my_row == my_col);
    // reduction step s: the driver in column c is row (c+1+s) mod NR
    col_turn   = (32'(my_row) == (32'(my_col) + 32'd1 + 32'(c1.sel)) % NR);
    row_turn   = (32'(my_col) == (32'(my_row) + 32'd1 + 32'(c1.sel)) % NR);
    in_sel_col = (my_col == c1.sel);

    // write-back value of the diagonal PE
    wb_val = acc;
    if (c1.relu) wb_val = relu(wb_val);
    if (c1.dmask && (rb[15] || rb[14:10] == 5'd0)) wb_val = FP16_ZERO;

    row_drv = 1'b0;  row_out = FP16_ZERO;
    col_drv = 1'b0;  col_out = FP16_ZERO;
    unique case (c1.op)
      PE_MAC_FWD, PE_LATCH_X, PE_RING_OUT: begin row_drv = is_diag; row_out = rb; end
      PE_MAC_BWD, PE_UPD:                  begin col_drv = is_diag; col_out = rb; end
      PE_RED_COL:                          begin col_drv = col_turn; col_out = acc; end
      PE_RED_ROW:                          begin row_drv = row_turn; row_out = acc; end
      PE_WB:                               begin row_drv = is_diag; row_out = wb_val; end
      PE_ST:                               begin row_drv = in_sel_col; row_out = c1.mem_b ? rb : ra; end
      default: ;
    endcase
  end

  // bus reads, FMA operands and write-back (kept apart from the bus drives so
  // that no bus value feeds back into a bus drive, not even in a simulator's
  // view of the process)
  always_comb begin
    // FMA operand selection (multiplexers A, B and Cin of the PE)
    fa = FP16_ZERO; fb = FP16_ZERO; fc = FP16_ZERO;
    unique case (c1.op)
      PE_MAC_FWD: begin fa = row_bus; fb = ra;       fc = c1.first ? FP16_ZERO : acc; end
      PE_MAC_BWD: begin fa = col_bus; fb = ra;       fc = c1.first ? FP16_ZERO : acc; end
      PE_RED_COL: begin fa = col_bus; fb = FP16_ONE; fc = acc; end
      PE_RED_ROW: begin fa = row_bus; fb = FP16_ONE; fc = acc; end
      PE_UPD:     begin fa = xr;      fb = col_bus;  fc = ra;  end
      PE_SCALE:   begin fa = rb;      fb = c1.eta;   fc = FP16_ZERO; end
      PE_RING_IN: begin fa = row_bus; fb = FP16_ONE; fc = c1.add ? rb : FP16_ZERO; end
      default: ;
    endcase

    acc_we  = ((c1.op == PE_MAC_FWD) || (c1.op == PE_MAC_BWD)) ||
              (is_diag && ((c1.op == PE_RED_COL) || (c1.op == PE_RED_ROW)));
    xr_we   = (c1.op == PE_LATCH_X);

    a_we    = (c1.op == PE_UPD) || ((c1.op == PE_LD) && in_sel_col && !c1.mem_b);
    a_waddr = c1.waddr[AWA-1:0];
    a_wdata = (c1.op == PE_LD) ? row_bus : fy;

    b_we    = is_diag && ((c1.op == PE_WB) || (c1.op == PE_SCALE) || (c1.op == PE_RING_IN));
    b_we    = b_we || ((c1.op == PE_LD) && in_sel_col && c1.mem_b);
    b_waddr = c1.waddr[AWB-1:0];
    unique case (c1.op)
      PE_LD:      b_wdata = row_bus;
      PE_WB:      b_wdata = wb_val;
      PE_RING_IN: b_wdata = c1.relu ? relu(fy) : fy;
      default:    b_wdata = fy;
    endcase
  end

  fp16_fma u_fma (.a(fa), .b(fb), .c(fc), .y(fy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= FP16_ZERO;
      xr  <= FP16_ZERO;
    end else begin
      if (acc_we) acc <= fy;
      if (xr_we)  xr  <= row_bus;
    end
  end

endmodule

// core: one Linear Algebra Core of the accelerator.
//
// NR x NR PEs sit on NR row broadcast buses and NR column broadcast buses.
// PE(r,c) reads and writes row bus r and column bus c. The core controller
// (core_ctrl) turns host commands into micro-operations that all PEs execute
// in lock-step; see core_ctrl for the command set and pe for the data layout.
//
// The row buses are the core's window to the outside. A SPAD line of NR
// half-words is placed one word per row bus when loading, and the row buses
// are written back as one SPAD line when storing. A ring beat of NR half-words
// arriving from the previous core is placed on the row buses in the same way,
// and the row buses can be pushed into the ring output FIFO towards the next
// core. That FIFO (4 entries) lets the controller stall on backpressure.
//
// Interface timing: spad_re/spad_raddr in cycle t expect spad_rdata in cycle
// t+1; spad_we/spad_waddr/spad_wdata are a write in the current cycle. The
// ring ports are valid/ready; a beat is taken when ring_in_valid and
// ring_in_ready are both high.
module core
  import cat_pkg::*;
#(
  parameter int unsigned NR        = 16,
  parameter int unsigned MEMA_DEPTH = 6144,
  parameter int unsigned MEMB_DEPTH = 2048
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  cmd_t     cmd,
  output logic     busy,
  output logic     stall,
  output logic     bus_conflict,
  // SPAD port
  output logic                 spad_re,
  output logic [SPAD_AW-1:0]   spad_raddr,
  input  logic [NR-1:0][15:0]  spad_rdata,
  output logic                 spad_we,
  output logic [SPAD_AW-1:0]   spad_waddr,
  output logic [NR-1:0][15:0]  spad_wdata,
  // ring
  input  logic                 ring_in_valid,
  output logic                 ring_in_ready,
  input  logic [NR-1:0][15:0]  ring_in_data,
  output logic                 ring_out_valid,
  input  logic                 ring_out_ready,
  output logic [NR-1:0][15:0]  ring_out_data
);

  pe_ctrl_t pe_ctrl;
  logic row_from_spad, row_from_ring, ring_push;
  logic [2:0] ring_out_free;
  logic [NR-1:0][15:0] ring_q;

  fp16_t row_bus [NR];
  fp16_t col_bus [NR];
  logic  row_drv [NR][NR];   // [row][col]
  logic  col_drv [NR][NR];
  fp16_t row_out [NR][NR];
  fp16_t col_out [NR][NR];
  logic [NR-1:0] row_conf, col_conf;

  core_ctrl #(.NR(NR)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy,
    .pe_ctrl,
    .spad_re, .spad_raddr, .spad_we, .spad_waddr, .row_from_spad,
    .ring_in_valid, .ring_in_ready, .row_from_ring,
    .ring_out_free, .ring_push, .stall
  );

  // the accepted ring beat is held for stage 1
  always_ff @(posedge clk) begin
    if (ring_in_ready && ring_in_valid) ring_q <= ring_in_data;
  end

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NR; c++) begin : g_col
      pe #(.NR(NR), .MEMA_DEPTH(MEMA_DEPTH), .MEMB_DEPTH(MEMB_DEPTH)) u_pe (
        .clk, .rst_n,
        .my_row(8'(r)), .my_col(8'(c)),
        .ctrl(pe_ctrl),
        .row_bus(row_bus[r]), .col_bus(col_bus[c]),
        .row_drv(row_drv[r][c]), .row_out(row_out[r][c]),
        .col_drv(col_drv[r][c]), .col_out(col_out[r][c])
      );
    end
  end

  for (genvar i = 0; i < NR; i++) begin : g_bus
    logic [NR-1:0] rdrv, cdrv;
    fp16_t         cdat [NR];
    for (genvar j = 0; j < NR; j++) begin : g_j
      assign rdrv[j] = row_drv[i][j];
      assign cdrv[j] = col_drv[j][i];
      assign cdat[j] = col_out[j][i];
    end
    bcast_bus #(.N(NR)) u_row_bus (
      .clk, .rst_n,
      .drv(rdrv), .data(row_out[i]),
      .ext_en(row_from_spad || row_from_ring),
      .ext_data(row_from_spad ? spad_rdata[i] : ring_q[i]),
      .bus(row_bus[i]), .conflict(row_conf[i])
    );
    bcast_bus #(.N(NR)) u_col_bus (
      .clk, .rst_n,
      .drv(cdrv), .data(cdat), .ext_en(1'b0), .ext_data(FP16_ZERO),
      .bus(col_bus[i]), .conflict(col_conf[i])
    );
    assign spad_wdata[i] = row_bus[i];
  end

  assign bus_conflict = (|row_conf) || (|col_conf);

  logic [NR-1:0][15:0] push_data;
  always_comb begin
    for (int i = 0; i < NR; i++) push_data[i] = row_bus[i];
  end

  sync_fifo #(.W(NR*16), .DEPTH(4)) u_ring_out (
    .clk, .rst_n, .push(ring_push), .push_data(push_data), .free(ring_out_free),
    .out_valid(ring_out_valid), .out_ready(ring_out_ready), .out_data(ring_out_data)
  );

endmodule

// caterpillar_top: the whole accelerator, 2 x C cores on a unidirectional ring.
//
// Every core (NR x NR PEs, see core) has its own 512 KB SPAD and its own
// command port. The cores are numbered as in the paper's floor plan: 0..C-1
// along the top row from left to right and C..2C-1 along the bottom row from
// right to left, so that each core's ring neighbour is also its physical
// neighbour; core i sends to core (i+1) mod 2C through a ring_link, one cycle
// per hop. With this ring the host can split a layer over several cores:
// partial results are summed across cores (reduce), gathered (all-gather) or
// summed and spread (reduce-scatter) by RING_SEND / RING_RECV commands, with
// intermediate cores forwarding beats.
//
// The host that issues the commands and fills the SPADs is not part of the
// design; its signals are ports: per core a command port (valid/ready), busy,
// stall, and a SPAD host port (h_en, h_we, h_addr, h_wdata, h_rdata with one
// cycle read latency).
//
// Defaults are the paper's main configuration: 2 x 4 cores of 16 x 16 PEs,
// 16 KB per PE (6144 weight words in MEM A, 2048 vector words in MEM B),
// 512 KB SPAD per core.
module caterpillar_top
  import cat_pkg::*;
#(
  parameter int unsigned NR         = 16,
  parameter int unsigned C          = 4,
  parameter int unsigned MEMA_DEPTH = 6144,
  parameter int unsigned MEMB_DEPTH = 2048,
  parameter int unsigned SPAD_LINES = 16384,
  localparam int unsigned NC        = 2 * C,
  localparam int unsigned SAW       = (SPAD_LINES > 1) ? $clog2(SPAD_LINES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NC-1:0]               cmd_valid,
  output logic [NC-1:0]               cmd_ready,
  input  cmd_t                        cmd [NC],
  output logic [NC-1:0]               busy,
  output logic [NC-1:0]               stall,
  output logic [NC-1:0]               bus_conflict,
  input  logic [NC-1:0]               h_en,
  input  logic [NC-1:0]               h_we,
  input  logic [SAW-1:0]              h_addr  [NC],
  input  logic [NR-1:0][15:0]         h_wdata [NC],
  output logic [NR-1:0][15:0]         h_rdata [NC]
);

  logic                 r_valid [NC];   // core i -> link i
  logic                 r_ready [NC];
  logic [NR-1:0][15:0]  r_data  [NC];
  logic                 l_valid [NC];   // link i -> core (i+1)%NC
  logic                 l_ready [NC];
  logic [NR-1:0][15:0]  l_data  [NC];

  for (genvar i = 0; i < NC; i++) begin : g_core
    localparam int unsigned PREV = (i + NC - 1) % NC;

    logic                s_re, s_we;
    logic [SPAD_AW-1:0]  s_raddr, s_waddr;
    logic [NR-1:0][15:0] s_rdata, s_wdata;

    core #(.NR(NR), .MEMA_DEPTH(MEMA_DEPTH), .MEMB_DEPTH(MEMB_DEPTH)) u_core (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd(cmd[i]),
      .busy(busy[i]), .stall(stall[i]), .bus_conflict(bus_conflict[i]),
      .spad_re(s_re), .spad_raddr(s_raddr), .spad_rdata(s_rdata),
      .spad_we(s_we), .spad_waddr(s_waddr), .spad_wdata(s_wdata),
      .ring_in_valid(l_valid[PREV]), .ring_in_ready(l_ready[PREV]), .ring_in_data(l_data[PREV]),
      .ring_out_valid(r_valid[i]), .ring_out_ready(r_ready[i]), .ring_out_data(r_data[i])
    );

    spad #(.NR(NR), .LINES(SPAD_LINES)) u_spad (
      .clk,
      .c_re(s_re), .c_raddr(s_raddr[SAW-1:0]), .c_rdata(s_rdata),
      .c_we(s_we), .c_waddr(s_waddr[SAW-1:0]), .c_wdata(s_wdata),
      .h_en(h_en[i]), .h_we(h_we[i]), .h_addr(h_addr[i]), .h_wdata(h_wdata[i]), .h_rdata(h_rdata[i])
    );

    ring_link #(.W(NR*16)) u_link (
      .clk, .rst_n,
      .in_valid(r_valid[i]), .in_ready(r_ready[i]), .in_data(r_data[i]),
      .out_valid(l_valid[i]), .out_ready(l_ready[i]), .out_data(l_data[i])
    );
  end

endmodule

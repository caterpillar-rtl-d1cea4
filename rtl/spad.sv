// spad: a core's private scratchpad (SPAD), 512 KB.
//
// The paper gives each core 512 KB of private memory next to it for weights
// and activations that do not fit in the PEs. Here it is organised as lines
// of NR half-words (32 bytes for NR = 16), so that one line fills the NR row
// buses of the core in one cycle: 16384 lines. The line width and the second
// port, through which a host fills and reads the memory, are this design's
// choices. Both ports have a synchronous read with one cycle of latency; when
// both write the same line in one cycle the core port wins.
module spad #(
  parameter int unsigned NR    = 16,
  parameter int unsigned LINES = 16384,
  localparam int unsigned AW   = (LINES > 1) ? $clog2(LINES) : 1
) (
  input  logic                clk,
  // core port
  input  logic                c_re,
  input  logic [AW-1:0]       c_raddr,
  output logic [NR-1:0][15:0] c_rdata,
  input  logic                c_we,
  input  logic [AW-1:0]       c_waddr,
  input  logic [NR-1:0][15:0] c_wdata,
  // host port
  input  logic                h_en,
  input  logic                h_we,
  input  logic [AW-1:0]       h_addr,
  input  logic [NR-1:0][15:0] h_wdata,
  output logic [NR-1:0][15:0] h_rdata
);

  logic [NR*16-1:0] mem [LINES];

  initial begin
    for (int i = 0; i < LINES; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (c_re) c_rdata <= mem[c_raddr];
    if (h_en && !h_we) h_rdata <= mem[h_addr];
    if (h_en && h_we && !(c_we && c_waddr == h_addr)) mem[h_addr] <= h_wdata;
    if (c_we) mem[c_waddr] <= c_wdata;
  end

endmodule

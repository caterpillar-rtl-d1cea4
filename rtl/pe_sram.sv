// pe_sram: one bank of a PE's local memory (MEM A or MEM B).
//
// The paper gives each PE 16 KB of local SRAM and draws it as two banks, MEM A
// and MEM B. The split (MEM A 6144 words = 12 KB for weights, MEM B 2048 words
// = 4 KB for vectors) and the port structure are this design's choices; the
// split is chosen so that the paper's largest network fits on the default
// array. The bank has one synchronous read port
// (data appear the cycle after re) and one write port. A read and a write of
// the same address in the same cycle return the old word. The array is
// cleared at start-up so that nothing reads an unset word.
module pe_sram #(
  parameter int unsigned DEPTH = 6144,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule

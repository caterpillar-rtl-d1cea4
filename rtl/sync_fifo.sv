// sync_fifo: small synchronous FIFO with valid/ready on both sides.
//
// Used as the ring output buffer of a core. It reports how many entries are
// free so that a producer with a pipeline in front of it can decide early
// whether a push will find room. Push and pop may happen in the same cycle.
// The output is the head entry, valid whenever the FIFO is not empty.
module sync_fifo #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  push_data,
  output logic [PW-1:0] free,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data
);

  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [IW-1:0] rd, wr;
  logic [PW-1:0] cnt;
  logic          pop;

  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd];
  assign free      = PW'(DEPTH) - cnt;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
    end else begin
      if (push) begin
        wr <= (32'(wr) == DEPTH - 1) ? '0 : wr + 1'b1;
      end
      if (pop) begin
        rd <= (32'(rd) == DEPTH - 1) ? '0 : rd + 1'b1;
      end
      cnt <= cnt + PW'(push) - PW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr] <= push_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && cnt == PW'(DEPTH) && !pop))
    else $error("sync_fifo: push when full");

endmodule

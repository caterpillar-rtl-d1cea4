// bcast_bus: one row or column broadcast bus of a core.
//
// Up to N PEs sit on a bus; in any cycle at most one of them drives it and
// all of them read it. The paper describes these as low-overhead broadcast
// buses; here a bus is an AND-OR multiplexer rather than a tri-state wire.
// An external source (the ring input or the SPAD, for row buses) has
// priority over the PEs. An idle bus reads 0. 'conflict' flags two or more
// drivers in the same cycle, which the controller never issues; an assertion
// checks it at each clock edge once reset has been released (before reset
// the PEs' drive registers hold arbitrary values).
//
// Interface: drv/data from the N PEs, ext_en/ext_data from outside the core,
// bus to all readers. The data path is purely combinational; clk and rst_n
// serve only the assertion.
module bcast_bus
  import cat_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] drv,
  input  fp16_t        data [N],
  input  logic         ext_en,
  input  fp16_t        ext_data,
  output fp16_t        bus,
  output logic         conflict
);

  fp16_t or_val;
  int unsigned n_drv;

  always_comb begin
    or_val = FP16_ZERO;
    n_drv  = 0;
    for (int i = 0; i < N; i++) begin
      if (drv[i]) begin
        or_val = or_val | data[i];
        n_drv  = n_drv + 1;
      end
    end
    bus      = ext_en ? ext_data : or_val;
    conflict = (n_drv + 32'(ext_en)) > 1;
  end

  a_one_driver: assert property (@(posedge clk) disable iff (!rst_n) !conflict)
    else $error("bcast_bus: %0d drivers in one cycle", n_drv + 32'(ext_en));

endmodule

// core_ctrl: the sequencer of one core.
//
// It accepts one command (cat_pkg::cmd_t) at a time and issues one
// micro-operation (cat_pkg::pe_ctrl_t) per cycle to all PEs of the core.
// The loop nests follow the mapping of a layer onto a core: for every output
// block, NR-wide, a run of multiply-accumulates with the input broadcast on
// one set of buses, NR-1 reduction steps into the diagonal PEs on the other
// set, and one write-back. The forward pass reduces over the column buses;
// the backward pass uses the same weights in place, broadcasts on the column
// buses and reduces over the row buses, which realises the transpose without
// moving any weight. Weight W(j,k) of an m x n layer (m = NR*nin inputs,
// n = NR*nout outputs) lives in PE(j%NR, k%NR) at w_base + (j/NR)*nout + k/NR;
// vector element i lives in diagonal PE(i%NR, i%NR) at base + i/NR.
//
// Issue cycles per command, without stalls:
//   GEMV_FWD  nout*(nin + NR)       GEMV_BWD  nin*(nout + NR)
//   UPDATE    nin*(nout + 1)        SCALE, LOAD, STORE, RING_*  count
// After the last issue the controller spends one cycle draining stage 1 and
// then is ready again; busy falls N+2 cycles after the command is accepted.
// A ring send waits while the output FIFO has no room; a ring receive waits
// for input data (and, when forwarding, for room). These waits are the
// stalls of the design.
//
// The paper names a micro-programmed controller but gives no instruction set;
// this command set and its loop order are this design's own. The overlap of
// one block's reduction with the next block's multiply-accumulates, which the
// paper mentions, is not done here.
module core_ctrl
  import cat_pkg::*;
#(
  parameter int unsigned NR = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // command
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  cmd_t     cmd,
  output logic     busy,
  // micro-operation to the PEs (stage 0)
  output pe_ctrl_t pe_ctrl,
  // SPAD
  output logic     spad_re,
  output logic [SPAD_AW-1:0] spad_raddr,
  output logic     spad_we,        // stage 1: row buses -> SPAD
  output logic [SPAD_AW-1:0] spad_waddr,
  output logic     row_from_spad,  // stage 1: row buses fed by SPAD read data
  // ring
  input  logic     ring_in_valid,
  output logic     ring_in_ready,  // stage 0: ring beat accepted into the core register
  output logic     row_from_ring,  // stage 1: row buses fed by the accepted ring beat
  input  logic [2:0] ring_out_free,
  output logic     ring_push,      // stage 1: row buses -> ring output FIFO
  output logic     stall           // a ring wait held the sequencer this cycle
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  typedef enum logic [2:0] {PH_MAC, PH_RED, PH_WB, PH_LATCH, PH_UPD, PH_LIN} phase_e;

  state_e   state;
  phase_e   ph;
  cmd_t     cq;
  pe_addr_t ob;        // outer (output block) counter
  pe_addr_t ib;        // inner counter
  logic [7:0] step;    // reduction step
  pe_addr_t wptr;      // weight address of the current MAC/UPD
  pe_addr_t rowbase;   // w_base + ob*nout
  logic [CNT_W-1:0] k; // linear counter
  logic [7:0] colsel;  // LOAD/STORE column
  pe_addr_t line;      // LOAD/STORE PE address

  logic issue, last, can_go;
  logic st_q, push_q, spadrow_q, ringrow_q;
  logic [SPAD_AW-1:0] st_addr_q;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // ---- stage-0 micro-operation ---------------------------------------------
  always_comb begin
    pe_ctrl       = '0;
    pe_ctrl.op    = PE_NOP;
    spad_re       = 1'b0;
    spad_raddr    = cq.spad_addr + SPAD_AW'(k);
    ring_in_ready = 1'b0;
    can_go        = 1'b1;
    last          = 1'b0;
    if (state == S_RUN) begin
      unique case (cq.op)
        CMD_GEMV_FWD: begin
          unique case (ph)
            PH_MAC: begin
              pe_ctrl.op = PE_MAC_FWD; pe_ctrl.addr_a = wptr; pe_ctrl.addr_b = cq.x_base + ib;
              pe_ctrl.first = (ib == '0);
            end
            PH_RED: begin pe_ctrl.op = PE_RED_COL; pe_ctrl.sel = step; end
            default: begin
              pe_ctrl.op = PE_WB; pe_ctrl.waddr = cq.y_base + ob; pe_ctrl.relu = cq.relu;
              last = (ob == cq.nout - 1'b1);
            end
          endcase
        end
        CMD_GEMV_BWD: begin
          unique case (ph)
            PH_MAC: begin
              pe_ctrl.op = PE_MAC_BWD; pe_ctrl.addr_a = wptr; pe_ctrl.addr_b = cq.x_base + ib;
              pe_ctrl.first = (ib == '0);
            end
            PH_RED: begin pe_ctrl.op = PE_RED_ROW; pe_ctrl.sel = step; end
            default: begin
              pe_ctrl.op = PE_WB; pe_ctrl.waddr = cq.y_base + ob; pe_ctrl.addr_b = cq.z_base + ob;
              pe_ctrl.dmask = cq.dmask; pe_ctrl.relu = cq.relu;
              last = (ob == cq.nin - 1'b1);
            end
          endcase
        end
        CMD_UPDATE: begin
          if (ph == PH_LATCH) begin
            pe_ctrl.op = PE_LATCH_X; pe_ctrl.addr_b = cq.x_base + ob;
          end else begin
            pe_ctrl.op = PE_UPD; pe_ctrl.addr_a = wptr; pe_ctrl.waddr = wptr;
            pe_ctrl.addr_b = cq.z_base + ib;
            last = (ob == cq.nin - 1'b1) && (ib == cq.nout - 1'b1);
          end
        end
        CMD_SCALE: begin
          pe_ctrl.op = PE_SCALE; pe_ctrl.addr_b = cq.x_base + PE_AW'(k);
          pe_ctrl.waddr = cq.y_base + PE_AW'(k); pe_ctrl.eta = cq.eta;
          last = (k == cq.count - 1'b1);
        end
        CMD_LOAD: begin
          pe_ctrl.op = PE_LD; pe_ctrl.sel = colsel; pe_ctrl.waddr = cq.y_base + line;
          pe_ctrl.mem_b = cq.mem_b;
          spad_re = 1'b1;
          last = (k == cq.count - 1'b1);
        end
        CMD_STORE: begin
          pe_ctrl.op = PE_ST; pe_ctrl.sel = colsel; pe_ctrl.mem_b = cq.mem_b;
          pe_ctrl.addr_a = cq.y_base + line; pe_ctrl.addr_b = cq.y_base + line;
          last = (k == cq.count - 1'b1);
        end
        CMD_RING_SEND: begin
          can_go = (ring_out_free > {2'b00, push_q});
          if (can_go) begin
            pe_ctrl.op = PE_RING_OUT; pe_ctrl.addr_b = cq.x_base + PE_AW'(k);
          end
          last = (k == cq.count - 1'b1);
        end
        default: begin  // CMD_RING_RECV
          can_go = ring_in_valid && (!cq.fwd || (ring_out_free > {2'b00, push_q}));
          if (can_go) begin
            pe_ctrl.op = PE_RING_IN; pe_ctrl.addr_b = cq.y_base + PE_AW'(k);
            pe_ctrl.waddr = cq.y_base + PE_AW'(k); pe_ctrl.add = cq.add; pe_ctrl.relu = cq.relu;
            ring_in_ready = 1'b1;
          end
          last = (k == cq.count - 1'b1);
        end
      endcase
    end
    issue = (state == S_RUN) && can_go;
    stall = (state == S_RUN) && !can_go;
  end

  // ---- sequencing ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ph <= PH_MAC; cq <= '0;
      ob <= '0; ib <= '0; step <= '0; wptr <= '0; rowbase <= '0;
      k <= '0; colsel <= '0; line <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            cq <= cmd;
            ob <= '0; ib <= '0; step <= '0; k <= '0; colsel <= '0; line <= '0;
            rowbase <= cmd.w_base;
            wptr    <= cmd.w_base;
            ph      <= (cmd.op == CMD_UPDATE) ? PH_LATCH : PH_MAC;
            // an empty command finishes at once
            if ((cmd.op inside {CMD_GEMV_FWD, CMD_GEMV_BWD, CMD_UPDATE} &&
                 (cmd.nin == '0 || cmd.nout == '0)) ||
                (!(cmd.op inside {CMD_GEMV_FWD, CMD_GEMV_BWD, CMD_UPDATE}) && cmd.count == '0))
              state <= S_DRAIN;
            else
              state <= S_RUN;
          end
        end
        S_RUN: begin
          if (issue) begin
            if (last) state <= S_DRAIN;
            unique case (cq.op)
              CMD_GEMV_FWD, CMD_GEMV_BWD: begin
                unique case (ph)
                  PH_MAC: begin
                    ib <= ib + 1'b1;
                    wptr <= (cq.op == CMD_GEMV_FWD) ? wptr + cq.nout : wptr + 1'b1;
                    if (ib == ((cq.op == CMD_GEMV_FWD) ? cq.nin : cq.nout) - 1'b1) begin
                      ph <= (NR > 1) ? PH_RED : PH_WB;
                      step <= '0;
                    end
                  end
                  PH_RED: begin
                    step <= step + 1'b1;
                    if (32'(step) == NR - 2) ph <= PH_WB;
                  end
                  default: begin
                    ob <= ob + 1'b1;
                    ib <= '0;
                    ph <= PH_MAC;
                    if (cq.op == CMD_GEMV_FWD) begin
                      wptr <= cq.w_base + ob + 1'b1;
                    end else begin
                      wptr    <= rowbase + cq.nout;
                      rowbase <= rowbase + cq.nout;
                    end
                  end
                endcase
              end
              CMD_UPDATE: begin
                if (ph == PH_LATCH) begin
                  ph <= PH_UPD;
                  ib <= '0;
                end else begin
                  ib   <= ib + 1'b1;
                  wptr <= wptr + 1'b1;
                  if (ib == cq.nout - 1'b1) begin
                    ph <= PH_LATCH;
                    ob <= ob + 1'b1;
                  end
                end
              end
              default: begin
                k <= k + 1'b1;
                if (32'(colsel) == NR - 1) begin
                  colsel <= '0;
                  line   <= line + 1'b1;
                end else begin
                  colsel <= colsel + 1'b1;
                end
              end
            endcase
          end
        end
        default: state <= S_IDLE;  // S_DRAIN
      endcase
    end
  end

  // ---- stage-1 side signals ---------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= 1'b0; push_q <= 1'b0; spadrow_q <= 1'b0; ringrow_q <= 1'b0; st_addr_q <= '0;
    end else begin
      st_q      <= issue && (cq.op == CMD_STORE);
      st_addr_q <= cq.spad_addr + SPAD_AW'(k);
      push_q    <= issue && ((cq.op == CMD_RING_SEND) || ((cq.op == CMD_RING_RECV) && cq.fwd));
      spadrow_q <= issue && (cq.op == CMD_LOAD);
      ringrow_q <= issue && (cq.op == CMD_RING_RECV);
    end
  end

  assign spad_we       = st_q;
  assign spad_waddr    = st_addr_q;
  assign ring_push     = push_q;
  assign row_from_spad = spadrow_q;
  assign row_from_ring = ringrow_q;

endmodule

// Shared types and constants of the training accelerator.
//
// All arithmetic is IEEE binary16 (half precision). A core is driven by
// commands (cmd_t) from the host; its controller turns each command into a
// stream of micro-operations (pe_ctrl_t) that is broadcast to every PE of the
// core. Each PE decides its own role in a micro-operation from its row and
// column index: the diagonal PE PE(i,i) holds the activation and error
// vectors, every PE holds a 2D round-robin share of the weights.
//
// The half-precision format and the 16 KB per PE follow the paper; the command
// set and the micro-operation encoding are this design's own.
package cat_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_QNAN = 16'h7E00;

  // Address width of one PE memory bank (MEM A or MEM B).
  localparam int unsigned PE_AW = 13;
  // Address width of a SPAD line address and of command counts.
  localparam int unsigned SPAD_AW = 16;
  localparam int unsigned CNT_W   = 16;

  typedef logic [PE_AW-1:0] pe_addr_t;

  // Micro-operations executed by all PEs of a core in the same cycle.
  typedef enum logic [3:0] {
    PE_NOP,
    PE_MAC_FWD,   // diag drives row bus with MEMB[addr_b]; all: acc (+)= row_bus * MEMA[addr_a]
    PE_MAC_BWD,   // diag drives col bus with MEMB[addr_b]; all: acc (+)= col_bus * MEMA[addr_a]
    PE_RED_COL,   // step sel: PE(r,c), r=(c+1+sel)%NR, drives col bus with acc; diag adds it
    PE_RED_ROW,   // step sel: PE(r,c), c=(r+1+sel)%NR, drives row bus with acc; diag adds it
    PE_WB,        // diag: MEMB[waddr] = act(acc); drives row bus with the stored value
    PE_LATCH_X,   // diag drives row bus with MEMB[addr_b]; all: xr = row_bus
    PE_UPD,       // diag drives col bus with MEMB[addr_b]; all: MEMA[waddr] = MEMA[addr_a] + xr*col_bus
    PE_SCALE,     // diag: MEMB[waddr] = MEMB[addr_b] * eta
    PE_LD,        // PEs of column sel: MEM(A|B)[waddr] = row_bus (row bus fed by the SPAD)
    PE_ST,        // PEs of column sel drive row bus with MEM(A|B)[addr]
    PE_RING_OUT,  // diag drives row bus with MEMB[addr_b] (row buses go to the ring)
    PE_RING_IN    // row bus fed by the ring; diag: MEMB[waddr] = act(add ? MEMB[addr_b]+bus : bus)
  } pe_op_e;

  typedef struct packed {
    pe_op_e   op;
    pe_addr_t addr_a;  // MEM A read address
    pe_addr_t addr_b;  // MEM B read address
    pe_addr_t waddr;   // write address
    logic [7:0] sel;   // reduction step, or selected column for LD/ST
    logic     first;   // MAC: start a new accumulation (acc treated as 0)
    logic     relu;    // write-back: apply ReLU
    logic     dmask;   // write-back: zero where MEMB[addr_b] (stored activation) <= 0
    logic     add;     // RING_IN: add to the stored value
    logic     mem_b;   // LD/ST: MEM B (1) or MEM A (0)
    fp16_t    eta;     // SCALE: multiplier
  } pe_ctrl_t;

  // Commands accepted by a core.
  typedef enum logic [2:0] {
    CMD_GEMV_FWD,   // y = act(x^T W): x, y in diag MEMB; W in MEMA
    CMD_GEMV_BWD,   // y = (W x) .* f'(z): in-place transpose of the same W
    CMD_UPDATE,     // W += x^T z (z pre-scaled by -eta)
    CMD_SCALE,      // y[i] = x[i] * eta, count words per diag PE
    CMD_LOAD,       // SPAD lines -> PE memory, line t -> column t%NR, address y+t/NR
    CMD_STORE,      // PE memory -> SPAD lines
    CMD_RING_SEND,  // diag MEMB[x+i] -> ring, count beats
    CMD_RING_RECV   // ring -> diag MEMB[y+i] (optionally added, ReLU, forwarded)
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e  op;
    pe_addr_t w_base;   // weight base in MEM A
    pe_addr_t x_base;   // first vector operand in MEM B
    pe_addr_t y_base;   // result vector in MEM B (or PE base for LOAD/STORE)
    pe_addr_t z_base;   // second vector operand in MEM B
    pe_addr_t nin;      // GEMV: number of NR-blocks of the input (row blocks of W)
    pe_addr_t nout;     // GEMV: number of NR-blocks of the output (column blocks of W)
    logic [CNT_W-1:0]   count;     // SCALE/LOAD/STORE/RING: number of words or beats
    logic [SPAD_AW-1:0] spad_addr; // LOAD/STORE: first SPAD line
    logic     mem_b;    // LOAD/STORE: MEM B instead of MEM A
    logic     relu;     // GEMV_FWD / RING_RECV: apply ReLU to the result
    logic     dmask;    // GEMV_BWD: multiply by ReLU'(z)
    logic     add;      // RING_RECV: accumulate into the stored value
    logic     fwd;      // RING_RECV: also pass each beat on along the ring
    fp16_t    eta;      // SCALE: multiplier
  } cmd_t;

endpackage

// overlay_pkg: types and constants shared by the many-core overlay.
//
// The overlay is a row of simple floating-point cores fed by a DMA engine.
// Each core runs a short program held in its configuration memory; one
// instruction describes a two-level loop of identical operations (a "vector
// instruction"), so a core needs almost no control logic.  Everything in
// this package is an encoding chosen for this implementation: the published
// description of the overlay gives the blocks and their roles but no
// instruction format, descriptor format or configuration map.
package overlay_pkg;

  // Data words are IEEE-754 single precision, as in all evaluated workloads.
  localparam int unsigned DATA_W    = 32;
  // Local-memory address field of an instruction.  The field is wide enough
  // for 64K words; a core uses only the low bits its memory needs.
  localparam int unsigned LADDR_W   = 16;
  // Loop-count fields of instructions and DMA descriptors.
  localparam int unsigned CNT_W     = 16;
  // Program counter: up to 64 instructions per core.
  localparam int unsigned PC_W      = 6;
  // Core index on the configuration bus and in DMA stream words.
  localparam int unsigned CORE_ID_W = 8;
  // External-memory word address (32-bit words).
  localparam int unsigned MADDR_W   = 32;

  typedef enum logic [1:0] {OP_HALT = 2'd0, OP_EXEC = 2'd1, OP_LOOP = 2'd2} opcode_e;

  // Arithmetic operation.  PASS forwards operand a unchanged (moves).
  // RECIP, RSQRT and SQRT are piecewise quadratics with loaded coefficients.
  typedef enum logic [2:0] {
    FOP_FMA = 3'd0, FOP_RECIP = 3'd1, FOP_PASS = 3'd2, FOP_RSQRT = 3'd3, FOP_SQRT = 3'd4
  } fop_e;

  // Operand sources: the two input buffers, the two local-memory read
  // ports and two constants.
  typedef enum logic [2:0] {
    SRC_FIFO_A = 3'd0, SRC_FIFO_B = 3'd1, SRC_MEM0 = 3'd2, SRC_MEM1 = 3'd3,
    SRC_ZERO   = 3'd4, SRC_ONE    = 3'd5
  } src_e;

  // Where a word leaving a core through its output buffer goes.
  typedef enum logic [1:0] {ROUTE_BUS = 2'd0, ROUTE_NEXT_A = 2'd1, ROUTE_NEXT_B = 2'd2} route_e;

  // Address generator setting: addr = base + i*s_in + o*s_out.
  typedef struct packed {
    logic [LADDR_W-1:0] base;
    logic [LADDR_W-1:0] s_in;
    logic [LADDR_W-1:0] s_out;
  } agen_t;

  // One core instruction.  OP_EXEC runs n_in*n_out iterations of
  //   result = fop(src_a, src_b, src_c)   (FMA: +/-(a*b) + c)
  // writing the result to local memory at agw and/or sending it.
  // hold_a/hold_b keep a buffer word for a whole inner loop (it is popped on
  // the last inner iteration only).  OP_LOOP jumps to tgt so that the
  // instructions tgt..pc run n_in times in total (one loop level).
  typedef struct packed {
    opcode_e            op;
    fop_e               fop;
    logic               neg;
    src_e               src_a;
    src_e               src_b;
    src_e               src_c;
    logic               hold_a;
    logic               hold_b;
    logic               wr_mem;
    logic               send;
    route_e             route;
    logic [CNT_W-1:0]   n_in;
    logic [CNT_W-1:0]   n_out;
    logic [PC_W-1:0]    tgt;
    agen_t              ag0;   // read port 0
    agen_t              ag1;   // read port 1
    agen_t              agw;   // write port
  } instr_t;

  // Coefficients of one mantissa segment: f(m) ~ c0 + c1*m + c2*m^2, with
  // f(m) = 1/m (reciprocal table) or 1/sqrt(m) (inverse-square-root table).
  typedef struct packed {
    logic [DATA_W-1:0] c2;
    logic [DATA_W-1:0] c1;
    logic [DATA_W-1:0] c0;
  } rcoef_t;

  // Interconnect switch of one core: which source feeds each input buffer.
  typedef struct packed {
    logic a_left;   // 1: buffer A from the left neighbour, 0: from the DMA
    logic b_left;   // 1: buffer B from the left neighbour, 0: from the DMA
  } switch_t;

  // DMA read descriptor: a two-level strided walk over external memory,
  // every element sent to the network.
  typedef enum logic [1:0] {DEST_CORE = 2'd0, DEST_BCAST = 2'd1, DEST_SCATTER = 2'd2} dest_mode_e;

  typedef struct packed {
    logic [MADDR_W-1:0]   base;
    logic [CNT_W-1:0]     n_in;
    logic [MADDR_W-1:0]   s_in;
    logic [CNT_W-1:0]     n_out;
    logic [MADDR_W-1:0]   s_out;
    dest_mode_e           mode;    // SCATTER: destination core = core + outer index
    logic [CORE_ID_W-1:0] core;
    logic                 port;    // 0: buffer A, 1: buffer B
    logic                 cached;  // use the DMA cache (burst lines)
    logic                 flush;   // invalidate the cache before starting
  } rdesc_t;

  // DMA write descriptor of one core: where its results go.
  typedef struct packed {
    logic [MADDR_W-1:0] base;
    logic [CNT_W-1:0]   n_in;
    logic [MADDR_W-1:0] s_in;
    logic [CNT_W-1:0]   n_out;
    logic [MADDR_W-1:0] s_out;
  } wdesc_t;

  // Word on the DMA-to-network stream.
  typedef struct packed {
    logic [DATA_W-1:0]    data;
    logic [CORE_ID_W-1:0] core;
    logic                 bcast;
    logic                 port;
  } dword_t;

  // Word in a core's output buffer.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    route_e            route;
  } oword_t;

  // Configuration bus (written by the host processor).
  typedef enum logic [2:0] {
    CT_IMEM = 3'd0,   // core program word:   core, index = pc
    CT_RCOEF = 3'd1,  // coefficient segment: core, index = {table, segment}
    CT_SWITCH = 3'd2, // switch of a core:    core
    CT_RDESC = 3'd3,  // push a DMA read descriptor
    CT_WDESC = 3'd4,  // push a DMA write descriptor for a core
    CT_START = 3'd5   // start the cores whose bits are set in the data
  } cfg_target_e;

  typedef struct packed {
    cfg_target_e          target;
    logic [CORE_ID_W-1:0] core;
    logic [11:0]          index;
  } cfg_addr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);
  localparam int unsigned RDESC_W = $bits(rdesc_t);
  localparam int unsigned CFG_W   = (INSTR_W > RDESC_W) ? INSTR_W : RDESC_W;

endpackage

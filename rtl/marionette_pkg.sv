// Marionette shared types and constants.
//
// A control token is an instruction address travelling on the control flow
// plane; a data word travels on the data flow plane with a valid bit.  The
// PE instruction is a 64-bit word whose layout is this design's own choice:
// the control-flow fields (mode, next addresses, loop fields) sit next to
// the data-flow fields (opcode, operand sources, immediates).  Sizes that
// come from the source publication: 4x4 PEs, 32-bit data, 16 KB data
// scratchpad, 2 KB instruction scratchpad, a 64x64 Benes network fed by two
// 16x16 consecutive-spreading networks.  All other sizes are chosen here.
package marionette_pkg;

  localparam int unsigned DATA_W     = 32;  // all data types are 32-bit
  localparam int unsigned ADDR_W     = 3;   // per-PE instruction address
  localparam int unsigned IB_DEPTH   = 1 << ADDR_W;
  localparam int unsigned INST_W     = 64;
  localparam int unsigned ROWS       = 4;
  localparam int unsigned COLS       = 4;
  localparam int unsigned NUM_PE     = ROWS * COLS;
  localparam int unsigned CNET_N     = 64;  // Benes size
  localparam int unsigned CS_N       = 16;  // CS network size
  localparam int unsigned BENES_CFG_W = CNET_N * (2 * $clog2(CNET_N) - 1);  // 2 select bits per 2x2 switch
  localparam int unsigned CS_CFG_W   = CS_N * $clog2(CS_N);
  localparam int unsigned NET_CFG_W  = BENES_CFG_W + 2 * CS_CFG_W;
  localparam int unsigned N_CFIFO    = 8;
  localparam int unsigned DMEM_BYTES = 16384;
  localparam int unsigned DMEM_WORDS = DMEM_BYTES / 4;
  localparam int unsigned DMEM_AW    = $clog2(DMEM_WORDS);
  localparam int unsigned NBANKS     = 4;
  localparam int unsigned IMEM_WORDS = 2048 / (INST_W / 8);
  localparam int unsigned IMEM_AW    = $clog2(IMEM_WORDS);

  // Control network port map (Benes side).  Inputs 0..15 come from CS0
  // (PE port 0), 16..31 from CS1 (PE port 1); outputs 0..15 feed PE input 0,
  // 16..31 feed PE input 1.  The remaining 32 lines serve the controller,
  // the control FIFOs and the spare (scalable) interface.
  localparam int unsigned NI_CTRL    = 32;  // 2 controller outputs
  localparam int unsigned NI_CFIFO   = 34;  // 8 control FIFO outputs
  localparam int unsigned NI_EXT     = 42;  // 22 spare inputs
  localparam int unsigned NO_CTRL    = 32;  // 2 controller inputs
  localparam int unsigned NO_PUSHA   = 34;  // 8 FIFO push ports A
  localparam int unsigned NO_PUSHB   = 42;  // 8 FIFO push ports B
  localparam int unsigned NO_POP     = 50;  // 8 FIFO pop requests
  localparam int unsigned NO_EXT     = 58;  // 6 spare outputs
  localparam int unsigned N_EXT_IN   = CNET_N - NI_EXT;
  localparam int unsigned N_EXT_OUT  = CNET_N - NO_EXT;

  // Token whose address is all ones tells the controller the program ended.
  localparam logic [ADDR_W-1:0] DONE_ADDR = '1;

  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] addr;
  } token_t;

  typedef struct packed {
    logic              valid;
    logic [DATA_W-1:0] data;
  } dword_t;

  typedef enum logic [1:0] {
    MODE_DFG    = 2'd0,
    MODE_BRANCH = 2'd1,
    MODE_LOOP   = 2'd2
  } mode_e;

  typedef enum logic [2:0] {
    SRC_N    = 3'd0,
    SRC_E    = 3'd1,
    SRC_S    = 3'd2,
    SRC_W    = 3'd3,
    SRC_LREG = 3'd4,
    SRC_IMM  = 3'd5,
    SRC_NONE = 3'd6
  } src_e;

  typedef enum logic [4:0] {
    OP_NOP  = 5'd0,
    OP_ADD  = 5'd1,
    OP_SUB  = 5'd2,
    OP_MUL  = 5'd3,
    OP_AND  = 5'd4,
    OP_OR   = 5'd5,
    OP_XOR  = 5'd6,
    OP_SHL  = 5'd7,
    OP_SHR  = 5'd8,
    OP_SRA  = 5'd9,
    OP_LT   = 5'd10,
    OP_GE   = 5'd11,
    OP_EQ   = 5'd12,
    OP_NE   = 5'd13,
    OP_MIN  = 5'd14,
    OP_MAX  = 5'd15,
    OP_PASS = 5'd16,
    OP_LTU  = 5'd17,
    OP_LD   = 5'd18,
    OP_ST   = 5'd19
  } op_e;

  // 64-bit PE instruction.
  typedef struct packed {
    logic [15:0]       imm2;    // loop start value
    logic [15:0]       imm;     // immediate / memory offset / loop bound
    logic [3:0]        step;    // loop step
    logic [2:0]        ii;      // loop initiation interval minus one
    logic [ADDR_W-1:0] addr_f;  // branch not-taken / loop-end address
    logic [ADDR_W-1:0] addr_t;  // branch taken / continue / proactive address
    logic              oport;   // control output port for addr_t tokens
    logic              prio;    // scheduler: 0 = input 0 first, 1 = input 1 first
    logic              emit;    // proactive emission enable
    logic              once;    // configuration serves one firing only
    logic              out_en;  // drive result onto data network
    logic              wr_lreg; // write result into local register
    mode_e             mode;
    src_e              src_b;
    src_e              src_a;
    op_e               op;
  } inst_t;

  typedef struct packed {
    logic              req;
    logic              we;
    logic [DMEM_AW-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  function automatic logic [DATA_W-1:0] sext16(input logic [15:0] v);
    return {{(DATA_W-16){v[15]}}, v};
  endfunction

endpackage

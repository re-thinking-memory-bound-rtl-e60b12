// cgra_pkg: types and constants shared by the CGRA, its memory crossbars and
// the cache hierarchy.
//
// A datum travelling through the array is a 32-bit value plus a "dummy" flag.
// The flag marks values that were substituted for missing data during runahead
// execution; it is propagated by the ALUs (an OR of the operand flags) and
// lets the memory crossbars drop requests whose address or data depend on it.
//
// Sizes follow the paper's "Reconfig" configuration (8x8 array, 4 virtual SPMs
// of 2 KB, 4 x 4 KB 8-way L1 ways pooled as 32 ways, 16 MSHRs per L1,
// 128 KB 8-way L2 with 128 B lines, 8-cycle L2 hit). Widths, encodings and
// the size of structures the paper does not size are this design's choices.
//
// Lint note: CFG_W and PERM_NONE are constants for users of the package
// (testbenches, host software); some builds do not reference them.
// The line-geometry constants are used by the cache modules; a lint run of
// the package alone reports them as unused.
package cgra_pkg;

  // ---------------------------------------------------------------- data word
  typedef struct packed {
    logic        dmy;   // 1: dummy value produced during runahead
    logic [31:0] v;
  } word_t;

  // ---------------------------------------------------------------- ALU ops
  typedef enum logic [4:0] {
    OP_NOP   = 5'd0,
    OP_ADD   = 5'd1,
    OP_SUB   = 5'd2,
    OP_MUL   = 5'd3,
    OP_AND   = 5'd4,
    OP_OR    = 5'd5,
    OP_XOR   = 5'd6,
    OP_SHL   = 5'd7,
    OP_LSHR  = 5'd8,
    OP_ASHR  = 5'd9,
    OP_CMPEQ = 5'd10,
    OP_CMPLT = 5'd11,   // signed less-than
    OP_MOV   = 5'd12,   // RES <= I1
    OP_LOAD  = 5'd13,   // memory PEs only: RES <= mem[I1]
    OP_STORE = 5'd14    // memory PEs only: mem[I1] <= I2
  } op_e;

  // crossbar sources inside a PE
  typedef enum logic [3:0] {
    SRC_IN_N  = 4'd0,
    SRC_IN_E  = 4'd1,
    SRC_IN_S  = 4'd2,
    SRC_IN_W  = 4'd3,
    SRC_R0    = 4'd4,
    SRC_R1    = 4'd5,
    SRC_R2    = 4'd6,
    SRC_R3    = 4'd7,
    SRC_RES   = 4'd8,
    SRC_CONST = 4'd9,
    SRC_ZERO  = 4'd10
  } src_e;

  // One context of a PE's configuration memory (128 bits when packed).
  typedef struct packed {
    logic [31:0] imm;       // constant source
    op_e         op;        // operation executed on the current P/I1/I2
    logic        pred_en;   // 1: skip the operation when P is zero
    src_e        sel_p;     // operand registers loaded for the next context
    src_e        sel_i1;
    src_e        sel_i2;
    logic [2:0]  opnd_we;   // {P, I2, I1} load enables
    src_e        sel_n;     // output port drivers (registered sources only)
    src_e        sel_e;
    src_e        sel_s;
    src_e        sel_w;
    logic [3:0]  r_we;      // R0..R3 capture inputs N,E,S,W
    logic [54:0] rsvd;
  } cfg_word_t;

  localparam int CFG_W = $bits(cfg_word_t);

  // ---------------------------------------------------------------- PE <-> memory
  typedef struct packed {
    logic        valid;
    logic        we;        // store
    logic [31:0] addr;
    logic [31:0] wdata;
    logic        addr_dmy;  // address depends on a dummy value
    logic        data_dmy;  // store data depends on a dummy value
  } mem_req_t;

  // ---------------------------------------------------------------- L1 access kinds
  typedef enum logic [1:0] {
    ACC_LOAD     = 2'd0,
    ACC_STORE    = 2'd1,
    ACC_PREFETCH = 2'd2     // runahead read or store converted to a read
  } acc_e;

  // Load/Store Table entry type (Fig 10 "Type")
  typedef enum logic [1:0] {
    LST_LW  = 2'd0,
    LST_SW  = 2'd1,
    LST_PF  = 2'd2
  } lst_type_e;

  // ---------------------------------------------------------------- geometry
  localparam int PHYS_LINE_B   = 32;               // physical L1 line, bytes
  localparam int PHYS_LINE_W   = PHYS_LINE_B * 8;  // 256 bits
  localparam int L2_LINE_B     = 128;              // = largest virtual L1 line
  localparam int L2_LINE_W     = L2_LINE_B * 8;    // 1024 bits
  localparam int MAX_M         = 2;                // virtual line = 2^m physical lines
  localparam int PHYS_PER_L2   = L2_LINE_B / PHYS_LINE_B;

  // cache way permission register value meaning "not allocated"
  localparam logic [3:0] PERM_NONE = 4'hF;

endpackage

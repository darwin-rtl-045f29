// darwin_pkg: shared constants, instruction formats and the internal PIM
// command type of the Darwin multi-level processing-in-memory design.
//
// The 64-bit PIM instruction has three formats (BPU, BGPU, data movement)
// whose field positions follow the published instruction layout. The split
// of the opcode into a 2-bit category and an operation code, and the
// encodings of the operations and operand locations, are this design's own
// choice. Timing constants are DRAM timings of a GDDR6 device expressed in
// 2 ns cycles of the 500 MHz logic clock.
package darwin_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int DATA_W    = 32;           // one tuple / OID: 4 bytes
  localparam int LANES     = 8;            // 4-byte lanes per 32B column access
  localparam int IO_W      = DATA_W * LANES;  // bank I/O width, 256 bits
  localparam int ROW_W     = 14;           // 16384 rows
  localparam int COL_W     = 6;            // 64 column accesses per row
  localparam int BANK_W    = 2;            // 4 banks per bank group
  localparam int ID_W      = 6;            // thread (bank group) ID
  localparam int REG_SLOTS = 4;            // 128B register = 4 x 32B
  localparam int BITMASK_W = 512;          // bitmask register of a BPU
  localparam int VEC_WORDS = 32;           // BGPU vector register: 4B x 32
  localparam int NCMD_W    = 7;            // nCMD 0..64
  localparam int STEP_W    = 5;            // step1/step2: -16..15

  typedef logic [DATA_W-1:0] elem_t;
  typedef logic [IO_W-1:0]   word_t;

  // ------------------------------------------------------------ opcodes
  typedef enum logic [1:0] {
    CAT_BPU  = 2'd0,
    CAT_BGPU = 2'd1,
    CAT_MOVE = 2'd2,
    CAT_RSVD = 2'd3
  } cat_e;

  typedef enum logic [3:0] {
    BOP_ADD    = 4'd0,
    BOP_SUB    = 4'd1,
    BOP_MUL    = 4'd2,
    BOP_MIN    = 4'd3,
    BOP_MAX    = 4'd4,
    BOP_SORT   = 4'd5,
    BOP_CMP_LT = 4'd6,
    BOP_CMP_GT = 4'd7,
    BOP_CMP_EQ = 4'd8,
    BOP_LOAD   = 4'd9,
    BOP_STORE  = 4'd10,
    BOP_NOP    = 4'd15
  } bpu_op_e;

  typedef enum logic [1:0] {
    GOP_SETUP_IN  = 2'd0,   // input attribute address, initial OID
    GOP_SETUP_OUT = 2'd1,   // output address
    GOP_SETUP_NUM = 2'd2,   // second input address, tuple numbers
    GOP_START     = 2'd3    // imm[0]: 0 project, 1 join; imm[1]: OID-list input
  } bgpu_op_e;

  typedef enum logic [1:0] {
    MOP_MOVE = 2'd0,
    MOP_ACT  = 2'd1,
    MOP_NOP  = 2'd2
  } move_op_e;

  // BPU input source / output destination
  typedef enum logic [2:0] {
    LOC_MEM     = 3'd0,
    LOC_ROWA    = 3'd1,
    LOC_OIDA    = 3'd2,
    LOC_ROWB    = 3'd3,
    LOC_OIDB    = 3'd4,
    LOC_BITMASK = 3'd5
  } bpu_loc_e;

  // data-movement source / destination
  typedef enum logic [2:0] {
    MLOC_MEM     = 3'd0,
    MLOC_BGPU    = 3'd1,
    MLOC_CHIPBUF = 3'd2,
    MLOC_RANKBUF = 3'd3
  } move_loc_e;

  // ------------------------------------------------- instruction formats
  typedef struct packed {
    logic [ID_W-1:0]   id;        // [63:58]
    logic [1:0]        cat;       // [57:56]
    logic [3:0]        op;        // [55:52]
    logic [ROW_W-1:0]  row;       // [51:38]
    logic [COL_W-1:0]  col1;      // [37:32]
    logic [COL_W-1:0]  col2;      // [31:26]
    logic [2:0]        src;       // [25:23]
    logic [2:0]        dst;       // [22:20]
    logic [2:0]        perm;      // [19:17]
    logic [NCMD_W-1:0] ncmd;      // [16:10]
    logic [STEP_W-1:0] step1;     // [9:5]
    logic [STEP_W-1:0] step2;     // [4:0]
  } bpu_inst_t;

  typedef struct packed {
    logic [ID_W-1:0]   id;        // [63:58]
    logic [1:0]        cat;       // [57:56]
    logic [1:0]        op;        // [55:54]
    logic [BANK_W-1:0] bank;      // [53:52]
    logic [ROW_W-1:0]  row;       // [51:38]
    logic [COL_W-1:0]  col;       // [37:32]
    logic [31:0]       imm;       // [31:0]
  } bgpu_inst_t;

  typedef struct packed {
    logic [ID_W-1:0]   id;        // [63:58]
    logic [1:0]        cat;       // [57:56]
    logic [1:0]        op;        // [55:54]
    logic [BANK_W-1:0] bank;      // [53:52]
    logic [ROW_W-1:0]  row;       // [51:38]
    logic [COL_W-1:0]  col;       // [37:32]
    logic [5:0]        regidx;    // [31:26]
    logic [2:0]        src;       // [25:23]
    logic [2:0]        dst;       // [22:20]
    logic [7:0]        pidx;      // [19:12]
    logic [NCMD_W-1:0] ncmd;      // [11:5]
    logic [STEP_W-1:0] step1;     // [4:0]
  } move_inst_t;

  // ------------------------------------------------- internal PIM command
  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,   // open row (scheduler precharges first if needed)
    CMD_PRE  = 3'd2,
    CMD_RD   = 3'd3,
    CMD_WR   = 3'd4,
    CMD_COMP = 3'd5    // register-only BPU/BGPU operation, no bank access
  } cmd_type_e;

  // where read data goes / write data comes from
  typedef enum logic [2:0] {
    RT_BPU     = 3'd0,
    RT_VEC     = 3'd1,  // BGPU vector register A/B
    RT_PROJ    = 3'd2,  // BGPU project unit (read) / output FIFO (write)
    RT_JOIN    = 3'd3,  // BGPU join unit input registers
    RT_CHIPBUF = 3'd4,
    RT_RANKBUF = 3'd5,
    RT_NONE    = 3'd7
  } route_e;

  typedef struct packed {
    cmd_type_e         typ;
    logic              all_banks;   // BPU commands go to every bank of the group
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;         // memory column (= col1 for BPU)
    logic [COL_W-1:0]  col2;        // second operand column / register slot
    route_e            route;
    bpu_op_e           bop;
    logic [2:0]        src;
    logic [2:0]        dst;
    logic [2:0]        perm;
    logic [5:0]        idx;         // register / buffer index
    logic [7:0]        aux;         // project lane select or permute index
  } pim_cmd_t;

  // command seen by one bank
  typedef struct packed {
    cmd_type_e        typ;          // CMD_NOP, CMD_ACT, CMD_PRE, CMD_RD, CMD_WR
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
  } dram_cmd_t;

  // ---------------------------------------------------- timing (cycles)
  localparam int T_RCD  = 12;   // 24 ns
  localparam int T_RAS  = 27;   // 54 ns
  localparam int T_RP   = 12;   // not given, taken equal to tRCD
  localparam int T_RRD  = 5;    // 9 ns
  localparam int T_FAW  = 16;   // 32 ns
  localparam int T_CCDL = 2;    // 4 ns
  localparam int RL     = 4;    // read / write data latency

endpackage

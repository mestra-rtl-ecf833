// mestra_pkg: types and constants shared by the virtualized CGRA.
//
// The array is split into homogeneous vCGRA regions (3x5 PEs each, 4x4 regions in the
// main configuration). PEs exchange 32-bit tokens over an elastic 2D mesh; every token
// carries one predicate bit that models the shadow predicate network running parallel
// to the data network. Regions are driven by the host through a command interface
// (CONFIGURE, EXECUTE, HALT, SNAPSHOT, RESET) and share one word-addressed global memory.
//
// Following the paper: region and array sizes, LS/FC placement, 32-bit integer datapath,
// three-level loop descriptors, the command and state names of the controller.
// Own choices: all encodings, the configuration-word and snapshot layouts, the memory
// request/response format and the TCDM address window.
// Tool note: the mesh source codes SRC_N..SRC_W and SRC_RF0 document the encoding; the
// PEs decode them arithmetically (code < 4 = mesh port), so lint lists them as unused.
package mestra_pkg;

  localparam int unsigned DATA_W = 32;
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned TAG_W  = 8;   // [3:0] master inside a region, [7:4] region

  // Words of configuration memory per PE, and state-critical words read back per PE.
  localparam int unsigned CFG_WORDS   = 16;
  localparam int unsigned STATE_WORDS = 8;
  localparam int unsigned ITER_W      = 16;  // width of one AGU loop counter (at most 16)

  // Word addresses with bit 31 set go to the region's TCDM, all others to global memory.
  localparam int unsigned TCDM_SEL_BIT = 31;

  // Mesh directions. Ports of a PE are indexed by these values.
  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_E = 2'd1,
    DIR_S = 2'd2,
    DIR_W = 2'd3
  } dir_e;

  // One token on the data network plus its shadow predicate bit.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic              pred;
  } token_t;

  // Memory request and response (one word per beat; every request, read or write,
  // returns exactly one response carrying the request's tag).
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
    logic [TAG_W-1:0]  tag;
  } mem_req_t;

  typedef struct packed {
    logic              we;
    logic [DATA_W-1:0] rdata;
    logic [TAG_W-1:0]  tag;
  } mem_rsp_t;

  // Host commands written to a region's FFA register file.
  typedef enum logic [2:0] {
    CMD_NONE      = 3'd0,
    CMD_CONFIGURE = 3'd1,
    CMD_EXECUTE   = 3'd2,
    CMD_HALT      = 3'd3,
    CMD_SNAPSHOT  = 3'd4,
    CMD_RESET     = 3'd5
  } cmd_e;

  // Region states reported to the host.
  typedef enum logic [2:0] {
    RS_IDLE       = 3'd0,
    RS_CONFIGURED = 3'd1,
    RS_EXECUTING  = 3'd2,
    RS_DONE       = 3'd3,
    RS_HALTED     = 3'd4,
    RS_SNAPSHOT   = 3'd5
  } rstate_e;

  // FC PE operations (32-bit integer). Compare ops pass operand A as data and put the
  // comparison result on the predicate bit.
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_PASS = 4'd1,
    OP_ADD  = 4'd2,
    OP_SUB  = 4'd3,
    OP_MUL  = 4'd4,
    OP_AND  = 4'd5,
    OP_OR   = 4'd6,
    OP_XOR  = 4'd7,
    OP_SHL  = 4'd8,
    OP_SRA  = 4'd9,
    OP_MIN  = 4'd10,
    OP_MAX  = 4'd11,
    OP_LT   = 4'd12,
    OP_GT   = 4'd13,
    OP_EQ   = 4'd14
  } fc_op_e;

  // Operand sources of an FC PE: a mesh input port or a register-file entry.
  localparam logic [2:0] SRC_N   = 3'd0;
  localparam logic [2:0] SRC_E   = 3'd1;
  localparam logic [2:0] SRC_S   = 3'd2;
  localparam logic [2:0] SRC_W   = 3'd3;
  localparam logic [2:0] SRC_RF1 = 3'd4;  // immediate constant
  localparam logic [2:0] SRC_RF2 = 3'd5;  // immediate constant
  localparam logic [2:0] SRC_RF3 = 3'd6;  // previous result
  localparam logic [2:0] SRC_RF0 = 3'd7;  // accumulator

  // FC PE configuration word 0. Words 1..4 initialise register-file entries RF0..RF3;
  // word 1 is also the value RF0 returns to after each emitted accumulation.
  typedef struct packed {
    logic [15:0] acc_len;   // results folded into RF0 per emitted token (0 or 1: every result)
    logic        acc_en;    // write each result to RF0 and emit every acc_len results
    logic        pred_en;   // if A's predicate is 0, forward operand B instead of the result
    logic [3:0]  out_mask;  // output crossbar: one bit per direction N,E,S,W
    logic [2:0]  src_b;
    logic [2:0]  src_a;
    fc_op_e      op;
  } fc_cfg_t;

  // LS PE configuration word 0. Words 1..7 hold the load loop descriptor and words 8..14
  // the store loop descriptor, each as base, stride0..2, bound0..2 (dimension 0 innermost).
  typedef struct packed {
    logic [23:0] rsvd;
    logic [3:0]  out_mask;  // directions that receive loaded tokens
    dir_e        st_src;    // input port that supplies store data
    logic        st_en;
    logic        ld_en;
  } ls_cfg_t;

  // Three-level affine loop descriptor: addr = base + i0*stride0 + i1*stride1 + i2*stride2.
  typedef struct packed {
    logic [ADDR_W-1:0] base;
    logic [2:0][ADDR_W-1:0] stride;
    logic [2:0][ITER_W-1:0] bound;   // 0 is treated as 1
  } agu_desc_t;

  // Snapshot layout of an FC PE: word 0 = flags (below), 1 = A, 2 = B, 3 = R, 4..7 = RF0..RF3.
  // Flags: [0] A valid [1] A pred [2] B valid [3] B pred [4] R valid [5] R pred
  //        [9:6] output directions already served [31:16] accumulation count.
  // Snapshot layout of an LS PE: 0 = load {i1, i0}, 1 = load {done (bit 16), i2},
  // 2 = output token data, 3 = {[5:2] directions already served, [1] pred, [0] valid},
  // 4 = store {i1, i0}, 5 = store {done, i2}, 6..7 = 0.

  function automatic logic [1:0] opposite(input logic [1:0] d);
    return d ^ 2'd2;
  endfunction

endpackage

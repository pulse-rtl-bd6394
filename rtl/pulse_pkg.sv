// pulse_pkg: types and constants shared by the PULSE pointer-traversal
// accelerator, its in-network router and their testbenches.
//
// Words are 64 bits (pointers are uintptr_t).  The memory and packet buses are
// 512 bits wide (one 64 B beat).  An iterator's state is a cur_ptr register, a
// scratch_pad of SP_WORDS words, the data line loaded at cur_ptr (up to 256 B,
// the largest aggregated LOAD) and its code (CODE_DEPTH instructions).
//
// Instruction encoding (this design's own; the ISA classes and mnemonics are
// the paper's): 64 bits = {op[3:0], cond[2:0], rsv, dst[7:0], a[7:0], b[7:0],
// imm[31:0]}.  An operand specifier is {class[1:0], index[5:0]} naming a
// scratch_pad word, a data word, cur_ptr or the sign-extended immediate, so
// instructions work directly on workspace state, with no separate register file.
//
// Packet format (same for requests and responses): one header beat, SP_BEATS
// scratch_pad beats, CODE_BEATS code beats, 13 beats in all.
package pulse_pkg;

  localparam int XLEN        = 64;
  localparam int BEAT_W      = 512;
  localparam int BEAT_WORDS  = BEAT_W / XLEN;   // 8
  localparam int LINE_BEATS  = 4;               // 256 B aggregated LOAD
  localparam int DATA_WORDS  = LINE_BEATS * BEAT_WORDS;
  localparam int SP_WORDS    = 32;              // 256 B scratch_pad
  localparam int SP_BEATS    = SP_WORDS / BEAT_WORDS;
  localparam int CODE_DEPTH  = 64;
  localparam int CODE_BEATS  = CODE_DEPTH / BEAT_WORDS;
  localparam int PKT_BEATS   = 1 + SP_BEATS + CODE_BEATS;

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_LOAD     = 4'd1,   // aggregated load; imm = bytes; done by a memory pipeline
    OP_STORE    = 4'd2,   // data[dst.idx] <= a; line written back at iteration end
    OP_ADD      = 4'd3,
    OP_SUB      = 4'd4,
    OP_MUL      = 4'd5,
    OP_DIV      = 4'd6,   // unsigned
    OP_AND      = 4'd7,
    OP_OR       = 4'd8,
    OP_NOT      = 4'd9,
    OP_MOVE     = 4'd10,
    OP_COMPARE  = 4'd11,  // flags <= compare(a, b)
    OP_JUMP     = 4'd12,  // if cond: pc <= pc + imm (imm > 0 only)
    OP_RETURN   = 4'd13,
    OP_NEXT_ITER= 4'd14
  } opcode_e;

  typedef enum logic [2:0] {
    C_AL = 3'd0, C_EQ = 3'd1, C_NE = 3'd2, C_LT = 3'd3,
    C_GE = 3'd4, C_LTU = 3'd5, C_GEU = 3'd6
  } cond_e;

  typedef enum logic [1:0] {OC_SP = 2'd0, OC_DATA = 2'd1, OC_CUR = 2'd2, OC_IMM = 2'd3} opclass_e;

  typedef struct packed {
    opclass_e   cls;
    logic [5:0] idx;
  } operand_t;

  typedef struct packed {
    opcode_e     op;
    cond_e       cond;
    logic        rsv;
    operand_t    dst;
    operand_t    a;
    operand_t    b;
    logic [31:0] imm;
  } instr_t;

  // Packet status: what the receiver of a packet must do with it.
  typedef enum logic [7:0] {
    ST_REQ       = 8'd0,  // execute (request from CPU, or re-routed by the switch)
    ST_DONE      = 8'd1,  // RETURN reached
    ST_MAX_ITER  = 8'd2,  // iteration bound hit; CPU may continue from cur_ptr
    ST_NOT_LOCAL = 8'd3,  // cur_ptr not on this memory node: switch re-routes
    ST_PROT      = 8'd4,  // protection failure
    ST_ILLEGAL   = 8'd5,  // backward jump or code overrun
    ST_INVALID   = 8'd6   // switch found no memory node for cur_ptr
  } status_e;

  typedef struct packed {
    logic [63:0]  req_id;   // {cpu node id[15:0], request counter[47:0]}
    logic [63:0]  cur_ptr;
    logic [15:0]  iter_cnt; // iterations executed so far for this request
    status_e      status;
    logic [7:0]   node;     // memory node that last handled the packet
    logic [351:0] rsv;
  } hdr_t;

  typedef struct packed {
    logic [BEAT_W-1:0] data;
    logic              last;
  } beat_t;

  // Memory-port request (one burst of 'beats' 64 B beats).
  typedef struct packed {
    logic        write;
    logic [63:0] addr;
    logic [7:0]  beats;
  } mreq_t;

  typedef enum logic [1:0] {LD_NEXT = 2'd0, LD_RETURN = 2'd1, LD_ILLEGAL = 2'd2} lp_done_e;
  typedef enum logic [1:0] {MS_OK = 2'd0, MS_MISS = 2'd1, MS_PROT = 2'd2} ms_e;

  // Translation / protection table entry: [vbase, vlimit) -> pbase.
  typedef struct packed {
    logic        valid;
    logic        rd;
    logic        wr;
    logic [63:0] vbase;
    logic [63:0] vlimit;
    logic [63:0] pbase;
  } xl_entry_t;

  // Switch routing entry: [base, limit) lives on memory node 'node'.
  typedef struct packed {
    logic        valid;
    logic [63:0] base;
    logic [63:0] limit;
    logic [7:0]  node;
  } rt_entry_t;

  // Bank regions addressed by the network stack.
  typedef enum logic [1:0] {RG_CUR = 2'd0, RG_SP = 2'd1, RG_CODE = 2'd2} region_e;

endpackage

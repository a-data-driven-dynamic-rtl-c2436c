// canon_pkg -- types and constants shared by the Canon PE array and its
// orchestrators.
//
// Architecture numbers that follow the paper: an 8 x 8 array of PEs, each with a
// 4-lane INT8 vector lane, 4 KB of data memory and a 64-byte dual-port
// scratchpad (16 vector entries of 4 bytes); a 3-stage PE pipeline (LOAD,
// COMPUTE, COMMIT), so an instruction reaches the next PE of the row 3 cycles
// later; one orchestrator per row whose look-up table has 2^10 entries of 48 bits.
//
// Choices of this design (the paper fixes none of them): the instruction
// format <op> <op1> <op2> <res> uses 12-bit addresses in one unified space
// {region[1:0], index[9:0]} covering data memory, scratchpad, router links and
// SIMD registers; the opcode list; the extra router-bypass field of an
// instruction; the 48-bit layout of a look-up-table word; and the 10-bit
// look-up-table index {state[2:0], input tag[2:0], message id[1:0], cond[1:0]}.
package canon_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned ROWS       = 8;     // Table 1: 8 x 8 array
  localparam int unsigned COLS       = 8;
  localparam int unsigned LANES      = 4;     // Table 1: 4-SIMD
  localparam int unsigned DATA_W     = 8;     // Table 1: INT8
  localparam int unsigned VEC_W      = LANES * DATA_W;
  localparam int unsigned DMEM_WORDS = 1024;  // 4 KB / 4-byte vector word
  localparam int unsigned SPAD_WORDS = 16;    // 64 B / 4-byte vector word
  localparam int unsigned NREGS      = 4;     // SIMD registers per PE (assumed)
  localparam int unsigned PE_STAGES  = 3;     // LOAD, COMPUTE, COMMIT
  localparam int unsigned ADDR_W     = 12;
  localparam int unsigned LUT_IN_W   = 10;    // 3 + 3 + 2 x 2
  localparam int unsigned LUT_W      = 48;
  localparam int unsigned IDX_W      = 16;    // row / column ids in the input stream

  typedef logic [VEC_W-1:0]  vec_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [IDX_W-1:0]  idx_t;

  // ------------------------------------------------------- unified address space
  typedef enum logic [1:0] {
    RG_DMEM = 2'b00,   // index[9:0]  data memory word
    RG_SPAD = 2'b01,   // index[3:0]  scratchpad entry
    RG_LINK = 2'b10,   // index[2:0]  router port, immediate or null
    RG_REG  = 2'b11    // index[1:0]  SIMD register
  } region_e;

  typedef enum logic [1:0] {DIR_N = 2'd0, DIR_E = 2'd1, DIR_S = 2'd2, DIR_W = 2'd3} dir_e;

  localparam logic [2:0] LK_IMM  = 3'd4;   // instruction's immediate vector
  localparam logic [2:0] LK_NULL = 3'd7;   // reads zero, writes nothing

  function automatic addr_t a_dmem(input int unsigned i); return {RG_DMEM, 10'(i)};            endfunction
  function automatic addr_t a_spad(input int unsigned i); return {RG_SPAD, 10'(i)};            endfunction
  function automatic addr_t a_link(input dir_e d);        return {RG_LINK, 8'd0, d};           endfunction
  function automatic addr_t a_reg (input int unsigned i); return {RG_REG,  10'(i)};            endfunction
  localparam addr_t A_IMM  = {RG_LINK, 7'd0, LK_IMM};
  localparam addr_t A_NULL = {RG_LINK, 7'd0, LK_NULL};

  function automatic region_e a_region(input addr_t a); return region_e'(a[11:10]); endfunction
  // a local storage location (data memory, scratchpad or register)
  function automatic logic a_is_local(input addr_t a); return a[11:10] != RG_LINK; endfunction
  // a router port N/E/S/W
  function automatic logic a_is_dir(input addr_t a);
    return (a[11:10] == RG_LINK) && (a[2] == 1'b0);
  endfunction

  // ------------------------------------------------------------- opcodes
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,   // nothing
    OP_MOV    = 4'd1,   // res = op1
    OP_ADD    = 4'd2,   // res = op1 + op2
    OP_SUB    = 4'd3,   // res = op1 - op2
    OP_MUL    = 4'd4,   // res = op1 * op2
    OP_MAC    = 4'd5,   // res = res + op1 * op2
    OP_MAX    = 4'd6,   // signed lane maximum
    OP_MIN    = 4'd7,   // signed lane minimum
    OP_AND    = 4'd8,
    OP_OR     = 4'd9,
    OP_XOR    = 4'd10,
    OP_REDSUM = 4'd11,  // res.lane0 = sum of op1 lanes + op2.lane0, other lanes 0
    OP_MOVCLR = 4'd12   // res = op1, and op1 (a local location) is cleared to 0
  } opcode_e;

  // An instruction as it travels along a row of PEs.
  typedef struct packed {
    logic    cfg;       // configuration-only: travels without side effects
    opcode_e op;
    addr_t   op1;
    addr_t   op2;
    addr_t   res;
    logic    byp_en;    // router bypass: link byp_src -> link byp_dst
    dir_e    byp_src;
    dir_e    byp_dst;
    vec_t    imm;
  } instr_t;

  localparam instr_t INSTR_NOP = '{cfg: 1'b0, op: OP_NOP, op1: A_NULL, op2: A_NULL,
                                   res: A_NULL, byp_en: 1'b0, byp_src: DIR_N,
                                   byp_dst: DIR_S, imm: '0};

  // One hop of the circuit-switched data NoC.
  typedef struct packed {
    logic valid;
    vec_t data;
  } link_t;

  // ------------------------------------------------------ orchestrator I/O
  // input meta-data tags
  typedef enum logic [2:0] {
    TAG_NONE   = 3'd0,
    TAG_NNZ    = 3'd1,   // non-zero, idx = column id, val = value
    TAG_ROWEND = 3'd2,   // end of a row, idx = row id
    TAG_T3     = 3'd3,   // tags 3..7 have no fixed meaning
    TAG_T4     = 3'd4,
    TAG_T5     = 3'd5,
    TAG_T6     = 3'd6,
    TAG_T7     = 3'd7
  } tag_e;

  typedef struct packed {
    tag_e              tag;
    idx_t              idx;
    logic [DATA_W-1:0] val;
  } meta_t;

  // message ids between neighbouring orchestrators
  typedef enum logic [1:0] {MSG_NONE = 2'd0, MSG_PSUM = 2'd1, MSG_2 = 2'd2, MSG_3 = 2'd3} msgid_e;

  typedef struct packed {
    msgid_e id;
    idx_t   rid;
  } msg_t;

  // address generation: addr = base register + offset
  typedef enum logic [2:0] {
    OFS_ZERO  = 3'd0,   // base only
    OFS_IDX   = 3'd1,   // input idx & idx_mask (e.g. CID mod H)
    OFS_CUR   = 3'd2,   // scratchpad offset of the newest managed row
    OFS_START = 3'd3,   // scratchpad offset of the oldest managed row
    OFS_MSG   = 3'd4,   // scratchpad offset of the row named by the message
    OFS_5     = 3'd5,
    OFS_6     = 3'd6,
    OFS_7     = 3'd7
  } ofs_e;

  typedef struct packed {
    ofs_e       ofs;
    logic [2:0] base;   // which of the eight base-address registers
  } agen_t;

  // message content select
  typedef enum logic [1:0] {MS_START = 2'd0, MS_CUR = 2'd1, MS_IN = 2'd2, MS_IDX = 2'd3} msgsel_e;

  // One 48-bit look-up-table word: everything the dynamic part of the
  // orchestrator does in one cycle.
  typedef struct packed {
    logic [2:0] next_state;  // 47:45
    opcode_e    op;          // 44:41
    agen_t      op1;         // 40:35
    agen_t      op2;         // 34:29
    agen_t      res;         // 28:23
    logic       byp_en;      // 22
    dir_e       byp_src;     // 21:20
    dir_e       byp_dst;     // 19:18
    msgid_e     msg_id;      // 17:16
    msgsel_e    msg_sel;     // 15:14
    logic       pop_input;   // 13  consume the input meta register
    logic       start_inc;   // 12  oldest managed row += 1
    logic       cur_inc;     // 11  newest managed row += 1
    logic       imm_val;     // 10  imm = input value on every lane (else 0)
    logic       cfg;         // 9   issue as configuration-only
    logic       hold;        // 8   hold the row (spatial execution)
    logic       cnt_inc;     // 7   general-purpose counter += 1
    logic       cnt_clr;     // 6   general-purpose counter = 0
    logic [5:0] rsvd;        // 5:0
  } lutw_t;

  localparam int unsigned LUTW_BITS = $bits(lutw_t);

  function automatic logic [LUT_IN_W-1:0] lut_index(input logic [2:0] state, input tag_e tag,
                                                    input msgid_e mid, input logic [1:0] cond);
    return {state, tag, mid, cond};
  endfunction

endpackage

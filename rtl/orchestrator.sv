// orchestrator -- the programmable FSM that drives one row of Canon PEs.
//
// Every cycle (while `en` is high) it turns the current input meta-data and
// the latest message from the orchestrator above into one instruction for its
// PE row, a message for the orchestrator below, a new state and new meta
// register values. The parts, as the paper describes them:
//   State Register        3-bit FSM state.
//   State Meta Registers  value state kept for the kernel: here the row ids and
//                         scratchpad offsets of the oldest (start) and newest
//                         (cur) managed partial-sum rows of a circular FIFO,
//                         and a general counter.
//   Input Meta Register   the head of the input meta-data stream (tag, index,
//                         value), refilled when the FSM consumes it.
//   Orchestrator Message Register / Message ID
//                         the message from the orchestrator above.
//   Condition logic       fixed ("statically configured") comparisons:
//                         cond[0] = the message's row id lies in the managed
//                         window [start, cur]; cond[1] = the window is full
//                         (cfg_cond1_cnt = 0) or the counter reached
//                         cfg_cnt_limit (cfg_cond1_cnt = 1).
//   LUT (orch_lut)        indexed by {state, tag, message id, cond}; its 48-bit
//                         word configures the dynamic components: address
//                         generation (base register + offset), opcode,
//                         router bypass, next state, message generation and
//                         meta-register updates.
//
// Timing: the decision is combinational from the registers through the LUT;
// the instruction, the hold level and the outgoing message are registered, so
// the instruction reaches PE column 0's LOAD stage two cycles after the
// decision. A psum that PE (r, c) sends south is then readable by PE (r+1, c)
// in the LOAD stage of an instruction decided three cycles later, so the
// incoming message is delayed by PE_STAGES-1 = 2 registers before it is used:
// a message and the data it describes are seen together. No backpressure
// exists between orchestrators; the FSM program must handle every message in
// the cycle it is seen.
//
// Paper vs. this design: the register set, the 10-bit LUT index (2^(3+3+2x2))
// and 48-bit word, and the split into static condition logic and LUT-driven
// dynamic logic are the paper's. The bit layout of the index and of the word,
// which comparisons the condition logic makes, the address generator's offset
// modes and the base-address and mask configuration registers are this
// design's choices.
module orchestrator
  import canon_pkg::*;
#(
  parameter int unsigned SP_WORDS = SPAD_WORDS,
  parameter int unsigned MSG_DLY  = PE_STAGES - 1,
  localparam int unsigned SP_AW   = $clog2(SP_WORDS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  // bitstream and static configuration
  input  logic                lut_we,
  input  logic [LUT_IN_W-1:0] lut_waddr,
  input  logic [LUT_W-1:0]    lut_wdata,
  input  addr_t               cfg_base [8],
  input  idx_t                cfg_idx_mask,
  input  logic [SP_AW:0]      cfg_depth,      // effective FIFO length, 1..SP_WORDS
  input  logic                cfg_cond1_cnt,
  input  idx_t                cfg_cnt_limit,
  // input meta-data stream
  input  logic                in_valid,
  input  meta_t               in_meta,
  output logic                in_ready,
  // neighbour messages
  input  msg_t                msg_in,
  output msg_t                msg_out,
  // to the PE row
  output instr_t              instr_out,
  output logic                instr_vout,
  output logic                hold_out,
  // observation
  output logic [2:0]          state_o,
  output idx_t                start_rid_o,
  output idx_t                cur_rid_o
);

  // ------------------------------------------------------------ registers
  logic [2:0]     state;
  idx_t           start_rid, cur_rid, cnt;
  logic [SP_AW:0] start_off, cur_off;
  logic           meta_v;
  meta_t          meta;
  msg_t           msg_dly [MSG_DLY];
  msg_t           msg;

  assign msg = msg_dly[MSG_DLY-1];

  // ------------------------------------------------------------ conditions
  idx_t  win_len, msg_dist;
  logic  c_managed, c_full, c_cnt;
  logic [1:0] cond;
  tag_e  tag;

  always_comb begin
    win_len   = cur_rid - start_rid;              // window holds win_len + 1 rows
    msg_dist  = msg.rid - start_rid;
    c_managed = (msg.id != MSG_NONE) && (msg_dist <= win_len);
    c_full    = (win_len + idx_t'(1)) >= idx_t'(cfg_depth);
    c_cnt     = (cnt + idx_t'(1)) >= cfg_cnt_limit;
    cond      = {cfg_cond1_cnt ? c_cnt : c_full, c_managed};
    tag       = meta_v ? meta.tag : TAG_NONE;
  end

  // ------------------------------------------------------------ LUT
  logic [LUT_IN_W-1:0] lidx;
  logic [LUT_W-1:0]    lword;
  lutw_t               lw;

  assign lidx = lut_index(state, tag, msg.id, cond);

  orch_lut #(.DEPTH(2**LUT_IN_W), .W(LUT_W)) u_lut (
    .clk, .wen(lut_we), .waddr(lut_waddr), .wdata(lut_wdata), .raddr(lidx), .rdata(lword));

  assign lw = lutw_t'(lword);

  // ------------------------------------------------------------ address generation
  function automatic logic [SP_AW:0] wrap_inc(input logic [SP_AW:0] o, input logic [SP_AW:0] d);
    return (o + 1'b1 >= d) ? '0 : o + 1'b1;
  endfunction

  logic [SP_AW+1:0] msg_sum;
  logic [SP_AW:0]   msg_off;

  always_comb begin
    msg_sum = {1'b0, start_off} + (SP_AW+2)'(msg_dist[SP_AW:0]);
    msg_off = (msg_sum >= {1'b0, cfg_depth}) ? (SP_AW+1)'(msg_sum - {1'b0, cfg_depth})
                                              : msg_sum[SP_AW:0];
  end

  function automatic addr_t agen(input agen_t g, input addr_t base[8], input idx_t idx,
                                 input logic [SP_AW:0] cur_o, input logic [SP_AW:0] start_o,
                                 input logic [SP_AW:0] msg_o);
    addr_t ofs;
    unique case (g.ofs)
      OFS_IDX:   ofs = addr_t'(idx);
      OFS_CUR:   ofs = addr_t'(cur_o);
      OFS_START: ofs = addr_t'(start_o);
      OFS_MSG:   ofs = addr_t'(msg_o);
      default:   ofs = '0;
    endcase
    return base[g.base] + ofs;
  endfunction

  instr_t nx_instr;
  msg_t   nx_msg;

  always_comb begin
    nx_instr         = INSTR_NOP;
    nx_instr.cfg     = lw.cfg;
    nx_instr.op      = lw.op;
    nx_instr.op1     = agen(lw.op1, cfg_base, meta.idx & cfg_idx_mask, cur_off, start_off, msg_off);
    nx_instr.op2     = agen(lw.op2, cfg_base, meta.idx & cfg_idx_mask, cur_off, start_off, msg_off);
    nx_instr.res     = agen(lw.res, cfg_base, meta.idx & cfg_idx_mask, cur_off, start_off, msg_off);
    nx_instr.byp_en  = lw.byp_en;
    nx_instr.byp_src = lw.byp_src;
    nx_instr.byp_dst = lw.byp_dst;
    nx_instr.imm     = lw.imm_val ? {LANES{meta.val}} : '0;
    nx_msg.id        = lw.msg_id;
    unique case (lw.msg_sel)
      MS_START: nx_msg.rid = start_rid;
      MS_CUR:   nx_msg.rid = cur_rid;
      MS_IN:    nx_msg.rid = msg.rid;
      default:  nx_msg.rid = meta.idx;
    endcase
  end

  // ------------------------------------------------------------ input register
  logic pop;
  assign pop      = en && meta_v && lw.pop_input;
  assign in_ready = !meta_v || pop;

  // ------------------------------------------------------------ state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= '0;
      start_rid  <= '0;  start_off <= '0;
      cur_rid    <= '0;  cur_off   <= '0;
      cnt        <= '0;
      meta_v     <= 1'b0;
      meta       <= '0;
      for (int i = 0; i < int'(MSG_DLY); i++) msg_dly[i] <= '0;
      msg_out    <= '0;
      instr_out  <= INSTR_NOP;
      instr_vout <= 1'b0;
      hold_out   <= 1'b0;
    end else begin
      msg_dly[0] <= msg_in;
      for (int i = 1; i < int'(MSG_DLY); i++) msg_dly[i] <= msg_dly[i-1];
      if (in_ready) begin
        meta_v <= in_valid;
        meta   <= in_meta;
      end
      if (en) begin
        state      <= lw.next_state;
        instr_out  <= nx_instr;
        instr_vout <= 1'b1;
        hold_out   <= lw.hold;
        msg_out    <= nx_msg;
        if (lw.start_inc) begin
          start_rid <= start_rid + 1'b1;
          start_off <= wrap_inc(start_off, cfg_depth);
        end
        if (lw.cur_inc) begin
          cur_rid <= cur_rid + 1'b1;
          cur_off <= wrap_inc(cur_off, cfg_depth);
        end
        if (lw.cnt_clr)      cnt <= '0;
        else if (lw.cnt_inc) cnt <= cnt + 1'b1;
      end else begin
        instr_out  <= INSTR_NOP;
        instr_vout <= 1'b0;
        msg_out    <= '0;
      end
    end
  end

  assign state_o     = state;
  assign start_rid_o = start_rid;
  assign cur_rid_o   = cur_rid;

  // the FIFO window never exceeds the configured depth
  a_window: assert property (@(posedge clk) disable iff (!rst_n)
    en |-> (win_len < idx_t'(cfg_depth)))
    else $error("orchestrator: managed window longer than the scratchpad depth");

endmodule

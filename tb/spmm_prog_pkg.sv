// spmm_prog_pkg -- the SpMM program (orchestrator bitstream) used by the testbenches.
//
// The program is the row-wise (Gustavson) SpMM with asynchronous reduction and
// a scratchpad FIFO of partial-sum rows. It uses one FSM state and decides on
// the message from the north (none / PSUM of a row), whether that row is in
// the managed window (cond[0]), whether the window is full (cond[1]) and the
// input tag (NNZ, ROWEND, none):
//   PSUM, managed           accumulate:  spad[msg row] += N link
//   PSUM, not managed       bypass N -> S and tell the south; if the input is
//                           a non-zero, its MAC is issued in the same cycle
//   no msg, NNZ(cid)        MAC:  spad[cur] += dmem[cid & mask] * value
//   no msg, ROWEND, full    flush: S <= spad[start], spad[start] <= 0,
//                           message PSUM(start), start += 1, cur += 1
//   no msg, ROWEND, !full   cur += 1 (the window grows)
// Base-address registers: 0 null, 1 dmem[0], 2 spad[0], 3 N link, 4 S link,
// 5 immediate.
//
// The decision rules follow the paper's SpMM scheme (accumulate managed psums,
// bypass the others, flush the oldest row when the buffer is full); encoding
// them as one state, the base registers and the same-cycle bypass + MAC are
// this design's choices.
package spmm_prog_pkg;
  import canon_pkg::*;

  localparam logic [2:0] B_NULL = 3'd0, B_DMEM = 3'd1, B_SPAD = 3'd2,
                         B_N = 3'd3, B_S = 3'd4, B_IMM = 3'd5;

  function automatic void spmm_bases(output addr_t b[8]);
    b[0] = A_NULL;        b[1] = a_dmem(0);     b[2] = a_spad(0);
    b[3] = a_link(DIR_N); b[4] = a_link(DIR_S); b[5] = A_IMM;
    b[6] = A_NULL;        b[7] = A_NULL;
  endfunction

  function automatic agen_t ag(input ofs_e o, input logic [2:0] b);
    agen_t g;
    g.ofs  = o;
    g.base = b;
    return g;
  endfunction

  // the LUT word for index {state, tag, msg id, cond}
  function automatic lutw_t spmm_word(input logic [LUT_IN_W-1:0] i);
    lutw_t  w;
    tag_e   tag;
    msgid_e mid;
    logic   managed, full;
    tag     = tag_e'(i[6:4]);
    mid     = msgid_e'(i[3:2]);
    full    = i[1];
    managed = i[0];
    w = '0;
    w.op  = OP_NOP;
    w.op1 = ag(OFS_ZERO, B_NULL);
    w.op2 = ag(OFS_ZERO, B_NULL);
    w.res = ag(OFS_ZERO, B_NULL);
    w.byp_src = DIR_N;
    w.byp_dst = DIR_S;
    if (mid == MSG_PSUM && managed) begin
      // 1.1 accumulate the incoming psum into its FIFO slot
      w.op  = OP_ADD;
      w.op1 = ag(OFS_ZERO, B_N);
      w.op2 = ag(OFS_MSG, B_SPAD);
      w.res = ag(OFS_MSG, B_SPAD);
    end else if (mid == MSG_PSUM) begin
      // 1.2 bypass: the row is not in this PE row's window
      w.byp_en  = 1'b1;
      w.msg_id  = MSG_PSUM;
      w.msg_sel = MS_IN;
      if (tag == TAG_NNZ) begin
        w.op  = OP_MAC;
        w.op1 = ag(OFS_IDX, B_DMEM);
        w.op2 = ag(OFS_ZERO, B_IMM);
        w.res = ag(OFS_CUR, B_SPAD);
        w.imm_val   = 1'b1;
        w.pop_input = 1'b1;
      end
    end else if (tag == TAG_NNZ) begin
      // 2.2 local MAC
      w.op  = OP_MAC;
      w.op1 = ag(OFS_IDX, B_DMEM);
      w.op2 = ag(OFS_ZERO, B_IMM);
      w.res = ag(OFS_CUR, B_SPAD);
      w.imm_val   = 1'b1;
      w.pop_input = 1'b1;
    end else if (tag == TAG_ROWEND) begin
      w.pop_input = 1'b1;
      w.cur_inc   = 1'b1;
      if (full) begin
        // 2.1 flush the oldest psum south
        w.op  = OP_MOVCLR;
        w.op1 = ag(OFS_START, B_SPAD);
        w.res = ag(OFS_ZERO, B_S);
        w.msg_id    = MSG_PSUM;
        w.msg_sel   = MS_START;
        w.start_inc = 1'b1;
      end
    end
    return w;
  endfunction
endpackage

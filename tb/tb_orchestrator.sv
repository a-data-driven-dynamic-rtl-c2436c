// tb_orchestrator -- test of one orchestrator running the SpMM program.
//
// The look-up table is loaded with the SpMM bitstream; then a random input
// stream (non-zeros and row ends, with gaps) and random north messages
// ("psum of row x" for rows before, inside and after the managed window) are
// applied while `en` toggles now and then. A behavioural model written here,
// directly from the SpMM decision rules (accumulate a managed psum, bypass an
// unmanaged one, MAC a non-zero, flush the oldest row at a row end when the
// FIFO is full, otherwise grow the window), predicts every issued
// instruction, every outgoing message and the managed window; the test
// compares them cycle by cycle. It also checks that a message is acted on
// exactly PE_STAGES-1 = 2 cycles after it arrives, and counts each decision.
//
// The decision rules checked follow the paper's SpMM description; the message
// delay, registered outputs and random traffic mix are this design's and this
// test's choices.
`timescale 1ns/1ps
module tb_orchestrator;
  import canon_pkg::*;
  import spmm_prog_pkg::*;

  localparam int DEPTH = 4;
  localparam int HMASK = 3;

  logic clk = 0, rst_n = 0, en = 0;
  always #1 clk = ~clk;

  logic                lut_we;
  logic [LUT_IN_W-1:0] lut_waddr;
  logic [LUT_W-1:0]    lut_wdata;
  addr_t               cfg_base [8];
  idx_t                cfg_idx_mask, cfg_cnt_limit;
  logic [4:0]          cfg_depth;
  logic                cfg_cond1_cnt;
  logic                in_valid, in_ready;
  meta_t               in_meta;
  msg_t                msg_in, msg_out;
  instr_t              instr_out;
  logic                instr_vout, hold_out;
  logic [2:0]          state_o;
  idx_t                start_rid_o, cur_rid_o;

  orchestrator dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d %s", cyc, s); end
  endtask

  // ---------------------------------------------------------------- model
  logic  m_meta_v;  meta_t m_meta;
  msg_t  m_d1, m_d2;
  int    m_start, m_cur, m_soff, m_coff;
  int    n_acc = 0, n_byp = 0, n_mac = 0, n_flush = 0, n_grow = 0;
  bit    running = 0;

  always @(posedge clk) if (running) begin : model
    instr_t e;
    msg_t   em;
    logic   pop, managed, full;
    tag_e   tag;
    int     mdist;
    // check the outputs of the previous decision first (registered)
    e  = INSTR_NOP;
    em = '0;
    pop = 0;
    tag = m_meta_v ? m_meta.tag : TAG_NONE;
    mdist = int'(16'(m_d2.rid - 16'(m_start)));
    managed = (m_d2.id == MSG_PSUM) && (mdist <= int'(16'(m_cur - m_start)));
    full = (m_cur - m_start + 1) >= DEPTH;
    if (en) begin
      if (managed) begin
        e.op = OP_ADD; e.op1 = a_link(DIR_N);
        e.op2 = a_spad((m_soff + mdist) % DEPTH); e.res = e.op2;
        n_acc++;
      end else if (m_d2.id == MSG_PSUM) begin
        e.byp_en = 1; em = '{MSG_PSUM, m_d2.rid};
        n_byp++;
        if (tag == TAG_NNZ) begin
          e.op = OP_MAC; e.op1 = a_dmem(m_meta.idx & HMASK); e.op2 = A_IMM; e.res = a_spad(m_coff);
          e.imm = {4{m_meta.val}}; pop = 1; n_mac++;
        end
      end else if (tag == TAG_NNZ) begin
        e.op = OP_MAC; e.op1 = a_dmem(m_meta.idx & HMASK); e.op2 = A_IMM; e.res = a_spad(m_coff);
        e.imm = {4{m_meta.val}}; pop = 1; n_mac++;
      end else if (tag == TAG_ROWEND) begin
        pop = 1;
        if (full) begin
          e.op = OP_MOVCLR; e.op1 = a_spad(m_soff); e.res = a_link(DIR_S);
          em = '{MSG_PSUM, 16'(m_start)};
          m_start = m_start + 1; m_soff = (m_soff + 1) % DEPTH;
          n_flush++;
        end else n_grow++;
        m_cur = m_cur + 1; m_coff = (m_coff + 1) % DEPTH;
      end
    end
    // outputs appear after this edge
    fork
      automatic instr_t fe = e;
      automatic msg_t   fm = em;
      automatic logic   fen = en;
      begin
        #0.2;
        chk(instr_vout == fen, "instr valid");
        if (fen) begin
          chk(instr_out.op == fe.op && instr_out.byp_en == fe.byp_en,
              $sformatf("op %0d/%0d byp %0d/%0d", instr_out.op, fe.op, instr_out.byp_en, fe.byp_en));
          if (fe.op != OP_NOP)
            chk(instr_out.op1 == fe.op1 && instr_out.op2 == fe.op2 && instr_out.res == fe.res,
                $sformatf("addresses %h %h %h vs %h %h %h", instr_out.op1, instr_out.op2, instr_out.res,
                          fe.op1, fe.op2, fe.res));
          if (fe.op == OP_MAC) chk(instr_out.imm == fe.imm, "immediate");
          if (fe.byp_en) chk(instr_out.byp_src == DIR_N && instr_out.byp_dst == DIR_S, "bypass route");
          chk(msg_out.id == fm.id && (fm.id == MSG_NONE || msg_out.rid == fm.rid),
              $sformatf("message %h vs %h", msg_out, fm));
        end
        chk(start_rid_o == idx_t'(m_start) && cur_rid_o == idx_t'(m_cur), "window registers");
      end
    join_none
    // input register and message delay
    if (!m_meta_v || (pop && en)) begin
      m_meta_v <= in_valid;
      m_meta   <= in_meta;
    end
    m_d1 <= msg_in;
    m_d2 <= m_d1;
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    lut_we = 0; lut_waddr = 0; lut_wdata = 0;
    spmm_bases(cfg_base);
    cfg_idx_mask = idx_t'(HMASK);
    cfg_depth = 5'(DEPTH);
    cfg_cond1_cnt = 0; cfg_cnt_limit = 0;
    in_valid = 0; in_meta = '0; msg_in = '0;
    m_meta_v = 0; m_meta = '0; m_d1 = '0; m_d2 = '0;
    m_start = 0; m_cur = 0; m_soff = 0; m_coff = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2**LUT_IN_W; i++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = LUT_IN_W'(i); lut_wdata = LUT_W'(spmm_word(LUT_IN_W'(i)));
    end
    @(negedge clk); lut_we = 0;
    running = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = ($urandom % 10) != 0;
      if (!in_valid || in_ready) begin
        in_valid = ($urandom % 4) != 0;
        in_meta.tag = (($urandom % 4) == 0) ? TAG_ROWEND : TAG_NNZ;
        in_meta.idx = idx_t'($urandom % 32);
        in_meta.val = 8'($urandom);
      end
      if (($urandom % 3) == 0)
        msg_in = '{MSG_PSUM, idx_t'(int'(start_rid_o) - 2 + int'($urandom % 9))};
      else
        msg_in = '0;
    end
    running = 0;
    @(negedge clk);
    $display("decisions: acc=%0d bypass=%0d mac=%0d flush=%0d grow=%0d", n_acc, n_byp, n_mac, n_flush, n_grow);
    chk(n_acc > 0 && n_byp > 0 && n_mac > 0 && n_flush > 0 && n_grow > 0, "every decision seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

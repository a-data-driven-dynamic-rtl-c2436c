// tb_pe -- directed test of one Canon PE.
//
// An instruction program is presented one instruction per cycle on instr_in.
// The test checks, against values worked out here lane by lane:
//   - every instruction leaves on instr_out exactly 3 cycles after it entered
//     (the time-lapsed stagger);
//   - router outputs appear 4 cycles after the instruction entered;
//   - back-to-back accumulation into a register and into the scratchpad
//     (results forwarded from COMMIT to younger instructions);
//   - data-memory reads of words written by the memory-mover port and by an
//     instruction just before;
//   - MOVCLR sends a scratchpad entry out and clears it;
//   - router bypass N -> S while a MAC runs;
//   - a configuration-only instruction has no effect;
//   - hold: a configuration-only "E <= W + 1" held in LOAD executes every
//     cycle, each new west word comes out 3 cycles later.
//
// The 3-stage pipeline, 3-cycle hand-off, bypass and hold follow the paper;
// forwarding, MOVCLR and the mover port are this design's own and are checked
// as such.
`timescale 1ns/1ps
module tb_pe;
  import canon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  instr_t instr_in, instr_out;
  logic   instr_vin, instr_vout, hold;
  link_t  link_in [4], link_out [4];
  logic   mv_we, mv_ready;
  logic [9:0] mv_addr;
  vec_t   mv_wdata;

  pe dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d %s", cyc, s); end
  endtask

  function automatic vec_t vadd(input vec_t a, input vec_t b);
    vec_t r; for (int l = 0; l < 4; l++) r[l*8 +: 8] = a[l*8 +: 8] + b[l*8 +: 8]; return r;
  endfunction
  function automatic vec_t vmul(input vec_t a, input vec_t b);
    vec_t r; for (int l = 0; l < 4; l++) r[l*8 +: 8] = 8'(a[l*8 +: 8] * b[l*8 +: 8]); return r;
  endfunction

  function automatic instr_t mk(input opcode_e op, input addr_t o1, input addr_t o2, input addr_t rs,
                                input vec_t imm = '0, input bit cfg = 0, input bit byp = 0);
    instr_t i;
    i = INSTR_NOP;
    i.op = op; i.op1 = o1; i.op2 = o2; i.res = rs; i.imm = imm; i.cfg = cfg;
    i.byp_en = byp; i.byp_src = DIR_N; i.byp_dst = DIR_S;
    return i;
  endfunction

  // program and expected link outputs
  localparam int NP = 24;
  instr_t prog [NP];
  link_t  exp_out [4][NP + 8];
  link_t  n_in [NP + 8];
  instr_t sent [$];
  int     sent_cyc [$];

  initial begin
    vec_t X, Y, P, Q, Z, NV, BV, r0, sp3;
    for (int d = 0; d < 4; d++) link_in[d] = '0;
    instr_in = INSTR_NOP; instr_vin = 0; hold = 0;
    mv_we = 0; mv_addr = 0; mv_wdata = 0;
    X = $urandom; Y = $urandom; P = $urandom; Q = $urandom; Z = $urandom; NV = $urandom; BV = $urandom;
    for (int i = 0; i < NP; i++) prog[i] = INSTR_NOP;
    for (int k = 0; k < NP + 8; k++) begin
      n_in[k] = '0;
      for (int d = 0; d < 4; d++) exp_out[d][k] = '0;
    end

    // ---- the program (slot k = cycle the instruction is presented)
    prog[0]  = mk(OP_MOV, A_IMM, A_NULL, a_reg(1), P);                 // R1 = P
    prog[1]  = mk(OP_MAC, a_dmem(5), A_IMM, a_reg(0), Q);              // R0 = X*Q
    prog[2]  = mk(OP_MAC, a_dmem(6), a_reg(1), a_reg(0));              // R0 += Y*P
    prog[3]  = mk(OP_MAC, a_reg(0), A_IMM, a_reg(0), 32'h01010101);    // R0 += R0
    prog[4]  = mk(OP_MOV, a_reg(0), A_NULL, a_link(DIR_S));            // S <= R0
    prog[5]  = mk(OP_ADD, a_link(DIR_N), a_spad(3), a_spad(3));        // spad3 += N
    prog[6]  = mk(OP_ADD, a_link(DIR_N), a_spad(3), a_spad(3));        // spad3 += N
    prog[7]  = mk(OP_MOVCLR, a_spad(3), A_NULL, a_link(DIR_E));        // E <= spad3, clear
    prog[8]  = mk(OP_MOV, a_spad(3), A_NULL, a_link(DIR_W));           // W <= spad3 (= 0)
    prog[9]  = mk(OP_MOV, A_IMM, A_NULL, a_dmem(7), Z);                // dmem7 = Z
    prog[10] = mk(OP_MOV, a_dmem(7), A_NULL, a_link(DIR_E));           // E <= dmem7
    prog[11] = mk(OP_MAC, a_dmem(5), A_IMM, a_spad(1), 32'h02020202, 0, 1); // spad1 = 2X, bypass N->S
    prog[12] = mk(OP_MOV, a_spad(1), A_NULL, a_link(DIR_N));           // N <= spad1
    prog[13] = mk(OP_MOV, A_IMM, A_NULL, a_link(DIR_S), Z, 1);         // configuration-only
    prog[14] = mk(OP_MOV, A_IMM, A_NULL, a_reg(1), Z, 1);              // configuration-only
    prog[15] = mk(OP_MOV, a_reg(1), A_NULL, a_link(DIR_W));            // W <= R1 (still P)

    r0 = vmul(X, Q);
    r0 = vadd(r0, vmul(Y, P));
    r0 = vadd(r0, r0);
    exp_out[DIR_S][4 + 4] = '{1'b1, r0};
    n_in[5 + 1] = '{1'b1, NV};             // read in the LOAD cycle of slot 5
    n_in[6 + 1] = '{1'b1, BV};
    sp3 = vadd(NV, BV);
    exp_out[DIR_E][7 + 4] = '{1'b1, sp3};
    exp_out[DIR_W][8 + 4] = '{1'b1, '0};
    exp_out[DIR_E][10 + 4] = '{1'b1, Z};
    n_in[11 + 1] = '{1'b1, NV};
    exp_out[DIR_S][11 + 4] = '{1'b1, NV};  // bypassed word
    exp_out[DIR_N][12 + 4] = '{1'b1, vadd(X, X)};
    exp_out[DIR_W][15 + 4] = '{1'b1, P};

    repeat (2) @(negedge clk);
    rst_n = 1;
    // memory-mover writes
    @(negedge clk); mv_we = 1; mv_addr = 10'd5; mv_wdata = X;
    #0.2 chk(mv_ready, "mover port ready while idle");
    @(negedge clk); mv_addr = 10'd6; mv_wdata = Y;
    @(negedge clk); mv_we = 0;

    // run the program, slot k presented in cycle base+k
    for (int k = 0; k < NP + 8; k++) begin
      @(negedge clk);
      instr_in  = (k < NP) ? prog[k] : INSTR_NOP;
      instr_vin = (k < NP);
      link_in[DIR_N] = n_in[k];
      if (k < NP) begin sent.push_back(prog[k]); sent_cyc.push_back(cyc); end
      #0.2;
      for (int d = 0; d < 4; d++)
        chk(link_out[d] == exp_out[d][k], $sformatf("slot %0d dir %0d: %h vs %h", k, d, link_out[d], exp_out[d][k]));
    end

    // ---- hold
    @(negedge clk);
    instr_in = mk(OP_ADD, a_link(DIR_W), A_IMM, a_link(DIR_E), 32'h01010101, 1);
    instr_vin = 1;
    link_in[DIR_N] = '0;
    @(negedge clk);
    instr_in = INSTR_NOP; instr_vin = 1; hold = 1;
    for (int k = 0; k < 20; k++) begin
      vec_t w;
      w = $urandom;
      @(negedge clk);
      link_in[DIR_W] = '{1'b1, w};
      n_in[k] = '{1'b1, w};
      #0.2;
      if (k >= 3)
        chk(link_out[DIR_E].valid && link_out[DIR_E].data == vadd(n_in[k-3].data, 32'h01010101),
            $sformatf("hold step %0d", k));
    end
    hold = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction forwarding: each instruction leaves 3 cycles after it entered
  int n_fwd = 0;
  always @(posedge clk) if (rst_n && !hold && instr_vout && sent.size() > 0) begin
    chk(instr_out == sent[0], "instruction order on instr_out");
    chk(cyc - sent_cyc[0] == 3, $sformatf("instruction took %0d cycles to pass", cyc - sent_cyc[0]));
    void'(sent.pop_front());
    void'(sent_cyc.pop_front());
    n_fwd++;
  end
endmodule

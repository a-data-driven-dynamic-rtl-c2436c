// pe -- one Canon processing element: a 3-stage LOAD / COMPUTE / COMMIT pipeline.
//
// The PE has no control of its own. Each cycle it takes the instruction that
// the previous PE of its row (or, for column 0, the row's orchestrator) hands
// it, runs it through three stages and then hands it on, so the next PE runs
// the same instruction exactly 3 cycles later ("time-lapsed SIMD"):
//   LOAD    read op1, op2 (and, for MAC, the destination as accumulator) from
//           data memory, scratchpad, SIMD registers, router inputs, the
//           instruction's immediate, or null (zero). Memory reads are issued
//           here; a bypass word is taken from its router input.
//   COMPUTE 4-lane INT8 vector lane.
//   COMMIT  write the result to data memory, scratchpad or a register, or send
//           it to a neighbour through the router; drive the bypass output; pass
//           the instruction to the next PE.
// The addresses of the unified address space (canon_pkg) tell where each
// operand comes from and where the result goes.
//
// Timing: instr_in sampled at the clock edge ending cycle t is in LOAD in cycle
// t+1, COMPUTE t+2, COMMIT t+3; its router output is on the link in cycle t+4,
// and instr_out presents it to the next PE during COMMIT (cycle t+3), so that
// PE loads it in t+4: three cycles per PE, as in the paper.
//
// Hold (spatial execution, paper appendix D): while `hold` is high the LOAD
// register keeps its instruction and the PE issues it again every cycle.
// Instructions flagged `cfg` travel along the row without side effects (the
// paper's configuration phase, "results are discarded"); under hold the held
// instruction executes for real.
//
// This design's choices, where the paper is silent: results are forwarded from
// COMMIT to younger instructions in LOAD and COMPUTE, so back-to-back
// accumulation into one location works; at most one data-memory and one
// scratchpad location is read per instruction (one read port each); the
// memory-mover write port of the data memory only succeeds in cycles where
// COMMIT does not write it (mv_ready).
module pe
  import canon_pkg::*;
#(
  parameter int unsigned DM_WORDS = DMEM_WORDS,
  parameter int unsigned SP_WORDS = SPAD_WORDS,
  parameter int unsigned N_REGS   = NREGS,
  localparam int unsigned DM_AW   = $clog2(DM_WORDS),
  localparam int unsigned SP_AW   = $clog2(SP_WORDS),
  localparam int unsigned RG_AW   = (N_REGS > 1) ? $clog2(N_REGS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // instruction network
  input  instr_t           instr_in,
  input  logic             instr_vin,
  input  logic             hold,
  output instr_t           instr_out,
  output logic             instr_vout,
  // data network
  input  link_t            link_in  [4],
  output link_t            link_out [4],
  // memory-mover write port into the data memory
  input  logic             mv_we,
  input  logic [DM_AW-1:0] mv_addr,
  input  vec_t             mv_wdata,
  output logic             mv_ready
);

  typedef enum logic [1:0] {SRC_VAL, SRC_DMEM, SRC_SPAD} src_e;

  // ------------------------------------------------------------ pipeline regs
  instr_t s1_i;  logic s1_v;

  instr_t s2_i;  logic s2_v, s2_live;
  vec_t   s2_val [3];
  src_e   s2_src [3];
  logic   s2_byp_en;  dir_e s2_byp_dir;  vec_t s2_byp_data;

  instr_t s3_i;  logic s3_v;
  logic   s3_wr_en;   addr_t s3_wr_addr;  vec_t s3_wr_data;
  logic   s3_lk_en;   dir_e  s3_lk_dir;   vec_t s3_lk_data;
  logic   s3_byp_en;  dir_e  s3_byp_dir;  vec_t s3_byp_data;

  vec_t   regs [N_REGS];

  // ------------------------------------------------------------ storage
  logic             dm_re, dm_we;
  logic [DM_AW-1:0] dm_raddr, dm_waddr;
  vec_t             dm_rdata, dm_wdata;
  logic             sp_re;
  logic [SP_AW-1:0] sp_raddr;
  vec_t             sp_rdata;

  data_mem #(.WORDS(DM_WORDS), .W(VEC_W)) u_dmem (
    .clk, .re(dm_re), .raddr(dm_raddr), .rdata(dm_rdata),
    .we(dm_we), .waddr(dm_waddr), .wdata(dm_wdata));

  scratchpad #(.WORDS(SP_WORDS), .W(VEC_W)) u_spad (
    .clk, .rst_n, .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata),
    .we(s3_wr_en && a_region(s3_wr_addr) == RG_SPAD),
    .waddr(s3_wr_addr[SP_AW-1:0]), .wdata(s3_wr_data));

  // ------------------------------------------------------------ router
  dir_e  rd_dir  [4];
  vec_t  rd_data [4];
  logic  rd_valid[4];
  logic  rt_conflict;

  router #(.NRD(4)) u_router (
    .clk, .rst_n, .link_in, .rd_dir, .rd_data, .rd_valid,
    .cw_en(s3_lk_en), .cw_dir(s3_lk_dir), .cw_data(s3_lk_data),
    .bw_en(s3_byp_en), .bw_dir(s3_byp_dir), .bw_data(s3_byp_data),
    .link_out, .conflict(rt_conflict));

  // ------------------------------------------------------------ LOAD
  logic  s1_live;
  addr_t ld_addr [3];
  vec_t  ld_val  [3];
  src_e  ld_src  [3];
  logic  ld_use  [3];

  assign s1_live = s1_v && (!s1_i.cfg || hold);

  always_comb begin
    ld_addr[0] = s1_i.op1;
    ld_addr[1] = s1_i.op2;
    ld_addr[2] = s1_i.res;
    ld_use[0]  = s1_live && s1_i.op != OP_NOP;
    ld_use[1]  = s1_live && s1_i.op != OP_NOP;
    ld_use[2]  = s1_live && s1_i.op == OP_MAC;
    rd_dir[0]  = dir_e'(s1_i.op1[1:0]);
    rd_dir[1]  = dir_e'(s1_i.op2[1:0]);
    rd_dir[2]  = dir_e'(s1_i.res[1:0]);
    rd_dir[3]  = s1_i.byp_src;
    dm_re = 1'b0;  dm_raddr = '0;
    sp_re = 1'b0;  sp_raddr = '0;
    for (int k = 0; k < 3; k++) begin
      ld_val[k] = '0;
      ld_src[k] = SRC_VAL;
      if (ld_use[k]) begin
        unique case (a_region(ld_addr[k]))
          RG_DMEM: begin
            ld_src[k] = SRC_DMEM;
            dm_re     = 1'b1;
            dm_raddr  = ld_addr[k][DM_AW-1:0];
          end
          RG_SPAD: begin
            ld_src[k] = SRC_SPAD;
            sp_re     = 1'b1;
            sp_raddr  = ld_addr[k][SP_AW-1:0];
          end
          RG_REG:  ld_val[k] = regs[ld_addr[k][RG_AW-1:0]];
          RG_LINK: begin
            if (!ld_addr[k][2])                  ld_val[k] = rd_data[k];
            else if (ld_addr[k][2:0] == LK_IMM)  ld_val[k] = s1_i.imm;
            else                                 ld_val[k] = '0;
          end
          default: ld_val[k] = '0;
        endcase
        // the instruction two ahead writes this location in this very cycle
        if (s3_v && s3_wr_en && s3_wr_addr == ld_addr[k]) begin
          ld_val[k] = s3_wr_data;
          ld_src[k] = SRC_VAL;
        end
      end
    end
  end

  // ------------------------------------------------------------ COMPUTE
  vec_t  op_val [3];
  vec_t  y;
  logic  cm_wr_en, cm_lk_en;
  addr_t cm_wr_addr;
  vec_t  cm_wr_data;

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      unique case (s2_src[k])
        SRC_DMEM: op_val[k] = dm_rdata;
        SRC_SPAD: op_val[k] = sp_rdata;
        default:  op_val[k] = s2_val[k];
      endcase
    end
    // the instruction one ahead, now in COMMIT, writes an operand location
    if (s3_v && s3_wr_en) begin
      if (s3_wr_addr == s2_i.op1) op_val[0] = s3_wr_data;
      if (s3_wr_addr == s2_i.op2) op_val[1] = s3_wr_data;
      if (s3_wr_addr == s2_i.res) op_val[2] = s3_wr_data;
    end
  end

  vector_lane u_lane (.op(s2_i.op), .a(op_val[0]), .b(op_val[1]), .c(op_val[2]), .y(y));

  always_comb begin
    cm_wr_en   = 1'b0;
    cm_wr_addr = s2_i.res;
    cm_wr_data = y;
    cm_lk_en   = 1'b0;
    if (s2_v && s2_live && s2_i.op != OP_NOP) begin
      if (s2_i.op == OP_MOVCLR) begin
        cm_wr_en   = a_is_local(s2_i.op1);
        cm_wr_addr = s2_i.op1;
        cm_wr_data = '0;
        cm_lk_en   = a_is_dir(s2_i.res);
      end else begin
        cm_wr_en   = a_is_local(s2_i.res);
        cm_lk_en   = a_is_dir(s2_i.res);
      end
    end
  end

  // ------------------------------------------------------------ COMMIT
  assign dm_we    = (s3_v && s3_wr_en && a_region(s3_wr_addr) == RG_DMEM) || (mv_we && mv_ready);
  assign mv_ready = !(s3_v && s3_wr_en && a_region(s3_wr_addr) == RG_DMEM);
  assign dm_waddr = mv_ready ? mv_addr  : s3_wr_addr[DM_AW-1:0];
  assign dm_wdata = mv_ready ? mv_wdata : s3_wr_data;

  assign instr_out  = s3_i;
  assign instr_vout = s3_v;

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_i <= INSTR_NOP;  s1_v <= 1'b0;
      s2_i <= INSTR_NOP;  s2_v <= 1'b0;  s2_live <= 1'b0;
      for (int k = 0; k < 3; k++) begin s2_val[k] <= '0; s2_src[k] <= SRC_VAL; end
      s2_byp_en <= 1'b0;  s2_byp_dir <= DIR_S;  s2_byp_data <= '0;
      s3_i <= INSTR_NOP;  s3_v <= 1'b0;
      s3_wr_en <= 1'b0;   s3_wr_addr <= A_NULL; s3_wr_data <= '0;
      s3_lk_en <= 1'b0;   s3_lk_dir <= DIR_S;   s3_lk_data <= '0;
      s3_byp_en <= 1'b0;  s3_byp_dir <= DIR_S;  s3_byp_data <= '0;
      for (int r = 0; r < int'(N_REGS); r++) regs[r] <= '0;
    end else begin
      // LOAD register: keeps its instruction under hold
      if (!hold) begin
        s1_i <= instr_in;
        s1_v <= instr_vin;
      end
      // LOAD -> COMPUTE
      s2_i    <= s1_i;
      s2_v    <= s1_v;
      s2_live <= s1_live;
      for (int k = 0; k < 3; k++) begin s2_val[k] <= ld_val[k]; s2_src[k] <= ld_src[k]; end
      s2_byp_en   <= s1_live && s1_i.byp_en;
      s2_byp_dir  <= s1_i.byp_dst;
      s2_byp_data <= rd_data[3];
      // COMPUTE -> COMMIT
      s3_i        <= s2_i;
      s3_v        <= s2_v;
      s3_wr_en    <= cm_wr_en;
      s3_wr_addr  <= cm_wr_addr;
      s3_wr_data  <= cm_wr_data;
      s3_lk_en    <= cm_lk_en;
      s3_lk_dir   <= dir_e'(s2_i.res[1:0]);
      s3_lk_data  <= y;
      s3_byp_en   <= s2_byp_en;
      s3_byp_dir  <= s2_byp_dir;
      s3_byp_data <= s2_byp_data;
      // COMMIT: register write
      if (s3_v && s3_wr_en && a_region(s3_wr_addr) == RG_REG)
        regs[s3_wr_addr[RG_AW-1:0]] <= s3_wr_data;
    end
  end

  // ------------------------------------------------------------ rules
  // one data-memory and one scratchpad location per instruction
  a_one_dmem_read: assert property (@(posedge clk) disable iff (!rst_n)
    !(ld_use[0] && ld_use[1] && a_region(ld_addr[0]) == RG_DMEM && a_region(ld_addr[1]) == RG_DMEM
      && ld_addr[0] != ld_addr[1]))
    else $error("pe: two data-memory reads in one instruction");
  a_one_spad_read: assert property (@(posedge clk) disable iff (!rst_n)
    !(ld_use[1] && ld_use[2] && a_region(ld_addr[1]) == RG_SPAD && a_region(ld_addr[2]) == RG_SPAD
      && ld_addr[1] != ld_addr[2]))
    else $error("pe: two scratchpad reads in one instruction");
  // MOVCLR clears its source, so its result has to leave through the router
  a_movclr_res: assert property (@(posedge clk) disable iff (!rst_n)
    (s2_v && s2_live && s2_i.op == OP_MOVCLR) |-> a_is_dir(s2_i.res))
    else $error("pe: MOVCLR result must be a router port");

endmodule

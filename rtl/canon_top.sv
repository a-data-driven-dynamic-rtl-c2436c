// canon_top -- the Canon array: an 8 x 8 mesh of PEs and one orchestrator per row.
//
// Each row of PEs is driven by its own orchestrator at the west edge. The
// orchestrator turns the row's input meta-data stream (for a sparse kernel:
// the coordinates of the non-zeros of its slice of the sparse operand) into one
// instruction per cycle, and the instruction network carries that instruction
// along the row, one PE every 3 cycles (time-lapsed SIMD): every PE of a row
// runs the same instruction sequence on its own data. Orchestrators of adjacent
// rows exchange messages north to south (for instance "the psum of row 7 is
// coming"), and the PE mesh exchanges 4-lane INT8 vectors over a
// circuit-switched data network with one link per direction between
// neighbours. Nothing in the array stalls: every transfer is scheduled by the
// orchestrators.
//
// Interface (all plain signals or arrays):
//   lut_we[r], lut_waddr, lut_wdata   load the bitstream of orchestrator r
//   cfg_*                             static orchestrator configuration, common
//                                     to all rows (base addresses, index mask,
//                                     effective scratchpad FIFO depth, counter)
//   in_valid/in_meta/in_ready[r]      input meta-data stream of row r
//   north_msg / south_msg             message into row 0 and out of the last row
//   *_in / *_out edge links           the array's four edges, one word per
//                                     edge PE per cycle
//   mv_*                              memory-mover writes into the data memory
//                                     of PE (mv_row, mv_col)
// The input streams, edge links, messages and memory-mover port are where the
// asynchronous memory movers and the off-chip memory, which the paper does not
// design, would attach.
//
// Sizes follow the paper's evaluated configuration (Table 1): 8 x 8 PEs, 4 KB
// data memory and 64 B scratchpad per PE, 8 orchestrators. The shared
// configuration inputs and the edge-port set are this design's choices.
module canon_top
  import canon_pkg::*;
#(
  parameter int unsigned N_ROWS   = ROWS,
  parameter int unsigned N_COLS   = COLS,
  parameter int unsigned DM_WORDS = DMEM_WORDS,
  parameter int unsigned SP_WORDS = SPAD_WORDS,
  localparam int unsigned DM_AW   = $clog2(DM_WORDS),
  localparam int unsigned SP_AW   = $clog2(SP_WORDS),
  localparam int unsigned R_AW    = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int unsigned C_AW    = (N_COLS > 1) ? $clog2(N_COLS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  // bitstreams and static configuration
  input  logic                lut_we    [N_ROWS],
  input  logic [LUT_IN_W-1:0] lut_waddr,
  input  logic [LUT_W-1:0]    lut_wdata,
  input  addr_t               cfg_base  [8],
  input  idx_t                cfg_idx_mask,
  input  logic [SP_AW:0]      cfg_depth,
  input  logic                cfg_cond1_cnt,
  input  idx_t                cfg_cnt_limit,
  // per-row input meta-data streams
  input  logic                in_valid  [N_ROWS],
  input  meta_t               in_meta   [N_ROWS],
  output logic                in_ready  [N_ROWS],
  // orchestrator messages at the array's top and bottom
  input  msg_t                north_msg,
  output msg_t                south_msg,
  // edge links of the data network
  input  link_t               north_in  [N_COLS],
  output link_t               north_out [N_COLS],
  input  link_t               south_in  [N_COLS],
  output link_t               south_out [N_COLS],
  input  link_t               west_in   [N_ROWS],
  output link_t               west_out  [N_ROWS],
  input  link_t               east_in   [N_ROWS],
  output link_t               east_out  [N_ROWS],
  // memory-mover port into the PE data memories
  input  logic                mv_we,
  input  logic [R_AW-1:0]     mv_row,
  input  logic [C_AW-1:0]     mv_col,
  input  logic [DM_AW-1:0]    mv_addr,
  input  vec_t                mv_wdata,
  output logic                mv_ready,
  // observation of the orchestrators
  output logic [2:0]          orch_state [N_ROWS],
  output idx_t                orch_start [N_ROWS],
  output idx_t                orch_cur   [N_ROWS]
);

  instr_t ins   [N_ROWS][N_COLS+1];
  logic   insv  [N_ROWS][N_COLS+1];
  logic   hold  [N_ROWS];
  msg_t   msg   [N_ROWS+1];
  link_t  lin   [N_ROWS][N_COLS][4];
  link_t  lout  [N_ROWS][N_COLS][4];
  logic   rdy   [N_ROWS][N_COLS];

  assign msg[0]    = north_msg;
  assign south_msg = msg[N_ROWS];

  for (genvar r = 0; r < int'(N_ROWS); r++) begin : g_row
    orchestrator #(.SP_WORDS(SP_WORDS)) u_orch (
      .clk, .rst_n, .en,
      .lut_we(lut_we[r]), .lut_waddr, .lut_wdata,
      .cfg_base, .cfg_idx_mask, .cfg_depth, .cfg_cond1_cnt, .cfg_cnt_limit,
      .in_valid(in_valid[r]), .in_meta(in_meta[r]), .in_ready(in_ready[r]),
      .msg_in(msg[r]), .msg_out(msg[r+1]),
      .instr_out(ins[r][0]), .instr_vout(insv[r][0]), .hold_out(hold[r]),
      .state_o(orch_state[r]), .start_rid_o(orch_start[r]), .cur_rid_o(orch_cur[r]));

    for (genvar c = 0; c < int'(N_COLS); c++) begin : g_col
      // neighbour wiring of the data network
      assign lin[r][c][DIR_N] = (r == 0)               ? north_in[c] : lout[r-1][c][DIR_S];
      assign lin[r][c][DIR_S] = (r == int'(N_ROWS)-1)  ? south_in[c] : lout[r+1][c][DIR_N];
      assign lin[r][c][DIR_W] = (c == 0)               ? west_in[r]  : lout[r][c-1][DIR_E];
      assign lin[r][c][DIR_E] = (c == int'(N_COLS)-1)  ? east_in[r]  : lout[r][c+1][DIR_W];

      pe #(.DM_WORDS(DM_WORDS), .SP_WORDS(SP_WORDS)) u_pe (
        .clk, .rst_n,
        .instr_in(ins[r][c]), .instr_vin(insv[r][c]), .hold(hold[r]),
        .instr_out(ins[r][c+1]), .instr_vout(insv[r][c+1]),
        .link_in(lin[r][c]), .link_out(lout[r][c]),
        .mv_we(mv_we && mv_row == R_AW'(r) && mv_col == C_AW'(c)),
        .mv_addr, .mv_wdata, .mv_ready(rdy[r][c]));
    end

    assign west_out[r] = lout[r][0][DIR_W];
    assign east_out[r] = lout[r][N_COLS-1][DIR_E];
  end

  for (genvar c = 0; c < int'(N_COLS); c++) begin : g_edge
    assign north_out[c] = lout[0][c][DIR_N];
    assign south_out[c] = lout[N_ROWS-1][c][DIR_S];
  end

  assign mv_ready = rdy[mv_row][mv_col];

endmodule

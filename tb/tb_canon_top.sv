// tb_canon_top -- end-to-end test of the full 8 x 8 Canon array at its default sizes.
//
// Phase 1, sparse-dense matrix multiplication C = A x B (row-wise product with
// asynchronous reduction): B (K x N, K = 8 rows of PEs x H, N = 8 columns x 4
// lanes) is written into the PE data memories, PE (r, c) holding rows
// r*H .. r*H+H-1 and columns 4c .. 4c+3. Each orchestrator r receives, for
// every row m of A, the non-zeros of A[m][r*H +: H] and a row-end token, then
// DEPTH extra row-end tokens that push the last rows out of its scratchpad
// FIFO. The density of A changes per (row of A, row of PEs) so that the rows
// of PEs are unbalanced: psums then get accumulated, bypassed and flushed.
// The bottom edge is the output collector: each word leaving a bottom PE is
// tagged with the row id of the bottom orchestrator's message sent 4 + 3c
// cycles earlier, and C[m] accumulates all words tagged m. C is compared with
// a reference computed here (INT8, wrapping).
//
// Phase 2, spatial execution: after a reset the orchestrators are loaded
// with a program that sends one configuration-only instruction "E <= W +
// dmem[0]" along each row for 30 cycles and then holds the rows. Every PE
// then repeats that instruction each cycle, so each row becomes an adder
// chain; the test checks east_out = west_in + sum of the row's dmem[0], and
// that a new west word needs exactly 3 cycles per PE to cross the row.
//
// Each mechanism (MAC, psum accumulate, psum bypass, flush, window growth,
// configuration issue, hold) is counted and must occur at least once.
//
// The array size, the SpMM dataflow and the spatial mode with hold follow the
// paper; the matrix sizes, the density pattern, the FIFO depth of 4 and the
// adder-chain program are this test's own.
`timescale 1ns/1ps
module tb_canon_top;
  import canon_pkg::*;
  import spmm_prog_pkg::*;

  localparam int R = ROWS, C = COLS;
  localparam int H = 4;                 // rows of B per PE row
  localparam int K = R * H;
  localparam int N = C * LANES;
  localparam int M = 24;                // rows of A
  localparam int DEPTH = 4;             // effective scratchpad FIFO depth
  localparam int QMAX = M * (H + 1) + DEPTH + 4;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #1 clk = ~clk;

  logic                lut_we [R];
  logic [LUT_IN_W-1:0] lut_waddr;
  logic [LUT_W-1:0]    lut_wdata;
  addr_t               cfg_base [8];
  idx_t                cfg_idx_mask, cfg_cnt_limit;
  logic [4:0]          cfg_depth;
  logic                cfg_cond1_cnt;
  logic                in_valid [R];
  meta_t               in_meta  [R];
  logic                in_ready [R];
  msg_t                north_msg, south_msg;
  link_t               north_in [C], north_out [C], south_in [C], south_out [C];
  link_t               west_in  [R], west_out  [R], east_in  [R], east_out  [R];
  logic                mv_we, mv_ready;
  logic [2:0]          mv_row, mv_col;
  logic [9:0]          mv_addr;
  vec_t                mv_wdata;
  logic [2:0]          orch_state [R];
  idx_t                orch_start [R], orch_cur [R];

  canon_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ data
  logic [7:0] A [M][K];
  logic [7:0] B [K][N];
  logic [7:0] Cref [M][N];
  logic [7:0] Cout [M][N];
  vec_t       dm0 [R][C];
  meta_t      q   [R][QMAX];
  int         qn  [R];
  int         qp  [R];
  bit         streaming = 0;

  // input streams
  always_comb for (int r = 0; r < R; r++) begin
    in_valid[r] = streaming && (qp[r] < qn[r]);
    in_meta[r]  = (qp[r] < qn[r]) ? q[r][qp[r]] : '0;
  end
  always @(posedge clk) if (streaming)
    for (int r = 0; r < R; r++) if (in_valid[r] && in_ready[r]) qp[r] <= qp[r] + 1;

  // ------------------------------------------------------------ output collector
  msg_t smsg_hist [64];
  int   n_out = 0, n_phantom = 0;
  always @(posedge clk) begin
    smsg_hist[cyc % 64] <= south_msg;
    for (int c = 0; c < C; c++) if (south_out[c].valid && streaming) begin
      msg_t mm;
      mm = smsg_hist[(cyc - 4 - 3*c + 64) % 64];
      check(mm.id == MSG_PSUM, $sformatf("south word of column %0d has no psum message", c));
      if (mm.rid < M) begin
        for (int l = 0; l < LANES; l++)
          Cout[mm.rid][c*LANES+l] = Cout[mm.rid][c*LANES+l] + south_out[c].data[l*8 +: 8];
        n_out++;
      end else begin
        check(south_out[c].data == '0, "phantom row psum not zero");
        n_phantom++;
      end
    end
  end

  // ------------------------------------------------------------ mechanism counters
  int n_mac = 0, n_acc = 0, n_byp = 0, n_flush = 0, n_grow = 0, n_cfg = 0, n_hold = 0;
  for (genvar r = 0; r < R; r++) begin : g_mon
    always @(posedge clk) if (en && rst_n) begin
      lutw_t w;
      w = dut.g_row[r].u_orch.lw;
      if (w.op == OP_MAC)                 n_mac++;
      if (w.op == OP_ADD)                 n_acc++;
      if (w.byp_en)                       n_byp++;
      if (w.op == OP_MOVCLR)              n_flush++;
      if (w.cur_inc && !w.start_inc)      n_grow++;
      if (w.cfg)                          n_cfg++;
      if (w.hold)                         n_hold++;
    end
  end

  // ------------------------------------------------------------ helpers
  task automatic program_luts(input bit spatial);
    for (int i = 0; i < 2**LUT_IN_W; i++) begin
      lutw_t w;
      if (!spatial) w = spmm_word(LUT_IN_W'(i));
      else begin
        w = '0;
        w.op1 = ag(OFS_ZERO, 3'd1);     // W link
        w.op2 = ag(OFS_ZERO, 3'd2);     // dmem[0]
        w.res = ag(OFS_ZERO, 3'd3);     // E link
        w.byp_src = DIR_N;  w.byp_dst = DIR_S;
        if (i[9:7] == 3'd0) begin       // state 0: configuration phase
          w.op = OP_ADD;  w.cfg = 1'b1;  w.cnt_inc = 1'b1;
          w.next_state = i[1] ? 3'd1 : 3'd0;    // cond[1] = counter reached limit
        end else begin                  // state 1: execution under hold
          w.op = OP_NOP;  w.hold = 1'b1;  w.next_state = 3'd1;
        end
      end
      lut_waddr = LUT_IN_W'(i);
      lut_wdata = LUT_W'(w);
      for (int r = 0; r < R; r++) lut_we[r] = 1'b1;
      @(posedge clk); #0.1;
    end
    for (int r = 0; r < R; r++) lut_we[r] = 1'b0;
  endtask

  task automatic mv_write(input int r, input int c, input int a, input vec_t d);
    mv_row = 3'(r); mv_col = 3'(c); mv_addr = 10'(a); mv_wdata = d; mv_we = 1'b1;
    @(posedge clk); #0.1;
    while (!mv_ready) begin @(posedge clk); #0.1; end
    mv_we = 1'b0;
  endtask

  // ------------------------------------------------------------ stimulus
  initial begin
    int seed_dummy;
    int total;
    for (int r = 0; r < R; r++) begin lut_we[r] = 0; west_in[r] = '0; east_in[r] = '0; qp[r] = 0; qn[r] = 0; end
    for (int c = 0; c < C; c++) begin north_in[c] = '0; south_in[c] = '0; end
    north_msg = '0; mv_we = 0; mv_row = 0; mv_col = 0; mv_addr = 0; mv_wdata = 0;
    lut_waddr = 0; lut_wdata = 0;
    spmm_bases(cfg_base);
    cfg_idx_mask = idx_t'(H - 1);
    cfg_depth = 5'(DEPTH);
    cfg_cond1_cnt = 1'b0;
    cfg_cnt_limit = '0;
    seed_dummy = $urandom(7);

    // ---- matrices: density varies by (row of A, row of PEs)
    for (int m = 0; m < M; m++)
      for (int r = 0; r < R; r++) begin
        int dens;
        dens = ((m + 3*r) % 5 == 0) ? 100 : (((m * 7 + r) % 3 == 0) ? 60 : 15);
        for (int h = 0; h < H; h++)
          A[m][r*H+h] = (($urandom % 100) < dens) ? 8'(1 + $urandom % 255) : 8'd0;
      end
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) B[k][n] = 8'($urandom);
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      logic [7:0] s;
      s = 0;
      for (int k = 0; k < K; k++) s = s + A[m][k] * B[k][n];
      Cref[m][n] = s;
      Cout[m][n] = 0;
    end
    for (int r = 0; r < R; r++) begin
      int n;
      n = 0;
      for (int m = 0; m < M; m++) begin
        for (int h = 0; h < H; h++) if (A[m][r*H+h] != 0) begin
          q[r][n] = '{tag: TAG_NNZ, idx: idx_t'(r*H+h), val: A[m][r*H+h]};
          n++;
        end
        q[r][n] = '{tag: TAG_ROWEND, idx: idx_t'(m), val: 8'd0};
        n++;
      end
      for (int d = 0; d < DEPTH; d++) begin
        q[r][n] = '{tag: TAG_ROWEND, idx: idx_t'(M + d), val: 8'd0};
        n++;
      end
      qn[r] = n;
    end

    // ---- phase 1: SpMM
    repeat (3) @(posedge clk); #0.1;
    rst_n = 1'b1;
    program_luts(1'b0);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int h = 0; h < H; h++) begin
      vec_t v;
      for (int l = 0; l < LANES; l++) v[l*8 +: 8] = B[r*H+h][c*LANES+l];
      mv_write(r, c, h, v);
    end
    streaming = 1;
    en = 1'b1;
    begin
      int t0;
      t0 = cyc;
      for (int r = 0; r < R; r++) while (qp[r] < qn[r]) @(posedge clk);
      repeat (200) @(posedge clk);
      $display("SpMM M=%0d K=%0d N=%0d finished in %0d cycles", M, K, N, cyc - t0);
    end
    #0.1;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      check(Cout[m][n] == Cref[m][n], $sformatf("C[%0d][%0d] = %0d, expected %0d", m, n, Cout[m][n], Cref[m][n]));
    for (int r = 0; r < R; r++)
      check(orch_start[r] == idx_t'(M + 1), $sformatf("row %0d flushed up to row %0d", r, orch_start[r]));
    $display("psum words out: %0d real, %0d phantom", n_out, n_phantom);
    streaming = 0;
    en = 1'b0;

    // ---- phase 2: spatial execution with hold
    #0.1 rst_n = 1'b0;
    @(posedge clk); #0.1;
    rst_n = 1'b1;
    cfg_base[0] = A_NULL; cfg_base[1] = a_link(DIR_W); cfg_base[2] = a_dmem(0); cfg_base[3] = a_link(DIR_E);
    cfg_cond1_cnt = 1'b1;
    cfg_cnt_limit = idx_t'(30);
    program_luts(1'b1);
    total = 0;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) begin
        vec_t v;
        v = vec_t'($urandom);
        dm0[r][c] = v;
        mv_write(r, c, 0, v);
      end
    end
    for (int r = 0; r < R; r++) west_in[r] = '{valid: 1'b1, data: vec_t'($urandom)};
    en = 1'b1;
    repeat (80) @(posedge clk);
    #0.1;
    for (int r = 0; r < R; r++) begin
      vec_t exp_v;
      exp_v = west_in[r].data;
      for (int c = 0; c < C; c++)
        for (int l = 0; l < LANES; l++)
          exp_v[l*8 +: 8] = exp_v[l*8 +: 8] + dm0[r][c][l*8 +: 8];
      check(orch_state[r] == 3'd1, "row not in hold state");
      check(east_out[r].valid && east_out[r].data == exp_v,
            $sformatf("row %0d adder chain: got %h expected %h", r, east_out[r].data, exp_v));
    end
    // latency of a new word across row 0: 3 cycles per PE
    begin
      vec_t nv, exp_v;
      int t0, lat;
      nv = west_in[0].data ^ 32'h0101_0101;
      exp_v = nv;
      for (int c = 0; c < C; c++)
        for (int l = 0; l < LANES; l++)
          exp_v[l*8 +: 8] = exp_v[l*8 +: 8] + dm0[0][c][l*8 +: 8];
      west_in[0].data = nv;
      t0 = cyc;
      lat = -1;
      for (int i = 0; i < 60; i++) begin
        @(posedge clk); #0.1;
        if (lat < 0 && east_out[0].data == exp_v) lat = cyc - t0;
      end
      check(lat == 3 * C, $sformatf("row crossing took %0d cycles, expected %0d", lat, 3 * C));
    end
    en = 1'b0;

    $display("mechanisms: mac=%0d acc=%0d bypass=%0d flush=%0d grow=%0d cfg=%0d hold=%0d",
             n_mac, n_acc, n_byp, n_flush, n_grow, n_cfg, n_hold);
    check(n_mac   > 0, "no MAC issued");
    check(n_acc   > 0, "no psum accumulated");
    check(n_byp   > 0, "no psum bypassed");
    check(n_flush > 0, "no psum flushed");
    check(n_grow  > 0, "FIFO window never grew");
    check(n_cfg   > 0, "no configuration-only instruction");
    check(n_hold  > 0, "rows never held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

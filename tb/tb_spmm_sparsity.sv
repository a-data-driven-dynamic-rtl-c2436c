// tb_spmm_sparsity -- SpMM on the full 8 x 8 array across sparsity patterns.
//
// The same row-wise SpMM program as the end-to-end test (asynchronous
// reduction with a scratchpad FIFO of partial sums) is run five times on a
// larger problem, M = 32 rows of A, K = 8 x 8 = 64, N = 32, after a reset
// each time, with these patterns of A:
//   dense     0 % zeros (the dense GEMM case)
//   S1       about 15 % zeros
//   S2       about 45 % zeros
//   S3       about 85 % zeros, FIFO depth 16 (the whole scratchpad)
//   2:4      exactly two non-zeros in every group of four along K
// Each run loads B through the memory-mover port, streams the non-zeros, and
// checks every element of C (INT8, wrapping) against a reference computed
// here, plus the final FIFO window of every orchestrator. The cycle count of
// each run is printed. Accumulations, bypasses, flushes and window growth
// are counted over all runs and must each happen.
//
// Testbench choices: the sparsity bands are those the architecture is
// evaluated on; the matrix sizes, the FIFO depths and the random values are
// this test's own.
`timescale 1ns/1ps
module tb_spmm_sparsity;
  import canon_pkg::*;
  import spmm_prog_pkg::*;

  localparam int R = ROWS, C = COLS;
  localparam int H = 8;                 // rows of B per PE row
  localparam int K = R * H;
  localparam int N = C * LANES;
  localparam int M = 32;                // rows of A
  localparam int DMAX = 16;             // largest FIFO depth used
  localparam int QMAX = M * (H + 1) + DMAX + 4;
  int depth;

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
    repeat (200000) @(posedge clk);
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
  int n_mac = 0, n_acc = 0, n_byp = 0, n_flush = 0, n_grow = 0;
  for (genvar r = 0; r < R; r++) begin : g_mon
    always @(posedge clk) if (en && rst_n) begin
      lutw_t w;
      w = dut.g_row[r].u_orch.lw;
      if (w.op == OP_MAC)                 n_mac++;
      if (w.op == OP_ADD)                 n_acc++;
      if (w.byp_en)                       n_byp++;
      if (w.op == OP_MOVCLR)              n_flush++;
      if (w.cur_inc && !w.start_inc)      n_grow++;
    end
  end

  // ------------------------------------------------------------ helpers
  task automatic program_luts();
    for (int i = 0; i < 2**LUT_IN_W; i++) begin
      lut_waddr = LUT_IN_W'(i);
      lut_wdata = LUT_W'(spmm_word(LUT_IN_W'(i)));
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

  // pattern: 0 dense, 1 S1, 2 S2, 3 S3, 4 2:4
  task automatic run_spmm(input int pat, input string name, input int dep);
    int nnz, t0;
    depth = dep;
    for (int m = 0; m < M; m++)
      for (int k = 0; k < K; k++) begin
        bit nz;
        unique case (pat)
          0: nz = 1;
          1: nz = ($urandom % 100) >= 15;
          2: nz = ($urandom % 100) >= 45;
          3: nz = ($urandom % 100) >= 85;
          default: nz = 0;
        endcase
        A[m][k] = nz ? 8'(1 + $urandom % 255) : 8'd0;
      end
    if (pat == 4)
      for (int m = 0; m < M; m++)
        for (int g = 0; g < K / 4; g++) begin
          int p0, p1;
          p0 = $urandom % 4;
          p1 = (p0 + 1 + $urandom % 3) % 4;
          A[m][4*g + p0] = 8'(1 + $urandom % 255);
          A[m][4*g + p1] = 8'(1 + $urandom % 255);
        end
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) B[k][n] = 8'($urandom);
    nnz = 0;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      logic [7:0] s;
      s = 0;
      for (int k = 0; k < K; k++) s = s + A[m][k] * B[k][n];
      Cref[m][n] = s;
      Cout[m][n] = 0;
    end
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) if (A[m][k] != 0) nnz++;
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
      for (int d = 0; d < dep; d++) begin
        q[r][n] = '{tag: TAG_ROWEND, idx: idx_t'(M + d), val: 8'd0};
        n++;
      end
      qn[r] = n;
      qp[r] = 0;
    end

    rst_n = 1'b0;
    repeat (2) @(posedge clk); #0.1;
    rst_n = 1'b1;
    cfg_depth = 5'(dep);
    program_luts();
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int h = 0; h < H; h++) begin
      vec_t v;
      for (int l = 0; l < LANES; l++) v[l*8 +: 8] = B[r*H+h][c*LANES+l];
      mv_write(r, c, h, v);
    end
    n_out = 0; n_phantom = 0;
    streaming = 1;
    en = 1'b1;
    t0 = cyc;
    for (int r = 0; r < R; r++) while (qp[r] < qn[r]) @(posedge clk);
    repeat (200) @(posedge clk);
    #0.1;
    $display("%s: %0d of %0d elements of A non-zero, FIFO depth %0d, %0d cycles (incl. 200 drain)",
             name, nnz, M * K, dep, cyc - t0);
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      check(Cout[m][n] == Cref[m][n], $sformatf("%s: C[%0d][%0d] = %0d, expected %0d", name, m, n, Cout[m][n], Cref[m][n]));
    for (int r = 0; r < R; r++)
      check(orch_start[r] == idx_t'(M + 1), $sformatf("%s: row %0d flushed up to row %0d", name, r, orch_start[r]));
    streaming = 0;
    en = 1'b0;
  endtask

  // ------------------------------------------------------------ stimulus
  initial begin
    int seed_dummy;
    for (int r = 0; r < R; r++) begin lut_we[r] = 0; west_in[r] = '0; east_in[r] = '0; qp[r] = 0; qn[r] = 0; end
    for (int c = 0; c < C; c++) begin north_in[c] = '0; south_in[c] = '0; end
    north_msg = '0; mv_we = 0; mv_row = 0; mv_col = 0; mv_addr = 0; mv_wdata = 0;
    lut_waddr = 0; lut_wdata = 0;
    spmm_bases(cfg_base);
    cfg_idx_mask = idx_t'(H - 1);
    cfg_depth = 5'd4;
    cfg_cond1_cnt = 1'b0;
    cfg_cnt_limit = '0;
    depth = 4;
    seed_dummy = $urandom(11);
    repeat (3) @(posedge clk); #0.1;

    run_spmm(0, "dense", 4);
    run_spmm(1, "S1", 4);
    run_spmm(2, "S2", 8);
    run_spmm(3, "S3", 16);
    run_spmm(4, "2:4", 4);

    $display("mechanisms: mac=%0d acc=%0d bypass=%0d flush=%0d grow=%0d",
             n_mac, n_acc, n_byp, n_flush, n_grow);
    check(n_mac   > 0, "no MAC issued");
    check(n_acc   > 0, "no psum accumulated");
    check(n_byp   > 0, "no psum bypassed");
    check(n_flush > 0, "no psum flushed");
    check(n_grow  > 0, "FIFO window never grew");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_router -- test of the PE router.
//
// Random traffic: the four input links carry random words, the four read
// selectors pick random directions (checked combinationally), and in each
// cycle a commit write and a bypass write go to random, different
// directions. The outputs are checked one cycle later against a model: the
// written directions carry the words with valid = 1, the others valid = 0.
//
// One word per direction per cycle follows the paper; registered outputs that
// drop valid when idle are this design's choice.
`timescale 1ns/1ps
module tb_router;
  import canon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  link_t link_in [4], link_out [4];
  dir_e  rd_dir [4];
  vec_t  rd_data [4];
  logic  rd_valid [4];
  logic  cw_en, bw_en, conflict;
  dir_e  cw_dir, bw_dir;
  vec_t  cw_data, bw_data;
  int checks = 0, failures = 0;

  router dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    link_t expo [4];
    for (int d = 0; d < 4; d++) begin link_in[d] = '0; rd_dir[d] = DIR_N; end
    cw_en = 0; bw_en = 0; cw_dir = DIR_N; bw_dir = DIR_S; cw_data = 0; bw_data = 0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int d = 0; d < 4; d++) begin
        link_in[d] = '{valid: 1'($urandom), data: $urandom};
        rd_dir[d]  = dir_e'($urandom % 4);
      end
      cw_en = 1'($urandom); bw_en = 1'($urandom);
      cw_dir = dir_e'($urandom % 4);
      bw_dir = dir_e'((cw_dir + 1 + $urandom % 3) % 4);
      cw_data = $urandom; bw_data = $urandom;
      #0.2;
      for (int i = 0; i < 4; i++)
        chk(rd_data[i] == link_in[rd_dir[i]].data && rd_valid[i] == link_in[rd_dir[i]].valid,
            $sformatf("read select %0d", i));
      chk(!conflict, "no conflict expected");
      for (int d = 0; d < 4; d++) begin
        if (cw_en && cw_dir == dir_e'(d))      expo[d] = '{valid: 1'b1, data: cw_data};
        else if (bw_en && bw_dir == dir_e'(d)) expo[d] = '{valid: 1'b1, data: bw_data};
        else                                   expo[d] = '0;
      end
      @(posedge clk); #0.2;
      for (int d = 0; d < 4; d++)
        chk(link_out[d] == expo[d], $sformatf("output %0d: %h vs %h", d, link_out[d], expo[d]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

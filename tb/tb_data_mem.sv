// tb_data_mem -- test of the 1024 x 32-bit PE data memory.
//
// Fills every word with a random value, reads all of them back (checking the
// one-cycle read latency), then checks that a read and a write in the same
// cycle to the same word return the old word, and that reads and writes to
// different words in one cycle both take effect.
//
// The 4 KB size follows the paper; the port behaviour checked (one read, one
// write, registered read) is this design's choice.
`timescale 1ns/1ps
module tb_data_mem;
  logic clk = 0;
  always #1 clk = ~clk;
  logic re, we;
  logic [9:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  logic [31:0] ref_mem [1024];
  int checks = 0, failures = 0;

  data_mem dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    repeat (20000) @(posedge clk);
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
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      ref_mem[i] = $urandom;
      @(negedge clk); we = 1; waddr = 10'(i); wdata = ref_mem[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1024; i++) begin
      int a;
      a = (i * 389) % 1024;
      @(negedge clk); re = 1; raddr = 10'(a);
      @(negedge clk); re = 0;
      chk(rdata == ref_mem[a], $sformatf("word %0d: %h vs %h", a, rdata, ref_mem[a]));
    end
    // read-during-write to the same word returns the old contents
    @(negedge clk); re = 1; raddr = 10'd77; we = 1; waddr = 10'd77; wdata = ~ref_mem[77];
    @(negedge clk); re = 0; we = 0;
    chk(rdata == ref_mem[77], "read during write should give the old word");
    ref_mem[77] = ~ref_mem[77];
    @(negedge clk); re = 1; raddr = 10'd77;
    @(negedge clk); re = 0;
    chk(rdata == ref_mem[77], "new word after the write");
    // read data holds while re is low
    @(negedge clk);
    chk(rdata == ref_mem[77], "read data held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

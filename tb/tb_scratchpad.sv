// tb_scratchpad -- test of the 16-entry dual-port scratchpad.
//
// Checks that reset clears every entry, that the read and write ports work in
// the same cycle on different entries (the dual-port use of a psum FIFO: read
// the oldest entry while writing another), the one-cycle read latency and
// old-data on a same-entry read during write.
//
// The 16-entry dual-port size follows the paper; clearing on reset and
// old-data on collision are this design's choices.
`timescale 1ns/1ps
module tb_scratchpad;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic re, we;
  logic [3:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  logic [31:0] ref_mem [16];
  int checks = 0, failures = 0;

  scratchpad dut (.clk, .rst_n, .re, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    repeat (5000) @(posedge clk);
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
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); re = 1; raddr = 4'(i);
      @(negedge clk); re = 0;
      chk(rdata == 0, $sformatf("entry %0d not cleared by reset", i));
      ref_mem[i] = 0;
    end
    for (int n = 0; n < 400; n++) begin
      int ra, wa;
      logic [31:0] d;
      ra = $urandom % 16; wa = $urandom % 16; d = $urandom;
      @(negedge clk); re = 1; raddr = 4'(ra); we = 1; waddr = 4'(wa); wdata = d;
      @(negedge clk); re = 0; we = 0;
      chk(rdata == ref_mem[ra], $sformatf("read %0d: %h vs %h", ra, rdata, ref_mem[ra]));
      ref_mem[wa] = d;
    end
    // a second reset, now that the entries hold data, must clear them again
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); we = 1; waddr = 4'(i); wdata = 32'hA5A5_0000 | 32'(i);
    end
    @(negedge clk); we = 0; rst_n = 0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); re = 1; raddr = 4'(i);
      @(negedge clk); re = 0;
      chk(rdata == 0, $sformatf("entry %0d not cleared by the second reset", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

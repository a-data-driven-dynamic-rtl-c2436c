// tb_orch_lut -- test of the 1024 x 48-bit orchestrator look-up table.
//
// Loads a full random bitstream through the write port, then reads every
// entry (combinational read) in a scrambled order and compares it with the
// bitstream; finally rewrites a few entries and checks they change while their
// neighbours do not.
//
// The 1024 x 48-bit size follows the paper; the asynchronous read checked here
// is this design's choice.
`timescale 1ns/1ps
module tb_orch_lut;
  logic clk = 0;
  always #1 clk = ~clk;
  logic wen;
  logic [9:0] waddr, raddr;
  logic [47:0] wdata, rdata;
  logic [47:0] bits [1024];
  int checks = 0, failures = 0;

  orch_lut dut (.clk, .wen, .waddr, .wdata, .raddr, .rdata);

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
    wen = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int i = 0; i < 1024; i++) begin
      bits[i] = {$urandom, $urandom};
      @(negedge clk); wen = 1; waddr = 10'(i); wdata = bits[i];
    end
    @(negedge clk); wen = 0;
    for (int i = 0; i < 1024; i++) begin
      int a;
      a = (i * 617 + 5) % 1024;
      raddr = 10'(a); #0.2;
      chk(rdata == bits[a], $sformatf("entry %0d: %h vs %h", a, rdata, bits[a]));
    end
    for (int n = 0; n < 8; n++) begin
      int a;
      a = $urandom % 1022 + 1;
      bits[a] = ~bits[a];
      @(negedge clk); wen = 1; waddr = 10'(a); wdata = bits[a];
      @(negedge clk); wen = 0;
      for (int d = -1; d <= 1; d++) begin
        raddr = 10'(a + d); #0.2;
        chk(rdata == bits[a + d], $sformatf("rewrite of %0d", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

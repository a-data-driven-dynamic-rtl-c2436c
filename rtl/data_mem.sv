// data_mem -- the 4 KB local data memory of one Canon PE.
//
// 1024 words of one 4-lane INT8 vector (32 bits) each, with one read port and
// one write port. The paper gives the size (4 KB per PE), single-cycle random
// access, and the port discipline: reads only happen in the PE's LOAD stage and
// writes only in its COMMIT stage, so both can be used in the same cycle by
// different instructions. That read and write are separate ports, that the read
// is synchronous (address in one cycle, data in the next, like a compiled SRAM
// macro) and that a read of the word being written returns the old word are
// this design's choices; the PE forwards the new value around it. No reset:
// contents are loaded by the memory movers or by instructions before use.
module data_mem #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);

  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule

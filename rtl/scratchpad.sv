// scratchpad -- the dual-port 64-byte scratchpad of one Canon PE.
//
// 16 entries of one 4-lane INT8 vector (4 bytes) each: 64 bytes, the paper's
// size, and 16 entries, the buffer depth it evaluates. One read port (used in
// the LOAD stage) and one write port (used in the COMMIT stage) work in the
// same cycle; the paper calls the scratchpad dual-ported. It holds partial sums
// or reused operands; the orchestrator manages it as a circular FIFO of
// partial-sum rows. Read is synchronous (data the cycle after the address); a
// read of the entry being written returns the old entry and the PE forwards
// the new one. Unlike the data memory it is cleared by reset, because the
// partial-sum FIFO relies on free entries reading as zero; this is an
// assumption of this design.
module scratchpad #(
  parameter int unsigned WORDS = 16,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);

  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(WORDS); i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

endmodule

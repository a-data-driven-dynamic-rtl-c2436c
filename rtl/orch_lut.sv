// orch_lut -- the programmable look-up table of a Canon orchestrator.
//
// 2^10 entries of 48 bits (6 KB), one entry for every value of the 10-bit
// index {state, input tag, message id, condition bits}. Each entry holds the
// settings of the orchestrator's dynamic components for that case (next state,
// opcode, address generation, message, meta-register updates; layout in
// canon_pkg::lutw_t). Because every input combination has its own entry, the
// table realises any combinational function of its inputs: this is how a
// kernel's FSM is programmed. Sizes follow the paper.
//
// Interface: a write port (wen, waddr, wdata) through which the bitstream is
// loaded before a kernel runs, and a read port (raddr -> rdata). The read is
// combinational, an assumption of this design: the orchestrator makes one
// decision per cycle and its state feeds the index back, so a registered read
// would halve its issue rate.
module orch_lut #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 48,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wen,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wen) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule

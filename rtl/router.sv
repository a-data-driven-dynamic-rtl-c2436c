// router -- the circuit-switched router of one Canon PE.
//
// Four ports (N, E, S, W). On the LOAD side it selects which incoming link
// feeds each operand of the instruction in the LOAD stage (up to four reads:
// op1, op2, the accumulator and the bypass path). On the COMMIT side it drives
// the four outgoing link registers: each output carries at most one word per
// cycle, either the result of the instruction in COMMIT or a word bypassed
// straight through from another input (for instance north to south, the
// psum bypass of the sparse kernels). An output that nobody writes in a cycle
// carries valid = 0 in the next one.
//
// From the paper: a circuit-switched NoC whose switch is used in the LOAD and
// COMMIT stages, one transfer per cycle per direction, and the bypass that
// forwards a psum "from north to south without interrupting the execution
// pipeline". There is no flow control: the orchestrators schedule every
// transfer, and two writes to one direction in a cycle are a programming error
// (flagged by an assertion and the `conflict` output; the commit word wins).
// Outputs are registered: a word written at COMMIT in cycle t is on the link
// during cycle t+1.
module router
  import canon_pkg::*;
#(
  parameter int unsigned NRD = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  link_t       link_in  [4],
  input  dir_e        rd_dir   [NRD],
  output vec_t        rd_data  [NRD],
  output logic        rd_valid [NRD],
  input  logic        cw_en,
  input  dir_e        cw_dir,
  input  vec_t        cw_data,
  input  logic        bw_en,
  input  dir_e        bw_dir,
  input  vec_t        bw_data,
  output link_t       link_out [4],
  output logic        conflict
);

  always_comb begin
    for (int i = 0; i < int'(NRD); i++) begin
      rd_data[i]  = link_in[rd_dir[i]].data;
      rd_valid[i] = link_in[rd_dir[i]].valid;
    end
  end

  assign conflict = cw_en && bw_en && (cw_dir == bw_dir);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < 4; d++) link_out[d] <= '0;
    end else begin
      for (int d = 0; d < 4; d++) begin
        if (cw_en && cw_dir == dir_e'(d))      link_out[d] <= '{valid: 1'b1, data: cw_data};
        else if (bw_en && bw_dir == dir_e'(d)) link_out[d] <= '{valid: 1'b1, data: bw_data};
        else                                   link_out[d] <= '{valid: 1'b0, data: '0};
      end
    end
  end

  // one transfer per direction per cycle
  a_one_per_dir: assert property (@(posedge clk) disable iff (!rst_n) !conflict)
    else $error("router: two transfers to direction %0d in one cycle", cw_dir);

endmodule

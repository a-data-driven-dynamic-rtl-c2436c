// vector_lane -- the COMPUTE-stage datapath of a Canon PE.
//
// A 4-lane INT8 SIMD unit: every lane applies the same operation to its own
// 8-bit words of the operands a and b; multiply-accumulate also adds the lane of
// c, which the PE reads from the destination location. Arithmetic wraps
// modulo 2^8, the width the array is built for (INT8 words throughout, and
// 4-byte scratchpad entries that hold one 4-lane vector).
//
// The paper states that the COMPUTE stage "performs computations using a vector
// lane that processes four words in parallel"; the opcode set (see canon_pkg)
// and wrap-around arithmetic are this design's choice. Purely combinational:
// the result is valid in the same cycle as the operands.
module vector_lane
  import canon_pkg::*;
#(
  parameter int unsigned N_LANES = LANES,
  parameter int unsigned W       = DATA_W
) (
  input  opcode_e               op,
  input  logic [N_LANES*W-1:0]  a,
  input  logic [N_LANES*W-1:0]  b,
  input  logic [N_LANES*W-1:0]  c,
  output logic [N_LANES*W-1:0]  y
);

  logic [W-1:0] sum;

  always_comb begin
    sum = b[W-1:0];
    for (int l = 0; l < N_LANES; l++) sum = sum + a[l*W +: W];
  end

  always_comb begin
    y = '0;
    for (int l = 0; l < N_LANES; l++) begin
      logic signed [W-1:0] la, lb, lc;
      la = a[l*W +: W];
      lb = b[l*W +: W];
      lc = c[l*W +: W];
      unique case (op)
        OP_MOV, OP_MOVCLR: y[l*W +: W] = la;
        OP_ADD:            y[l*W +: W] = la + lb;
        OP_SUB:            y[l*W +: W] = la - lb;
        OP_MUL:            y[l*W +: W] = W'(la * lb);
        OP_MAC:            y[l*W +: W] = W'(lc + la * lb);
        OP_MAX:            y[l*W +: W] = (la > lb) ? la : lb;
        OP_MIN:            y[l*W +: W] = (la < lb) ? la : lb;
        OP_AND:            y[l*W +: W] = la & lb;
        OP_OR:             y[l*W +: W] = la | lb;
        OP_XOR:            y[l*W +: W] = la ^ lb;
        OP_REDSUM:         y[l*W +: W] = (l == 0) ? sum : '0;
        default:           y[l*W +: W] = '0;
      endcase
    end
  end

endmodule

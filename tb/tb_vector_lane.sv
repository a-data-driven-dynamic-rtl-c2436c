// tb_vector_lane -- random test of the 4-lane INT8 vector lane.
//
// Drives every opcode with random operands and compares each lane of the
// result with a per-lane reference written here with plain integer arithmetic
// (wrapped to 8 bits). The unit is combinational, so the result is checked
// in the same time step as the operands change.
//
// Four INT8 lanes follow the paper; the opcode set and 8-bit wrapping are
// this design's choices.
`timescale 1ns/1ps
module tb_vector_lane;
  import canon_pkg::*;

  opcode_e op;
  vec_t a, b, c, y;
  int checks = 0, failures = 0;

  vector_lane dut (.op, .a, .b, .c, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t model(input opcode_e o, input vec_t x, input vec_t z, input vec_t w);
    vec_t r;
    int s;
    r = '0;
    s = z[7:0];
    for (int l = 0; l < 4; l++) s += x[l*8 +: 8];
    for (int l = 0; l < 4; l++) begin
      int xa, xb, xc, v;
      xa = $signed(x[l*8 +: 8]);
      xb = $signed(z[l*8 +: 8]);
      xc = $signed(w[l*8 +: 8]);
      case (o)
        OP_MOV, OP_MOVCLR: v = xa;
        OP_ADD:    v = xa + xb;
        OP_SUB:    v = xa - xb;
        OP_MUL:    v = xa * xb;
        OP_MAC:    v = xc + xa * xb;
        OP_MAX:    v = (xa > xb) ? xa : xb;
        OP_MIN:    v = (xa < xb) ? xa : xb;
        OP_AND:    v = xa & xb;
        OP_OR:     v = xa | xb;
        OP_XOR:    v = xa ^ xb;
        OP_REDSUM: v = (l == 0) ? s : 0;
        default:   v = 0;
      endcase
      r[l*8 +: 8] = 8'(v);
    end
    return r;
  endfunction

  initial begin
    for (int i = 0; i < 4000; i++) begin
      op = opcode_e'(i % 13);
      a = $urandom; b = $urandom; c = $urandom;
      if (i % 97 == 0) begin a = 32'h7f80_ff01; b = 32'h7f80_ff01; end
      #1;
      checks++;
      if (y !== model(op, a, b, c)) begin
        failures++;
        if (failures < 10) $display("FAIL op=%0d a=%h b=%h c=%h y=%h exp=%h", op, a, b, c, y, model(op, a, b, c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

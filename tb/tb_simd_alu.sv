// tb_simd_alu: random test of the 8-lane, 16-bit SIMD arithmetic unit.
// Each opcode is applied to random vectors and every lane is compared with a per-lane
// model written with plain signed integer arithmetic. The unit is combinational, so the
// result is checked one time step after the inputs change.
module tb_simd_alu;
  import rnn_pkg::*;
  logic [3:0]   op;
  logic [127:0] a, b, c, y;
  int checks = 0, failures = 0;

  simd_alu dut (.op, .a, .b, .c, .y);

  function automatic logic [15:0] model(input logic [3:0] o, input logic [15:0] x0, x1, x2);
    int s0, s1, s2;
    s0 = $signed(x0); s1 = $signed(x1); s2 = $signed(x2);
    case (o)
      OP_ADD:  return 16'(s0 + s1);
      OP_SUB:  return 16'(s0 - s1);
      OP_MUL:  return 16'(s0 * s1);
      OP_MAX:  return 16'(s0 > s1 ? s0 : s1);
      OP_MIN:  return 16'(s0 < s1 ? s0 : s1);
      OP_MADD: return 16'(s0 * s1 + s2);
      default: return 16'h0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] ops [6] = '{OP_ADD, OP_SUB, OP_MUL, OP_MAX, OP_MIN, OP_MADD};
    for (int t = 0; t < 600; t++) begin
      op = ops[t % 6];
      for (int w = 0; w < 4; w++) begin
        a[w*32 +: 32] = $urandom; b[w*32 +: 32] = $urandom; c[w*32 +: 32] = $urandom;
      end
      if (t < 6) begin a[15:0] = 16'h8000; b[15:0] = 16'h7fff; end  // extremes in lane 0
      #1;
      for (int l = 0; l < 8; l++) begin
        checks++;
        if (y[l*16 +: 16] !== model(op, a[l*16 +: 16], b[l*16 +: 16], c[l*16 +: 16])) begin
          failures++;
          if (failures < 10) $display("mismatch op=%0d lane=%0d y=%h", op, l, y[l*16 +: 16]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

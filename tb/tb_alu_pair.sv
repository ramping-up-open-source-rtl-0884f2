// tb_alu_pair: self-checking test of the two ALUs and the forwarding path.
// Random operations and operands, with and without forwarding of ALU 0's
// result into either operand of ALU 1, are compared against a reference
// ALU written here from the RV64I definitions, including a dependent pair
// (add then shift of its result) done in one evaluation.
module tb_alu_pair;
  import cva6sp_pkg::*;
  op_t   op0, op1;
  xlen_t a0, b0, a1, b1, r0, r1;
  logic  fa, fb;
  int checks = 0, failures = 0;

  alu_pair dut (.op0_i(op0), .a0_i(a0), .b0_i(b0), .op1_i(op1), .a1_i(a1), .b1_i(b1),
                .fwd_a1_i(fa), .fwd_b1_i(fb), .res0_o(r0), .res1_o(r1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic xlen_t sext32(input logic [31:0] v);
    return {{32{v[31]}}, v};
  endfunction
  function automatic xlen_t ref_alu(op_t op, xlen_t a, xlen_t b);
    case (op)
      ALU_ADD:  return a + b;
      ALU_SUB:  return a - b;
      ALU_SLL:  return a << b[5:0];
      ALU_SLT:  return ($signed(a) < $signed(b)) ? 1 : 0;
      ALU_SLTU: return (a < b) ? 1 : 0;
      ALU_XOR:  return a ^ b;
      ALU_SRL:  return a >> b[5:0];
      ALU_SRA:  return $signed(a) >>> b[5:0];
      ALU_OR:   return a | b;
      ALU_AND:  return a & b;
      ALU_ADDW: return sext32(a[31:0] + b[31:0]);
      ALU_SUBW: return sext32(a[31:0] - b[31:0]);
      ALU_SLLW: return sext32(a[31:0] << b[4:0]);
      ALU_SRLW: return sext32(a[31:0] >> b[4:0]);
      ALU_SRAW: return sext32($signed(a[31:0]) >>> b[4:0]);
      ALU_LUI:  return b;
      default:  return 0;
    endcase
  endfunction

  function automatic xlen_t rnd();
    case ($urandom_range(0, 3))
      0: return xlen_t'($urandom_range(0, 70));
      1: return -xlen_t'($urandom_range(0, 70));
      default: return {$urandom(), $urandom()};
    endcase
  endfunction

  initial begin
    xlen_t e0, e1;
    for (int n = 0; n < 20000; n++) begin
      op0 = op_t'($urandom_range(0, 15)); op1 = op_t'($urandom_range(0, 15));
      a0 = rnd(); b0 = rnd(); a1 = rnd(); b1 = rnd();
      fa = ($urandom_range(0, 3) == 0); fb = ($urandom_range(0, 3) == 0);
      #1;
      e0 = ref_alu(op0, a0, b0);
      e1 = ref_alu(op1, fa ? e0 : a1, fb ? e0 : b1);
      checks += 2;
      if (r0 !== e0) begin failures++; if (failures < 10) $display("op0 %s %h %h: %h exp %h", op0.name(), a0, b0, r0, e0); end
      if (r1 !== e1) begin failures++; if (failures < 10) $display("op1 %s: %h exp %h", op1.name(), r1, e1); end
    end
    // dependent pair: x1 = 3 + 4 ; x2 = x1 << 2 in the same cycle
    op0 = ALU_ADD; a0 = 3; b0 = 4; op1 = ALU_SLL; a1 = 0; b1 = 2; fa = 1; fb = 0;
    #1 checks++; if (r1 !== 28) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

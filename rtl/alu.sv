// alu: one RV64I integer ALU, single cycle, purely combinational.
// Operations are the add/sub, shift, compare and logic group of RV64I,
// including the 32-bit W forms (result sign-extended) and LUI, which passes
// operand b. Encodings are the op_t values of cva6sp_pkg.
module alu
  import cva6sp_pkg::*;
(
  input  op_t   op_i,
  input  xlen_t a_i,
  input  xlen_t b_i,
  output xlen_t res_o
);
  logic [31:0] w;
  always_comb begin
    w = '0;
    unique case (op_i)
      ALU_ADD:  res_o = a_i + b_i;
      ALU_SUB:  res_o = a_i - b_i;
      ALU_SLL:  res_o = a_i << b_i[5:0];
      ALU_SLT:  res_o = xlen_t'($signed(a_i) < $signed(b_i));
      ALU_SLTU: res_o = xlen_t'(a_i < b_i);
      ALU_XOR:  res_o = a_i ^ b_i;
      ALU_SRL:  res_o = a_i >> b_i[5:0];
      ALU_SRA:  res_o = xlen_t'($signed(a_i) >>> b_i[5:0]);
      ALU_OR:   res_o = a_i | b_i;
      ALU_AND:  res_o = a_i & b_i;
      ALU_ADDW: begin w = a_i[31:0] + b_i[31:0]; res_o = {{32{w[31]}}, w}; end
      ALU_SUBW: begin w = a_i[31:0] - b_i[31:0]; res_o = {{32{w[31]}}, w}; end
      ALU_SLLW: begin w = a_i[31:0] << b_i[4:0]; res_o = {{32{w[31]}}, w}; end
      ALU_SRLW: begin w = a_i[31:0] >> b_i[4:0]; res_o = {{32{w[31]}}, w}; end
      ALU_SRAW: begin w = $signed(a_i[31:0]) >>> b_i[4:0]; res_o = {{32{w[31]}}, w}; end
      ALU_LUI:  res_o = b_i;
      default:  res_o = '0;
    endcase
  end
endmodule

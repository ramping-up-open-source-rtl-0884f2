// alu_pair: the two integer ALUs of the CVA6S+ execute stage with
// ALU-to-ALU operand forwarding.
//
// ALU 0 computes a0 op0 b0. ALU 1 computes a1 op1 b1, except that when
// fwd_a1_i (fwd_b1_i) is set its operand a (b) is replaced by ALU 0's result
// of the same cycle. This lets two dependent ALU instructions that issue
// together both finish in that cycle, as the published design does; the
// price is a chained ALU-ALU path. The issue stage decides when to forward.
// Purely combinational.
module alu_pair
  import cva6sp_pkg::*;
(
  input  op_t   op0_i,
  input  xlen_t a0_i,
  input  xlen_t b0_i,
  input  op_t   op1_i,
  input  xlen_t a1_i,
  input  xlen_t b1_i,
  input  logic  fwd_a1_i,
  input  logic  fwd_b1_i,
  output xlen_t res0_o,
  output xlen_t res1_o
);
  xlen_t a1, b1;
  assign a1 = fwd_a1_i ? res0_o : a1_i;
  assign b1 = fwd_b1_i ? res0_o : b1_i;

  alu i_alu0 (.op_i(op0_i), .a_i(a0_i), .b_i(b0_i), .res_o(res0_o));
  alu i_alu1 (.op_i(op1_i), .a_i(a1),   .b_i(b1),   .res_o(res1_o));
endmodule

// dual_issue_check: structural-hazard rules for pairing two instructions.
//
// The issue stage offers its two oldest instructions; the older one (slot 0)
// always issues when its operands are ready. This block decides whether the
// younger one (slot 1) may go with it in the same cycle, looking only at the
// execution resources. Rules that follow the published CVA6S+ description:
//   * there is one FPU, so two FPU operations never pair;
//   * an FP store cannot pair with an FPU operation, because together they
//     would need more FP register-file read ports than exist;
//   * any other FP operation pairs with a non-FP operation;
//   * ALU 1 shares its write-back port with the FPU, so it is unavailable in
//     a cycle in which the FPU writes back.
// Rules that are this design's choice: one load/store, one multiply/divide
// and one branch per cycle; a slot-1 ALU operation uses ALU 1 whenever slot 0
// occupies the ALU 0 / branch write-back port, and otherwise ALU 0; a slot-1
// branch cannot pair with a slot-0 ALU operation (same write-back port).
// Purely combinational.
module dual_issue_check
  import cva6sp_pkg::*;
(
  input  fu_t  fu0_i,
  input  fu_t  fu1_i,
  input  logic fpu_wb_i,     // FPU result on the shared port this cycle
  output logic pair_ok_o,    // slot 1 may issue with slot 0
  output logic alu1_used_o   // slot 1 is an ALU op and goes to ALU 1
);
  function automatic logic is_lsu(input fu_t f);
    return f inside {FU_LOAD, FU_STORE, FU_FSTORE};
  endfunction
  function automatic logic is_md(input fu_t f);
    return f inside {FU_MULT, FU_DIV};
  endfunction

  logic slot0_flu;
  assign slot0_flu   = fu0_i inside {FU_ALU, FU_BRANCH};
  assign alu1_used_o = (fu1_i == FU_ALU) && slot0_flu;

  always_comb begin
    pair_ok_o = 1'b1;
    if (fu0_i == FU_NONE || fu1_i == FU_NONE)                 pair_ok_o = 1'b0;
    if (fu0_i == FU_FPU && fu1_i == FU_FPU)                   pair_ok_o = 1'b0;
    if ((fu0_i == FU_FSTORE && fu1_i == FU_FPU) ||
        (fu0_i == FU_FPU && fu1_i == FU_FSTORE))              pair_ok_o = 1'b0;
    if (is_lsu(fu0_i) && is_lsu(fu1_i))                       pair_ok_o = 1'b0;
    if (is_md(fu0_i) && is_md(fu1_i))                         pair_ok_o = 1'b0;
    if (fu1_i == FU_BRANCH && slot0_flu)                      pair_ok_o = 1'b0;
    if (alu1_used_o && fpu_wb_i)                              pair_ok_o = 1'b0;
  end
endmodule

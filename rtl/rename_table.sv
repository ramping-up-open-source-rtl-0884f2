// rename_table: latest-writer tracking for the integer and FP register files.
//
// For every architectural register the table records whether an in-flight
// instruction will write it and, if so, the scoreboard tag of the youngest
// such instruction. Operand lookups therefore always find the newest
// producer, so a second write to a register that is still pending (a WAW
// hazard) does not have to wait: it simply takes over the entry. This is the
// register-renaming step of CVA6S+. The scoreboard keeps the speculative
// values; no physical register file beyond the architectural one exists.
//
// Interface: NR_ISSUE allocation ports (port 1 is younger than port 0 and
// wins when both name the same register), NR_COMMIT release ports that clear
// an entry only if it still holds the committing tag, NR_LOOKUP combinational
// lookups, and a flush that empties the table. x0 of the integer file is
// never renamed. Allocation in a cycle overrides a release of the same entry.
module rename_table
  import cva6sp_pkg::*;
#(
  parameter int unsigned NR_LOOKUP = 6
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    flush_i,
  input  logic    alloc_i     [NR_ISSUE],
  input  reg_t    alloc_rd_i  [NR_ISSUE],
  input  logic    alloc_fp_i  [NR_ISSUE],
  input  sb_tag_t alloc_tag_i [NR_ISSUE],
  input  logic    rel_i       [NR_COMMIT],
  input  reg_t    rel_rd_i    [NR_COMMIT],
  input  logic    rel_fp_i    [NR_COMMIT],
  input  sb_tag_t rel_tag_i   [NR_COMMIT],
  input  reg_t    look_reg_i  [NR_LOOKUP],
  input  logic    look_fp_i   [NR_LOOKUP],
  output logic    look_busy_o [NR_LOOKUP],
  output sb_tag_t look_tag_o  [NR_LOOKUP]
);
  // entry index: {fp, reg}
  logic    busy_q [2*NR_REGS];
  sb_tag_t tag_q  [2*NR_REGS];

  always_comb begin
    for (int l = 0; l < NR_LOOKUP; l++) begin
      look_busy_o[l] = busy_q[{look_fp_i[l], look_reg_i[l]}] && (look_fp_i[l] || look_reg_i[l] != '0);
      look_tag_o[l]  = tag_q[{look_fp_i[l], look_reg_i[l]}];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < 2*NR_REGS; i++) begin
        busy_q[i] <= 1'b0;
        tag_q[i]  <= '0;
      end
    end else if (flush_i) begin
      for (int i = 0; i < 2*NR_REGS; i++) busy_q[i] <= 1'b0;
    end else begin
      for (int c = 0; c < NR_COMMIT; c++)
        if (rel_i[c] && tag_q[{rel_fp_i[c], rel_rd_i[c]}] == rel_tag_i[c])
          busy_q[{rel_fp_i[c], rel_rd_i[c]}] <= 1'b0;
      for (int p = 0; p < NR_ISSUE; p++)
        if (alloc_i[p] && (alloc_fp_i[p] || alloc_rd_i[p] != '0)) begin
          busy_q[{alloc_fp_i[p], alloc_rd_i[p]}] <= 1'b1;
          tag_q [{alloc_fp_i[p], alloc_rd_i[p]}] <= alloc_tag_i[p];
        end
    end
  end
endmodule

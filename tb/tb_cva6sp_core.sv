// tb_cva6sp_core: end-to-end test of the CVA6S+ slice at its default sizes.
// cva6sp_prog_drv supplies a looping random program through a front-end
// model, executes loads, stores, multiplies, divides and FP operations with
// random latencies, and checks every retiring instruction against an
// in-order reference run. It also requires each issue mechanism - dual
// issue, ALU-to-ALU forwarding, WAW renaming, structural pairing block,
// ALU 1 / FPU write-back conflict, operand stall, full scoreboard and branch
// misprediction - to occur at least once. Three seeds are run in sequence.
module tb_cva6sp_core;
  import cva6sp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  int total_checks = 0, total_failures = 0;
  logic rst_n [3];
  logic done [3];
  int   chk [3], fail [3], cyc [3], ret [3];

  for (genvar g = 0; g < 3; g++) begin : g_run
    instr_t     instr [NR_ISSUE];
    logic       ivalid [NR_ISSUE], iack [NR_ISSUE];
    xlen_t      bp_pc [NR_ISSUE];
    logic       bp_taken [NR_ISSUE];
    logic       redirect;
    xlen_t      redirect_pc;
    bp_update_t bpu;
    logic       ev_valid [NR_EXT], ev_ready [NR_EXT], wb_valid [NR_EXT];
    fu_req_t    ereq [NR_EXT];
    wb_t        wb [NR_EXT];
    logic       cv [NR_COMMIT], cfp [NR_COMMIT], cwe [NR_COMMIT];
    xlen_t      cpc [NR_COMMIT], cdata [NR_COMMIT];
    reg_t       crd [NR_COMMIT];
    perf_t      perf;

    cva6sp_core dut (
      .clk_i(clk), .rst_ni(rst_n[g]), .instr_i(instr), .instr_valid_i(ivalid), .instr_ack_o(iack),
      .bp_pc_i(bp_pc), .bp_taken_o(bp_taken), .redirect_o(redirect), .redirect_pc_o(redirect_pc),
      .bp_update_o(bpu), .ext_valid_o(ev_valid), .ext_ready_i(ev_ready), .ext_req_o(ereq),
      .ext_wb_valid_i(wb_valid), .ext_wb_i(wb), .commit_valid_o(cv), .commit_pc_o(cpc),
      .commit_rd_o(crd), .commit_fp_o(cfp), .commit_we_o(cwe), .commit_data_o(cdata), .perf_o(perf));

    cva6sp_prog_drv #(.SEED(g * 7 + 3), .LOOPS(20 + 10 * g), .BODY(24)) drv (
      .clk_i(clk), .rst_ni(rst_n[g]), .instr_o(instr), .instr_valid_o(ivalid), .instr_ack_i(iack),
      .bp_pc_o(bp_pc), .bp_taken_i(bp_taken), .redirect_i(redirect), .redirect_pc_i(redirect_pc),
      .ext_valid_i(ev_valid), .ext_ready_o(ev_ready), .ext_req_i(ereq), .ext_wb_valid_o(wb_valid),
      .ext_wb_o(wb), .commit_valid_i(cv), .commit_pc_i(cpc), .commit_rd_i(crd), .commit_fp_i(cfp),
      .commit_we_i(cwe), .commit_data_i(cdata), .perf_i(perf), .checks_o(chk[g]),
      .failures_o(fail[g]), .done_o(done[g]), .cycles_o(cyc[g]), .retired_o(ret[g]));
  end

  initial begin
    repeat (30000) @(posedge clk);
    $display("watchdog expired");
    for (int g = 0; g < 3; g++) begin total_checks += chk[g]; total_failures += fail[g]; end
    total_failures++;
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < 3; g++) rst_n[g] = 0;
    repeat (4) @(posedge clk);
    for (int g = 0; g < 3; g++) rst_n[g] = 1;
    wait (done[0] && done[1] && done[2]);
    repeat (2) @(posedge clk);
    for (int g = 0; g < 3; g++) begin
      $display("run %0d: %0d instructions, %0d cycles, IPC x1000 = %0d", g, ret[g], cyc[g], 1000 * ret[g] / cyc[g]);
      total_checks += chk[g]; total_failures += fail[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end
endmodule

// tb_cva6sp_kernels: three benchmark-style kernels on the CVA6S+ slice at
// its default sizes. The first two use warm-cache load latencies (1 to 2
// cycles), the third cold-cache ones (up to 20 cycles).
//   * run 0, integer matrix multiply (4x4, 64-bit): loads, multiplies and
//     accumulates in a three-deep loop nest; the integer pointer and counter
//     updates pair with the loads and multiplies.
//   * run 1, FP-heavy loop: a chain of FPU operations interleaved with
//     integer bookkeeping, the case in which ALU 1 loses its write-back port
//     to the FPU.
//   * run 2, sequential copy of 32 words with long load latencies: the
//     in-order slice waits on every load, so IPC falls well below 1.
// Every retiring instruction is checked against a reference execution of the
// same program. The integer kernel must show dual issue, operand stalls and
// loop-exit mispredictions; the FP kernel must show dual issue, pairing
// blocks and ALU 1 / FPU write-back conflicts; the copy must show dual
// issue, operand stalls and its loop-exit misprediction. IPC is printed.
module tb_cva6sp_kernels;
  import cva6sp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int total_checks = 0, total_failures = 0;
  logic rst_n [3];
  logic done [3];
  int   chk [3], fail [3], cyc [3], ret [3];
  string kname [3] = '{"integer matrix multiply", "FP-heavy loop", "sequential copy"};
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
    cva6sp_prog_drv #(.SEED(5 + g), .LOOPS(40), .KERNEL(g + 1), .LD_LAT_MAX(g == 2 ? 20 : 2),
                      .REQ_EV(g == 1 ? 8'b0001_1001 : 8'b1010_0001)) drv (
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
      $display("%s: %0d instructions, %0d cycles, IPC x1000 = %0d", kname[g], ret[g], cyc[g], 1000 * ret[g] / cyc[g]);
      total_checks += chk[g]; total_failures += fail[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end
endmodule

// ramp_top: the RTL given for the two cores of the study, side by side.
//
// Left half - CVA6S+, the dual-issue in-order core: cva6sp_core (issue,
// renaming, two ALUs with forwarding, branch unit, scoreboard, commit and the
// two-level predictor) together with aa_index_pred, the index-bit predictor
// of its VIPT L1 data cache. The front end with instruction buffer and
// decoders, the LSU, multiplier/divider, FPU and the L1 caches are not part
// of this RTL; their connections are ports (cva6_*, l1_*).
//
// Right half - the integration shell of the out-of-order C910: the RISC-V
// debug controller and the burst converter between the core's L1 AXI port
// and the SoC. The C910 pipeline itself is not part of this RTL; its side of
// both blocks is brought out as ports (c910_*), the SoC side as soc_*.
//
// The two halves share only clock and reset; in the study each core is
// placed alone in the same SoC. This wrapper adds no logic of its own.
//
// Lint note: rst_ni reaches assertions' disable conditions inside the
// instances, which lint reports as a mixed synchronous/asynchronous reset.
module ramp_top
  import cva6sp_pkg::*;
#(
  parameter int unsigned BHT_ENTRIES = 128,
  parameter int unsigned BHT_HIST    = 3,
  parameter int unsigned L1_BYTES    = 65536,
  parameter int unsigned L1_WAYS     = 2,
  parameter int unsigned AXI_AW      = 64,
  parameter int unsigned AXI_DW      = 64,
  parameter int unsigned AXI_IW      = 4,
  parameter int unsigned AXI_BEATS   = 8,
  parameter logic [63:0] HALT_ADDR   = 64'h800,
  localparam int unsigned L1_IDX_W   = $clog2(L1_BYTES / L1_WAYS) - 6
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // ---------------- CVA6S+ ----------------
  input  instr_t          cva6_instr_i       [NR_ISSUE],
  input  logic            cva6_instr_valid_i [NR_ISSUE],
  output logic            cva6_instr_ack_o   [NR_ISSUE],
  input  xlen_t           cva6_bp_pc_i       [NR_ISSUE],
  output logic            cva6_bp_taken_o    [NR_ISSUE],
  output logic            cva6_redirect_o,
  output xlen_t           cva6_redirect_pc_o,
  output bp_update_t      cva6_bp_update_o,
  output logic            cva6_ext_valid_o   [NR_EXT],
  input  logic            cva6_ext_ready_i   [NR_EXT],
  output fu_req_t         cva6_ext_req_o     [NR_EXT],
  input  logic            cva6_ext_wb_valid_i[NR_EXT],
  input  wb_t             cva6_ext_wb_i      [NR_EXT],
  output logic            cva6_commit_valid_o[NR_COMMIT],
  output xlen_t           cva6_commit_pc_o   [NR_COMMIT],
  output reg_t            cva6_commit_rd_o   [NR_COMMIT],
  output logic            cva6_commit_fp_o   [NR_COMMIT],
  output logic            cva6_commit_we_o   [NR_COMMIT],
  output xlen_t           cva6_commit_data_o [NR_COMMIT],
  output perf_t           cva6_perf_o,
  // L1 data cache index prediction
  input  logic            l1_req_valid_i,
  input  logic [63:0]     l1_req_vaddr_i,
  output logic [L1_IDX_W-1:0] l1_req_index_o,
  input  logic            l1_tr_valid_i,
  input  logic [55:0]     l1_tr_paddr_i,
  output logic            l1_abort_o,
  output logic            l1_proceed_o,
  output logic [L1_IDX_W-1:0] l1_retry_index_o,
  output logic            l1_busy_o,
  // ---------------- C910 ----------------
  input  logic            c910_debug_req_i,
  input  logic            c910_dec_valid_i,
  input  logic [63:0]     c910_dec_pc_i,
  input  logic            c910_dec_ebreak_i,
  input  logic [1:0]      c910_priv_i,
  input  logic            c910_retire_i,
  input  logic            c910_dret_i,
  input  logic            c910_wfi_i,
  input  logic            c910_irq_pending_i,
  output logic            c910_sleep_o,
  input  logic            c910_csr_access_i,
  input  logic            c910_csr_we_i,
  input  logic [11:0]     c910_csr_addr_i,
  input  logic [63:0]     c910_csr_wdata_i,
  output logic [63:0]     c910_csr_rdata_o,
  output logic            c910_csr_hit_o,
  output logic            c910_csr_illegal_o,
  output logic            c910_debug_mode_o,
  output logic            c910_dec_kill_o,
  output logic            c910_flush_o,
  output logic            c910_redirect_o,
  output logic [63:0]     c910_redirect_pc_o,
  output logic            c910_priv_restore_o,
  output logic [1:0]      c910_priv_restore_val_o,
  // C910 L1 AXI port (core side)
  input  logic              c910_ar_valid_i,
  output logic              c910_ar_ready_o,
  input  logic [AXI_AW-1:0] c910_ar_addr_i,
  input  logic [7:0]        c910_ar_len_i,
  input  logic [2:0]        c910_ar_size_i,
  input  logic [1:0]        c910_ar_burst_i,
  input  logic [AXI_IW-1:0] c910_ar_id_i,
  output logic              c910_r_valid_o,
  input  logic              c910_r_ready_i,
  output logic [AXI_DW-1:0] c910_r_data_o,
  output logic [1:0]        c910_r_resp_o,
  output logic              c910_r_last_o,
  output logic [AXI_IW-1:0] c910_r_id_o,
  input  logic              c910_aw_valid_i,
  output logic              c910_aw_ready_o,
  input  logic [AXI_AW-1:0] c910_aw_addr_i,
  input  logic [7:0]        c910_aw_len_i,
  input  logic [2:0]        c910_aw_size_i,
  input  logic [1:0]        c910_aw_burst_i,
  input  logic [AXI_IW-1:0] c910_aw_id_i,
  input  logic              c910_w_valid_i,
  output logic              c910_w_ready_o,
  input  logic [AXI_DW-1:0] c910_w_data_i,
  input  logic [AXI_DW/8-1:0] c910_w_strb_i,
  input  logic              c910_w_last_i,
  output logic              c910_b_valid_o,
  input  logic              c910_b_ready_i,
  output logic [1:0]        c910_b_resp_o,
  output logic [AXI_IW-1:0] c910_b_id_o,
  // SoC AXI port
  output logic              soc_ar_valid_o,
  input  logic              soc_ar_ready_i,
  output logic [AXI_AW-1:0] soc_ar_addr_o,
  output logic [7:0]        soc_ar_len_o,
  output logic [2:0]        soc_ar_size_o,
  output logic [1:0]        soc_ar_burst_o,
  output logic [AXI_IW-1:0] soc_ar_id_o,
  input  logic              soc_r_valid_i,
  output logic              soc_r_ready_o,
  input  logic [AXI_DW-1:0] soc_r_data_i,
  input  logic [1:0]        soc_r_resp_i,
  input  logic              soc_r_last_i,
  input  logic [AXI_IW-1:0] soc_r_id_i,
  output logic              soc_aw_valid_o,
  input  logic              soc_aw_ready_i,
  output logic [AXI_AW-1:0] soc_aw_addr_o,
  output logic [7:0]        soc_aw_len_o,
  output logic [2:0]        soc_aw_size_o,
  output logic [1:0]        soc_aw_burst_o,
  output logic [AXI_IW-1:0] soc_aw_id_o,
  output logic              soc_w_valid_o,
  input  logic              soc_w_ready_i,
  output logic [AXI_DW-1:0] soc_w_data_o,
  output logic [AXI_DW/8-1:0] soc_w_strb_o,
  output logic              soc_w_last_o,
  input  logic              soc_b_valid_i,
  output logic              soc_b_ready_o,
  input  logic [1:0]        soc_b_resp_i,
  input  logic [AXI_IW-1:0] soc_b_id_i
);
  cva6sp_core #(.BHT_ENTRIES(BHT_ENTRIES), .BHT_HIST(BHT_HIST)) i_cva6sp (
    .clk_i, .rst_ni,
    .instr_i(cva6_instr_i), .instr_valid_i(cva6_instr_valid_i), .instr_ack_o(cva6_instr_ack_o),
    .bp_pc_i(cva6_bp_pc_i), .bp_taken_o(cva6_bp_taken_o),
    .redirect_o(cva6_redirect_o), .redirect_pc_o(cva6_redirect_pc_o), .bp_update_o(cva6_bp_update_o),
    .ext_valid_o(cva6_ext_valid_o), .ext_ready_i(cva6_ext_ready_i), .ext_req_o(cva6_ext_req_o),
    .ext_wb_valid_i(cva6_ext_wb_valid_i), .ext_wb_i(cva6_ext_wb_i),
    .commit_valid_o(cva6_commit_valid_o), .commit_pc_o(cva6_commit_pc_o), .commit_rd_o(cva6_commit_rd_o),
    .commit_fp_o(cva6_commit_fp_o), .commit_we_o(cva6_commit_we_o), .commit_data_o(cva6_commit_data_o),
    .perf_o(cva6_perf_o)
  );

  aa_index_pred #(.VLEN(64), .PLEN(56), .CACHE_BYTES(L1_BYTES), .WAYS(L1_WAYS), .LINE_BYTES(64)) i_aa (
    .clk_i, .rst_ni,
    .req_valid_i(l1_req_valid_i), .req_vaddr_i(l1_req_vaddr_i), .req_index_o(l1_req_index_o),
    .tr_valid_i(l1_tr_valid_i), .tr_paddr_i(l1_tr_paddr_i),
    .abort_o(l1_abort_o), .proceed_o(l1_proceed_o), .retry_index_o(l1_retry_index_o), .busy_o(l1_busy_o)
  );

  c910_debug_ctrl #(.HALT_ADDR(HALT_ADDR)) i_dbg (
    .clk_i, .rst_ni,
    .debug_req_i(c910_debug_req_i), .dec_valid_i(c910_dec_valid_i), .dec_pc_i(c910_dec_pc_i),
    .dec_ebreak_i(c910_dec_ebreak_i), .priv_i(c910_priv_i), .retire_i(c910_retire_i), .dret_i(c910_dret_i),
    .wfi_i(c910_wfi_i), .irq_pending_i(c910_irq_pending_i), .sleep_o(c910_sleep_o),
    .csr_access_i(c910_csr_access_i), .csr_we_i(c910_csr_we_i), .csr_addr_i(c910_csr_addr_i),
    .csr_wdata_i(c910_csr_wdata_i), .csr_rdata_o(c910_csr_rdata_o), .csr_hit_o(c910_csr_hit_o),
    .csr_illegal_o(c910_csr_illegal_o), .debug_mode_o(c910_debug_mode_o), .dec_kill_o(c910_dec_kill_o),
    .flush_o(c910_flush_o), .redirect_o(c910_redirect_o), .redirect_pc_o(c910_redirect_pc_o),
    .priv_restore_o(c910_priv_restore_o), .priv_restore_val_o(c910_priv_restore_val_o)
  );

  axi_decr2incr #(.AW(AXI_AW), .DW(AXI_DW), .IW(AXI_IW), .MAX_BEATS(AXI_BEATS)) i_axi_conv (
    .clk_i, .rst_ni,
    .s_ar_valid_i(c910_ar_valid_i), .s_ar_ready_o(c910_ar_ready_o), .s_ar_addr_i(c910_ar_addr_i),
    .s_ar_len_i(c910_ar_len_i), .s_ar_size_i(c910_ar_size_i), .s_ar_burst_i(c910_ar_burst_i),
    .s_ar_id_i(c910_ar_id_i),
    .s_r_valid_o(c910_r_valid_o), .s_r_ready_i(c910_r_ready_i), .s_r_data_o(c910_r_data_o),
    .s_r_resp_o(c910_r_resp_o), .s_r_last_o(c910_r_last_o), .s_r_id_o(c910_r_id_o),
    .s_aw_valid_i(c910_aw_valid_i), .s_aw_ready_o(c910_aw_ready_o), .s_aw_addr_i(c910_aw_addr_i),
    .s_aw_len_i(c910_aw_len_i), .s_aw_size_i(c910_aw_size_i), .s_aw_burst_i(c910_aw_burst_i),
    .s_aw_id_i(c910_aw_id_i),
    .s_w_valid_i(c910_w_valid_i), .s_w_ready_o(c910_w_ready_o), .s_w_data_i(c910_w_data_i),
    .s_w_strb_i(c910_w_strb_i), .s_w_last_i(c910_w_last_i),
    .s_b_valid_o(c910_b_valid_o), .s_b_ready_i(c910_b_ready_i), .s_b_resp_o(c910_b_resp_o),
    .s_b_id_o(c910_b_id_o),
    .m_ar_valid_o(soc_ar_valid_o), .m_ar_ready_i(soc_ar_ready_i), .m_ar_addr_o(soc_ar_addr_o),
    .m_ar_len_o(soc_ar_len_o), .m_ar_size_o(soc_ar_size_o), .m_ar_burst_o(soc_ar_burst_o),
    .m_ar_id_o(soc_ar_id_o),
    .m_r_valid_i(soc_r_valid_i), .m_r_ready_o(soc_r_ready_o), .m_r_data_i(soc_r_data_i),
    .m_r_resp_i(soc_r_resp_i), .m_r_last_i(soc_r_last_i), .m_r_id_i(soc_r_id_i),
    .m_aw_valid_o(soc_aw_valid_o), .m_aw_ready_i(soc_aw_ready_i), .m_aw_addr_o(soc_aw_addr_o),
    .m_aw_len_o(soc_aw_len_o), .m_aw_size_o(soc_aw_size_o), .m_aw_burst_o(soc_aw_burst_o),
    .m_aw_id_o(soc_aw_id_o),
    .m_w_valid_o(soc_w_valid_o), .m_w_ready_i(soc_w_ready_i), .m_w_data_o(soc_w_data_o),
    .m_w_strb_o(soc_w_strb_o), .m_w_last_o(soc_w_last_o),
    .m_b_valid_i(soc_b_valid_i), .m_b_ready_o(soc_b_ready_o), .m_b_resp_i(soc_b_resp_i),
    .m_b_id_i(soc_b_id_i)
  );
endmodule

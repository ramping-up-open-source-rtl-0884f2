// aa_index_pred: index-bit prediction for a virtually indexed, physically
// tagged L1 cache whose ways are larger than a page.
//
// With a 64 KB, 2-way L1 each way spans 32 KB, so the set index reaches up
// to address bit 14 while only bits 11:0 (the 4 KB page offset) are known
// before translation. The 3 bits 14:12 are predicted: the unit reuses the
// matching physical-address bits of the last completed translation. When the
// translation of the current request arrives, the predicted bits are
// compared with the translated ones; on a mismatch the request is aborted
// and must be retried with retry_index_o, otherwise it proceeds. Either way
// the translated bits become the prediction for later requests. This is the
// antialiasing scheme of the CVA6S+ L1 cache as published; the one
// outstanding request, the 64-byte line and the reset value 0 of the
// prediction are this design's choices.
//
// Timing: req_index_o is combinational from req_vaddr_i. The translation
// (tr_valid_i) may arrive one or more cycles after req_valid_i; abort_o,
// proceed_o and retry_index_o are combinational in that cycle.
//
// Lint notes: only address bits 11:6 of req_vaddr_i and 14:12 of
// tr_paddr_i are needed, so the other bits are unused by design, and the
// low index bits are a direct copy of the virtual address. rst_ni also
// appears in the assertion's disable condition, which lint reports as a
// reset used both synchronously and asynchronously; the flops use it only
// asynchronously.
module aa_index_pred #(
  parameter int unsigned VLEN        = 64,
  parameter int unsigned PLEN        = 56,
  parameter int unsigned CACHE_BYTES = 65536,
  parameter int unsigned WAYS        = 2,
  parameter int unsigned LINE_BYTES  = 64,
  parameter int unsigned PAGE_BITS   = 12,
  localparam int unsigned WAY_W      = $clog2(CACHE_BYTES / WAYS),  // 15
  localparam int unsigned IDX_TOP    = WAY_W - 1,                   // 14
  localparam int unsigned LINE_W     = $clog2(LINE_BYTES),          // 6
  localparam int unsigned NPRED      = WAY_W - PAGE_BITS            // 3
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     req_valid_i,
  input  logic [VLEN-1:0]          req_vaddr_i,
  output logic [IDX_TOP-LINE_W:0]  req_index_o,
  input  logic                     tr_valid_i,
  input  logic [PLEN-1:0]          tr_paddr_i,
  output logic                     abort_o,
  output logic                     proceed_o,
  output logic [IDX_TOP-LINE_W:0]  retry_index_o,
  output logic                     busy_o
);
  logic [NPRED-1:0]            pred_q, used_q;
  logic [PAGE_BITS-1:LINE_W]   off_q;
  logic                        pend_q;
  logic [NPRED-1:0]            tr_bits;

  assign tr_bits       = tr_paddr_i[IDX_TOP:PAGE_BITS];
  assign req_index_o   = {pred_q, req_vaddr_i[PAGE_BITS-1:LINE_W]};
  assign abort_o       = tr_valid_i && pend_q && (tr_bits != used_q);
  assign proceed_o     = tr_valid_i && pend_q && (tr_bits == used_q);
  assign retry_index_o = {tr_bits, off_q};
  assign busy_o        = pend_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pred_q <= '0;
      used_q <= '0;
      off_q  <= '0;
      pend_q <= 1'b0;
    end else begin
      if (tr_valid_i && pend_q) begin
        pred_q <= tr_bits;
        pend_q <= 1'b0;
      end
      if (req_valid_i && !pend_q) begin
        used_q <= pred_q;
        off_q  <= req_vaddr_i[PAGE_BITS-1:LINE_W];
        pend_q <= 1'b1;
      end
    end
  end

  // one request at a time
  assert property (@(posedge clk_i) disable iff (!rst_ni) pend_q |-> !req_valid_i)
    else $error("request issued while a translation is pending");
endmodule

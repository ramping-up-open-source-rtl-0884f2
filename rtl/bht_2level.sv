// bht_2level: two-level branch direction predictor of the CVA6S+ front end.
//
// Level one is a table of ENTRIES per-branch history registers, each
// HIST_BITS wide, selected by the low bits of the branch pc: every entry
// keeps the private taken/not-taken history of the branches that map to it.
// Level two is a pattern table of 2-bit saturating counters indexed by that
// history; the counter's upper bit is the prediction. 128 entries with 3-bit
// histories follow the published CVA6S+ description (128 x 3 bit = 48 B, the
// size printed for the BHT in the architecture figure). That the pattern
// table is one table of 2^HIST_BITS counters shared by all entries (a PAg
// scheme) is this design's choice; the description does not say.
//
// Interface: NR_PORTS combinational lookups (one per fetched instruction
// slot) and one update port, written on the clock edge, from the branch
// unit. Index bits start at pc[1] so that compressed instructions map apart.
// Reset clears the histories and sets all counters to weakly not-taken.
//
// Lint note: the index function uses only pc bits [7:1]; the rest of the
// program counter is unused by design.
module bht_2level #(
  parameter int unsigned ENTRIES   = 128,
  parameter int unsigned HIST_BITS = 3,
  parameter int unsigned NR_PORTS  = 2,
  parameter int unsigned VLEN      = 64
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [VLEN-1:0]      pc_i      [NR_PORTS],
  output logic                 taken_o   [NR_PORTS],
  input  logic                 upd_valid_i,
  input  logic [VLEN-1:0]      upd_pc_i,
  input  logic                 upd_taken_i
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);
  localparam int unsigned PHT   = 1 << HIST_BITS;

  logic [HIST_BITS-1:0] hist_q [ENTRIES];
  logic [1:0]           ctr_q  [PHT];

  function automatic logic [IDX_W-1:0] idx(input logic [VLEN-1:0] pc);
    return pc[IDX_W:1];
  endfunction

  always_comb begin
    for (int p = 0; p < NR_PORTS; p++)
      taken_o[p] = ctr_q[hist_q[idx(pc_i[p])]][1];
  end

  logic [HIST_BITS-1:0] upd_hist;
  assign upd_hist = hist_q[idx(upd_pc_i)];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < ENTRIES; i++) hist_q[i] <= '0;
      for (int i = 0; i < PHT; i++)     ctr_q[i]  <= 2'b01;
    end else if (upd_valid_i) begin
      if (upd_taken_i && ctr_q[upd_hist] != 2'b11)       ctr_q[upd_hist] <= ctr_q[upd_hist] + 2'd1;
      else if (!upd_taken_i && ctr_q[upd_hist] != 2'b00) ctr_q[upd_hist] <= ctr_q[upd_hist] - 2'd1;
      if (HIST_BITS > 1)
        hist_q[idx(upd_pc_i)] <= {upd_hist[HIST_BITS-2:0], upd_taken_i};
      else
        hist_q[idx(upd_pc_i)] <= HIST_BITS'(upd_taken_i);
    end
  end
endmodule

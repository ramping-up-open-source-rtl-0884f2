// axi_decr2incr: turns the C910's decrement-mode AXI bursts into standard
// incrementing (INCR) bursts for the SoC's AXI interconnect.
//
// A decrement burst of N = len+1 beats starting at address A touches
// A, A - 2^size, ..., A - len*2^size. The same bytes are covered by an INCR
// burst starting at the lowest address A - len*2^size, whose beats come in
// the opposite order. The converter therefore rewrites the address and the
// burst type, and reverses the beat order: read data coming back from the
// SoC and write data coming from the core are each collected in a buffer of
// MAX_BEATS and replayed in reverse. Non-decrement bursts take the same
// store-and-forward path without reversal, so every burst is passed on
// whole and in order. One read and one write are in flight at a time.
//
// That decrement bursts are converted to INCR follows the published C910
// integration; the encoding of decrement mode (AxBURST = 2'b11, reserved in
// AXI4), the store-and-forward structure, the single outstanding burst per
// direction and the 8-beat buffer (one 64-byte cache line on the 64-bit bus)
// are this design's choices. The address width is assumed; the 64-bit data
// width is the SoC's published bus width.
//
// Interface: s_* is the core side (subordinate port), m_* the SoC side
// (manager port); valid/ready handshakes as in AXI4. Bursts longer than
// MAX_BEATS are not supported.
//
// Lint notes: the response ids from the SoC side are not used because the
// converter has one burst per direction in flight and returns the stored
// request id; only the low bits of the burst length reach the beat buffer
// index. rst_ni also appears in the assertions' disable condition, which
// lint reports as a mixed synchronous/asynchronous use.
module axi_decr2incr #(
  parameter int unsigned AW        = 64,
  parameter int unsigned DW        = 64,
  parameter int unsigned IW        = 4,
  parameter int unsigned MAX_BEATS = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // core side: read
  input  logic            s_ar_valid_i,
  output logic            s_ar_ready_o,
  input  logic [AW-1:0]   s_ar_addr_i,
  input  logic [7:0]      s_ar_len_i,
  input  logic [2:0]      s_ar_size_i,
  input  logic [1:0]      s_ar_burst_i,
  input  logic [IW-1:0]   s_ar_id_i,
  output logic            s_r_valid_o,
  input  logic            s_r_ready_i,
  output logic [DW-1:0]   s_r_data_o,
  output logic [1:0]      s_r_resp_o,
  output logic            s_r_last_o,
  output logic [IW-1:0]   s_r_id_o,
  // core side: write
  input  logic            s_aw_valid_i,
  output logic            s_aw_ready_o,
  input  logic [AW-1:0]   s_aw_addr_i,
  input  logic [7:0]      s_aw_len_i,
  input  logic [2:0]      s_aw_size_i,
  input  logic [1:0]      s_aw_burst_i,
  input  logic [IW-1:0]   s_aw_id_i,
  input  logic            s_w_valid_i,
  output logic            s_w_ready_o,
  input  logic [DW-1:0]   s_w_data_i,
  input  logic [DW/8-1:0] s_w_strb_i,
  input  logic            s_w_last_i,
  output logic            s_b_valid_o,
  input  logic            s_b_ready_i,
  output logic [1:0]      s_b_resp_o,
  output logic [IW-1:0]   s_b_id_o,
  // SoC side: read
  output logic            m_ar_valid_o,
  input  logic            m_ar_ready_i,
  output logic [AW-1:0]   m_ar_addr_o,
  output logic [7:0]      m_ar_len_o,
  output logic [2:0]      m_ar_size_o,
  output logic [1:0]      m_ar_burst_o,
  output logic [IW-1:0]   m_ar_id_o,
  input  logic            m_r_valid_i,
  output logic            m_r_ready_o,
  input  logic [DW-1:0]   m_r_data_i,
  input  logic [1:0]      m_r_resp_i,
  input  logic            m_r_last_i,
  input  logic [IW-1:0]   m_r_id_i,
  // SoC side: write
  output logic            m_aw_valid_o,
  input  logic            m_aw_ready_i,
  output logic [AW-1:0]   m_aw_addr_o,
  output logic [7:0]      m_aw_len_o,
  output logic [2:0]      m_aw_size_o,
  output logic [1:0]      m_aw_burst_o,
  output logic [IW-1:0]   m_aw_id_o,
  output logic            m_w_valid_o,
  input  logic            m_w_ready_i,
  output logic [DW-1:0]   m_w_data_o,
  output logic [DW/8-1:0] m_w_strb_o,
  output logic            m_w_last_o,
  input  logic            m_b_valid_i,
  output logic            m_b_ready_o,
  input  logic [1:0]      m_b_resp_i,
  input  logic [IW-1:0]   m_b_id_i
);
  localparam logic [1:0] BURST_INCR = 2'b01;
  localparam logic [1:0] BURST_DECR = 2'b11;
  localparam int unsigned BW = $clog2(MAX_BEATS);

  // lowest address of a decrement burst
  function automatic logic [AW-1:0] low_addr(input logic [AW-1:0] a, input logic [7:0] len,
                                             input logic [2:0] size);
    return a - (AW'(len) << size);
  endfunction

  // beat k of the replay comes from buffer slot k, or len-k when reversing
  function automatic logic [BW-1:0] slot(input logic [BW-1:0] k, input logic [7:0] len, input logic rev);
    return rev ? BW'(len) - k : k;
  endfunction

  // ---------------------------------------------------------------- read
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_COLLECT, R_REPLAY} rstate_e;
  rstate_e         rst_q;
  logic [DW-1:0]   rbuf_q  [MAX_BEATS];
  logic [1:0]      rresp_q [MAX_BEATS];
  logic [AW-1:0]   raddr_q;
  logic [7:0]      rlen_q;
  logic [2:0]      rsize_q;
  logic [IW-1:0]   rid_q;
  logic            rrev_q;
  logic [BW-1:0]   rcnt_q;

  assign s_ar_ready_o = (rst_q == R_IDLE);
  assign m_ar_valid_o = (rst_q == R_ADDR);
  assign m_ar_addr_o  = raddr_q;
  assign m_ar_len_o   = rlen_q;
  assign m_ar_size_o  = rsize_q;
  assign m_ar_burst_o = BURST_INCR;
  assign m_ar_id_o    = rid_q;
  assign m_r_ready_o  = (rst_q == R_COLLECT);
  assign s_r_valid_o  = (rst_q == R_REPLAY);
  assign s_r_data_o   = rbuf_q[slot(rcnt_q, rlen_q, rrev_q)];
  assign s_r_resp_o   = rresp_q[slot(rcnt_q, rlen_q, rrev_q)];
  assign s_r_last_o   = (8'(rcnt_q) == rlen_q);
  assign s_r_id_o     = rid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rst_q   <= R_IDLE;
      raddr_q <= '0;
      rlen_q  <= '0;
      rsize_q <= '0;
      rid_q   <= '0;
      rrev_q  <= 1'b0;
      rcnt_q  <= '0;
      for (int i = 0; i < MAX_BEATS; i++) begin
        rbuf_q[i]  <= '0;
        rresp_q[i] <= '0;
      end
    end else begin
      unique case (rst_q)
        R_IDLE: if (s_ar_valid_i) begin
          rrev_q  <= (s_ar_burst_i == BURST_DECR);
          raddr_q <= (s_ar_burst_i == BURST_DECR) ? low_addr(s_ar_addr_i, s_ar_len_i, s_ar_size_i)
                                                 : s_ar_addr_i;
          rlen_q  <= s_ar_len_i;
          rsize_q <= s_ar_size_i;
          rid_q   <= s_ar_id_i;
          rcnt_q  <= '0;
          rst_q   <= R_ADDR;
        end
        R_ADDR: if (m_ar_ready_i) rst_q <= R_COLLECT;
        R_COLLECT: if (m_r_valid_i) begin
          rbuf_q[rcnt_q]  <= m_r_data_i;
          rresp_q[rcnt_q] <= m_r_resp_i;
          rcnt_q          <= rcnt_q + 1'b1;
          if (m_r_last_i) begin
            rcnt_q <= '0;
            rst_q  <= R_REPLAY;
          end
        end
        R_REPLAY: if (s_r_ready_i) begin
          rcnt_q <= rcnt_q + 1'b1;
          if (s_r_last_o) rst_q <= R_IDLE;
        end
        default: rst_q <= R_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- write
  typedef enum logic [2:0] {W_IDLE, W_COLLECT, W_ADDR, W_DATA, W_RESP} wstate_e;
  wstate_e         wst_q;
  logic [DW-1:0]   wbuf_q  [MAX_BEATS];
  logic [DW/8-1:0] wstrb_q [MAX_BEATS];
  logic [AW-1:0]   waddr_q;
  logic [7:0]      wlen_q;
  logic [2:0]      wsize_q;
  logic [IW-1:0]   wid_q;
  logic            wrev_q;
  logic [BW-1:0]   wcnt_q;
  logic [1:0]      bresp_q;
  logic            bresp_valid_q;

  assign s_aw_ready_o = (wst_q == W_IDLE);
  assign s_w_ready_o  = (wst_q == W_COLLECT);
  assign m_aw_valid_o = (wst_q == W_ADDR);
  assign m_aw_addr_o  = waddr_q;
  assign m_aw_len_o   = wlen_q;
  assign m_aw_size_o  = wsize_q;
  assign m_aw_burst_o = BURST_INCR;
  assign m_aw_id_o    = wid_q;
  assign m_w_valid_o  = (wst_q == W_DATA);
  assign m_w_data_o   = wbuf_q[slot(wcnt_q, wlen_q, wrev_q)];
  assign m_w_strb_o   = wstrb_q[slot(wcnt_q, wlen_q, wrev_q)];
  assign m_w_last_o   = (8'(wcnt_q) == wlen_q);
  assign m_b_ready_o  = (wst_q == W_RESP);
  assign s_b_valid_o  = bresp_valid_q;
  assign s_b_resp_o   = bresp_q;
  assign s_b_id_o     = wid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wst_q         <= W_IDLE;
      waddr_q       <= '0;
      wlen_q        <= '0;
      wsize_q       <= '0;
      wid_q         <= '0;
      wrev_q        <= 1'b0;
      wcnt_q        <= '0;
      bresp_q       <= '0;
      bresp_valid_q <= 1'b0;
      for (int i = 0; i < MAX_BEATS; i++) begin
        wbuf_q[i]  <= '0;
        wstrb_q[i] <= '0;
      end
    end else begin
      if (s_b_valid_o && s_b_ready_i) bresp_valid_q <= 1'b0;
      unique case (wst_q)
        W_IDLE: if (s_aw_valid_i && !bresp_valid_q) begin
          wrev_q  <= (s_aw_burst_i == BURST_DECR);
          waddr_q <= (s_aw_burst_i == BURST_DECR) ? low_addr(s_aw_addr_i, s_aw_len_i, s_aw_size_i)
                                                 : s_aw_addr_i;
          wlen_q  <= s_aw_len_i;
          wsize_q <= s_aw_size_i;
          wid_q   <= s_aw_id_i;
          wcnt_q  <= '0;
          wst_q   <= W_COLLECT;
        end
        W_COLLECT: if (s_w_valid_i) begin
          wbuf_q[wcnt_q]  <= s_w_data_i;
          wstrb_q[wcnt_q] <= s_w_strb_i;
          wcnt_q          <= wcnt_q + 1'b1;
          if (s_w_last_i) begin
            wcnt_q <= '0;
            wst_q  <= W_ADDR;
          end
        end
        W_ADDR: if (m_aw_ready_i) wst_q <= W_DATA;
        W_DATA: if (m_w_ready_i) begin
          wcnt_q <= wcnt_q + 1'b1;
          if (m_w_last_o) wst_q <= W_RESP;
        end
        W_RESP: if (m_b_valid_i) begin
          bresp_q       <= m_b_resp_i;
          bresp_valid_q <= 1'b1;
          wst_q         <= W_IDLE;
        end
        default: wst_q <= W_IDLE;
      endcase
    end
  end

  // bursts must fit the buffer
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (s_ar_valid_i && s_ar_ready_o) |-> (s_ar_len_i < 8'(MAX_BEATS)))
    else $error("read burst longer than the buffer");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (s_aw_valid_i && s_aw_ready_o) |-> (s_aw_len_i < 8'(MAX_BEATS)))
    else $error("write burst longer than the buffer");
endmodule

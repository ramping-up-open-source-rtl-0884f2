// tb_axi_decr2incr: self-checking test of the burst converter.
// The SoC side is a memory model that accepts only INCR bursts (any other
// burst type counts a failure) and answers with random delays. The core side
// issues random reads and writes of 1 to 8 beats, in decrement and in
// increment mode. For a decrement burst at address A, beat i must read or
// write the word at A - 8*i; for an increment burst, A + 8*i. Write data are
// checked in the memory model afterwards, read data beat by beat, and last
// flags and response ids on both channels.
module tb_axi_decr2incr;
  localparam int unsigned AW = 64, DW = 64, IW = 4;
  logic clk = 0, rst_n = 0;
  logic s_ar_valid, s_ar_ready, s_r_valid, s_r_ready, s_r_last;
  logic [AW-1:0] s_ar_addr; logic [7:0] s_ar_len; logic [2:0] s_ar_size; logic [1:0] s_ar_burst, s_r_resp;
  logic [IW-1:0] s_ar_id, s_r_id; logic [DW-1:0] s_r_data;
  logic s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_w_last, s_b_valid, s_b_ready;
  logic [AW-1:0] s_aw_addr; logic [7:0] s_aw_len; logic [2:0] s_aw_size; logic [1:0] s_aw_burst, s_b_resp;
  logic [IW-1:0] s_aw_id, s_b_id; logic [DW-1:0] s_w_data; logic [7:0] s_w_strb;
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_r_last;
  logic [AW-1:0] m_ar_addr; logic [7:0] m_ar_len; logic [2:0] m_ar_size; logic [1:0] m_ar_burst, m_r_resp;
  logic [IW-1:0] m_ar_id, m_r_id; logic [DW-1:0] m_r_data;
  logic m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_w_last, m_b_valid, m_b_ready;
  logic [AW-1:0] m_aw_addr; logic [7:0] m_aw_len; logic [2:0] m_aw_size; logic [1:0] m_aw_burst, m_b_resp;
  logic [IW-1:0] m_aw_id, m_b_id; logic [DW-1:0] m_w_data; logic [7:0] m_w_strb;
  int checks = 0, failures = 0;

  axi_decr2incr #(.AW(AW), .DW(DW), .IW(IW), .MAX_BEATS(8)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(s_ar_valid), .s_ar_ready_o(s_ar_ready), .s_ar_addr_i(s_ar_addr), .s_ar_len_i(s_ar_len),
    .s_ar_size_i(s_ar_size), .s_ar_burst_i(s_ar_burst), .s_ar_id_i(s_ar_id),
    .s_r_valid_o(s_r_valid), .s_r_ready_i(s_r_ready), .s_r_data_o(s_r_data), .s_r_resp_o(s_r_resp),
    .s_r_last_o(s_r_last), .s_r_id_o(s_r_id),
    .s_aw_valid_i(s_aw_valid), .s_aw_ready_o(s_aw_ready), .s_aw_addr_i(s_aw_addr), .s_aw_len_i(s_aw_len),
    .s_aw_size_i(s_aw_size), .s_aw_burst_i(s_aw_burst), .s_aw_id_i(s_aw_id),
    .s_w_valid_i(s_w_valid), .s_w_ready_o(s_w_ready), .s_w_data_i(s_w_data), .s_w_strb_i(s_w_strb),
    .s_w_last_i(s_w_last), .s_b_valid_o(s_b_valid), .s_b_ready_i(s_b_ready), .s_b_resp_o(s_b_resp),
    .s_b_id_o(s_b_id),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_addr_o(m_ar_addr), .m_ar_len_o(m_ar_len),
    .m_ar_size_o(m_ar_size), .m_ar_burst_o(m_ar_burst), .m_ar_id_o(m_ar_id),
    .m_r_valid_i(m_r_valid), .m_r_ready_o(m_r_ready), .m_r_data_i(m_r_data), .m_r_resp_i(m_r_resp),
    .m_r_last_i(m_r_last), .m_r_id_i(m_r_id),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_addr_o(m_aw_addr), .m_aw_len_o(m_aw_len),
    .m_aw_size_o(m_aw_size), .m_aw_burst_o(m_aw_burst), .m_aw_id_o(m_aw_id),
    .m_w_valid_o(m_w_valid), .m_w_ready_i(m_w_ready), .m_w_data_o(m_w_data), .m_w_strb_o(m_w_strb),
    .m_w_last_o(m_w_last), .m_b_valid_i(m_b_valid), .m_b_ready_o(m_b_ready), .m_b_resp_i(m_b_resp),
    .m_b_id_i(m_b_id));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory: 256 words, word address = byte address / 8
  logic [63:0] mem [256];
  function automatic logic [63:0] init_word(int i);
    return 64'hc0de_0000_0000_0000 | 64'(i);
  endfunction

  // ---------------- SoC-side memory model (INCR only) ----------------
  initial begin : soc_read
    logic [AW-1:0] a; int len;
    m_ar_ready = 0; m_r_valid = 0; m_r_data = 0; m_r_last = 0; m_r_resp = 0; m_r_id = 0;
    forever begin
      @(negedge clk); m_ar_ready = $urandom_range(0, 1);
      @(posedge clk);
      if (m_ar_valid && m_ar_ready) begin
        checks++; if (m_ar_burst != 2'b01) failures++;
        a = m_ar_addr; len = m_ar_len; m_r_id = m_ar_id;
        @(negedge clk); m_ar_ready = 0;
        for (int i = 0; i <= len; i++) begin
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) begin m_r_valid = 0; @(negedge clk); end
          m_r_valid = 1; m_r_data = mem[8'((a >> 3) + i)]; m_r_last = (i == len);
          @(posedge clk); while (!m_r_ready) @(posedge clk);
        end
        @(negedge clk); m_r_valid = 0; m_r_last = 0;
      end
    end
  end
  initial begin : soc_write
    logic [AW-1:0] a; int len;
    m_aw_ready = 0; m_w_ready = 0; m_b_valid = 0; m_b_resp = 0; m_b_id = 0;
    forever begin
      @(negedge clk); m_aw_ready = $urandom_range(0, 1);
      @(posedge clk);
      if (m_aw_valid && m_aw_ready) begin
        checks++; if (m_aw_burst != 2'b01) failures++;
        a = m_aw_addr; len = m_aw_len; m_b_id = m_aw_id;
        @(negedge clk); m_aw_ready = 0;
        for (int i = 0; i <= len; i++) begin
          @(negedge clk); m_w_ready = $urandom_range(0, 1);
          @(posedge clk);
          while (!(m_w_valid && m_w_ready)) begin
            @(negedge clk); m_w_ready = $urandom_range(0, 1); @(posedge clk);
          end
          mem[8'((a >> 3) + i)] = m_w_data;
          checks++; if (m_w_last !== (i == len)) failures++;
        end
        @(negedge clk); m_w_ready = 0; m_b_valid = 1;
        @(posedge clk); while (!m_b_ready) @(posedge clk);
        @(negedge clk); m_b_valid = 0;
      end
    end
  end

  // ---------------- core side ----------------
  initial begin
    int n_decr = 0, n_incr = 0;
    for (int i = 0; i < 256; i++) mem[i] = init_word(i);
    s_ar_valid = 0; s_ar_addr = 0; s_ar_len = 0; s_ar_size = 3; s_ar_burst = 0; s_ar_id = 0; s_r_ready = 0;
    s_aw_valid = 0; s_aw_addr = 0; s_aw_len = 0; s_aw_size = 3; s_aw_burst = 0; s_aw_id = 0;
    s_w_valid = 0; s_w_data = 0; s_w_strb = '1; s_w_last = 0; s_b_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic bit decr = $urandom_range(0, 1);
      automatic int len = $urandom_range(0, 7);
      automatic int w0 = decr ? $urandom_range(len, 255) : $urandom_range(0, 255 - len);
      automatic logic [IW-1:0] id = IW'($urandom);
      if (decr) n_decr++; else n_incr++;
      if ($urandom_range(0, 1)) begin
        // read burst; expected word of beat i: w0 -/+ i
        @(negedge clk); s_ar_valid = 1; s_ar_addr = 64'(w0) << 3; s_ar_len = 8'(len);
        s_ar_burst = decr ? 2'b11 : 2'b01; s_ar_id = id;
        @(posedge clk); while (!s_ar_ready) @(posedge clk);
        @(negedge clk); s_ar_valid = 0;
        for (int i = 0; i <= len; i++) begin
          automatic int wi = decr ? w0 - i : w0 + i;
          @(negedge clk); s_r_ready = $urandom_range(0, 1);
          @(posedge clk);
          while (!(s_r_valid && s_r_ready)) begin
            @(negedge clk); s_r_ready = $urandom_range(0, 1); @(posedge clk);
          end
          checks += 3;
          if (s_r_data !== mem[wi]) begin
            failures++;
            if (failures < 10) $display("read %s beat %0d: %h exp %h", decr ? "decr" : "incr", i, s_r_data, mem[wi]);
          end
          if (s_r_last !== (i == len)) failures++;
          if (s_r_id !== id) failures++;
        end
        @(negedge clk); s_r_ready = 0;
      end else begin
        logic [63:0] d [8];
        for (int i = 0; i <= len; i++) d[i] = {$urandom(), $urandom()};
        @(negedge clk); s_aw_valid = 1; s_aw_addr = 64'(w0) << 3; s_aw_len = 8'(len);
        s_aw_burst = decr ? 2'b11 : 2'b01; s_aw_id = id;
        @(posedge clk); while (!s_aw_ready) @(posedge clk);
        @(negedge clk); s_aw_valid = 0;
        for (int i = 0; i <= len; i++) begin
          @(negedge clk); s_w_valid = 1; s_w_data = d[i]; s_w_last = (i == len);
          @(posedge clk); while (!s_w_ready) @(posedge clk);
        end
        @(negedge clk); s_w_valid = 0; s_w_last = 0; s_b_ready = 1;
        @(posedge clk); while (!s_b_valid) @(posedge clk);
        checks++; if (s_b_id !== id) failures++;
        @(negedge clk); s_b_ready = 0;
        for (int i = 0; i <= len; i++) begin
          automatic int wi = decr ? w0 - i : w0 + i;
          checks++;
          if (mem[wi] !== d[i]) begin
            failures++;
            if (failures < 10) $display("write %s beat %0d: mem %h exp %h", decr ? "decr" : "incr", i, mem[wi], d[i]);
          end
        end
      end
    end
    checks++; if (n_decr == 0 || n_incr == 0) failures++;
    $display("decrement bursts %0d, increment bursts %0d", n_decr, n_incr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

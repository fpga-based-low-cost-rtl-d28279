// tb_fiber_port -- a master port and a slave port joined by a fiber pair.
//
// Checks: both ends align and see "ready" idles; symbol streams in both directions
// arrive complete and in order; a steady stream is delivered at one symbol per
// 30 cycles (40 Mbit/s at a 150 MHz base clock); trigger symbols, also sent in the
// middle of a packet, reach the slave with a constant latency measured from the
// symbol load at the master and do not disturb the data; and when the receiver
// stops reading, flow control stops the sender before the receive buffer
// overflows, after which all data still arrives.
module tb_fiber_port;
  import fiber_pkg::*;

  logic clk = 0, rst_n = 0;
  logic m2s, s2m;
  // master side
  logic m_tx_valid, m_tx_ready, m_trig, m_trig_sent, m_rx_valid, m_rx_ready;
  sym_t m_tx_sym, m_rx_sym;
  logic m_link, m_rrdy, m_busy, m_ovf, m_err;
  // slave side
  logic s_tx_valid, s_tx_ready, s_trig_o, s_rx_valid, s_rx_ready;
  sym_t s_tx_sym, s_rx_sym;
  logic s_link, s_rrdy, s_busy, s_ovf, s_err;
  int checks = 0, failures = 0;

  fiber_port #(.IS_MASTER(1'b1)) u_m (.clk, .rst_n, .line_o(m2s), .line_i(s2m), .resync_i(1'b0),
    .tx_valid_i(m_tx_valid), .tx_sym_i(m_tx_sym), .tx_ready_o(m_tx_ready),
    .trig_i(m_trig), .trig_sent_o(m_trig_sent), .trig_o(),
    .rx_valid_o(m_rx_valid), .rx_sym_o(m_rx_sym), .rx_ready_i(m_rx_ready),
    .link_up_o(m_link), .remote_ready_o(m_rrdy), .rx_busy_o(m_busy), .rx_sym_stb_o(),
    .code_err_o(m_err), .ovf_o(m_ovf));

  fiber_port #(.IS_MASTER(1'b0)) u_s (.clk, .rst_n, .line_o(s2m), .line_i(m2s), .resync_i(1'b0),
    .tx_valid_i(s_tx_valid), .tx_sym_i(s_tx_sym), .tx_ready_o(s_tx_ready),
    .trig_i(1'b0), .trig_sent_o(), .trig_o(s_trig_o),
    .rx_valid_o(s_rx_valid), .rx_sym_o(s_rx_sym), .rx_ready_i(s_rx_ready),
    .link_up_o(s_link), .remote_ready_o(s_rrdy), .rx_busy_o(s_busy), .rx_sym_stb_o(),
    .code_err_o(s_err), .ovf_o(s_ovf));

  always #1 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  sym_t mq [$], sq [$];       // to send
  sym_t m_exp [$], s_exp [$]; // expected at the far end
  int last_rx = -1, gaps_bad = 0, gaps = 0;
  bit measure_rate = 0;

  function automatic sym_t rnd_sym(int n, int len);
    if (n == 0) return SYM_SOP;
    if (n == len - 1) return SYM_EOP;
    return '{k: 1'b0, d: 8'($urandom)};
  endfunction

  assign m_tx_valid = mq.size() > 0;
  assign m_tx_sym   = (mq.size() > 0) ? mq[0] : SYM_IDLE_RDY;
  assign s_tx_valid = sq.size() > 0;
  assign s_tx_sym   = (sq.size() > 0) ? sq[0] : SYM_IDLE_RDY;

  always @(posedge clk) if (rst_n) begin
    if (m_tx_valid && m_tx_ready) void'(mq.pop_front());
    if (s_tx_valid && s_tx_ready) void'(sq.pop_front());
    if (s_rx_valid && s_rx_ready) begin
      sym_t e;
      checks++;
      e = s_exp.pop_front();
      if (s_rx_sym !== e) begin failures++; $display("FAIL m->s got %h exp %h", s_rx_sym, e); end
      if (measure_rate) begin
        if (last_rx >= 0) begin
          gaps++;
          if (cyc - last_rx != 30) gaps_bad++;
        end
        last_rx = cyc;
      end
    end
    if (m_rx_valid && m_rx_ready) begin
      sym_t e;
      checks++;
      e = m_exp.pop_front();
      if (m_rx_sym !== e) begin failures++; $display("FAIL s->m got %h exp %h", m_rx_sym, e); end
    end
    if (s_ovf || m_ovf) begin failures++; $display("FAIL receive buffer overflow"); end
    if (s_err || m_err) begin failures++; $display("FAIL code error"); end
  end

  // trigger latency: master load cycle of the trigger symbol -> slave trig_o
  int t_sent [$];
  int lat0 = -1, ntrig = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_trig_sent) t_sent.push_back(cyc);
    if (s_trig_o) begin
      int lat;
      lat = cyc - t_sent.pop_front();
      ntrig++;
      checks++;
      if (lat0 < 0) lat0 = lat;
      else if (lat != lat0) begin failures++; $display("FAIL trigger latency %0d, was %0d", lat, lat0); end
    end
  end

  task automatic queue_packet(bit to_slave, int len);
    for (int n = 0; n < len; n++) begin
      sym_t s;
      s = rnd_sym(n, len);
      if (to_slave) begin mq.push_back(s); s_exp.push_back(s); end
      else begin sq.push_back(s); m_exp.push_back(s); end
    end
  endtask

  int busy_seen = 0, stop_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_busy) busy_seen++;
    if (m_tx_valid && !m_rrdy && m_link) stop_seen++;
  end

  initial begin
    m_trig = 0;
    m_rx_ready = 1;
    s_rx_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1500) @(posedge clk);
    checks++;
    if (!(m_link && s_link && m_rrdy && s_rrdy)) begin
      failures++; $display("FAIL link not up: %0b %0b %0b %0b", m_link, s_link, m_rrdy, s_rrdy);
    end
    // both directions
    for (int p = 0; p < 5; p++) begin queue_packet(1, 20); queue_packet(0, 20); end
    wait (s_exp.size() == 0 && m_exp.size() == 0);
    // rate: a steady stream of 60 symbols, one every 30 cycles
    measure_rate = 1;
    queue_packet(1, 60);
    wait (s_exp.size() == 0);
    measure_rate = 0;
    checks++;
    if (gaps != 59 || gaps_bad != 0) begin failures++; $display("FAIL rate: %0d gaps, %0d not 30 cycles", gaps, gaps_bad); end
    // triggers at random times, some in the middle of packets
    for (int t = 0; t < 12; t++) begin
      if (t % 2 == 0) queue_packet(1, 16);
      repeat ($urandom_range(40, 200)) @(negedge clk);
      m_trig = 1;
      @(negedge clk) m_trig = 0;
    end
    wait (s_exp.size() == 0);
    repeat (200) @(posedge clk);
    checks++;
    if (ntrig != 12) begin failures++; $display("FAIL %0d of 12 triggers", ntrig); end
    // flow control: slave stops reading while a long packet is sent
    s_rx_ready = 0;
    queue_packet(1, 40);
    repeat (2000) @(posedge clk);
    checks++;
    if (busy_seen == 0 || stop_seen == 0) begin failures++; $display("FAIL flow control not seen (%0d, %0d)", busy_seen, stop_seen); end
    s_rx_ready = 1;
    // and the other direction
    m_rx_ready = 0;
    queue_packet(0, 40);
    repeat (2000) @(posedge clk);
    m_rx_ready = 1;
    wait (s_exp.size() == 0 && m_exp.size() == 0);
    $display("info: trigger latency %0d cycles", lat0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

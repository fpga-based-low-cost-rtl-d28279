// tb_endpoint_node -- an endpoint behind a master port (standing for its switch).
//
// Checks: packets with Dst[0] = 0 reach the local device with the upstream address
// 15 added to the source; packets from the local device addressed to 15 leave
// upstream with source address 0 added; packets for other addresses are dropped;
// a trigger symbol fires each enabled trigger line exactly its programmed delay
// after the trigger arrives, at a constant latency from the trigger symbol's start
// at the master, and leaves disabled lines quiet.
module tb_endpoint_node;
  import fiber_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic m2s, s2m;
  logic m_tx_valid, m_tx_ready, m_trig, m_trig_sent, m_rx_valid;
  sym_t m_tx_sym, m_rx_sym;
  logic l_rx_valid, l_tx_valid, l_tx_ready;
  sym_t l_rx_sym, l_tx_sym;
  logic [9:0] en, lines;
  logic [15:0] delay [10];
  logic ep_trig, link;

  fiber_port #(.IS_MASTER(1'b1)) u_sw (.clk, .rst_n, .line_o(m2s), .line_i(s2m), .resync_i(1'b0),
    .tx_valid_i(m_tx_valid), .tx_sym_i(m_tx_sym), .tx_ready_o(m_tx_ready),
    .trig_i(m_trig), .trig_sent_o(m_trig_sent), .trig_o(),
    .rx_valid_o(m_rx_valid), .rx_sym_o(m_rx_sym), .rx_ready_i(1'b1),
    .link_up_o(), .remote_ready_o(), .rx_busy_o(), .rx_sym_stb_o(), .code_err_o(), .ovf_o());

  endpoint_node dut (.clk, .rst_n, .up_line_i(m2s), .up_line_o(s2m),
    .loc_rx_valid_o(l_rx_valid), .loc_rx_sym_o(l_rx_sym), .loc_rx_ready_i(1'b1),
    .loc_tx_valid_i(l_tx_valid), .loc_tx_sym_i(l_tx_sym), .loc_tx_ready_o(l_tx_ready),
    .trig_en_i(en), .trig_delay_i(delay), .trig_width_i(8'd4), .trig_lines_o(lines),
    .trig_o(ep_trig), .up_link_o(link));

  always #1 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  sym_t mq [$], lq [$], m_exp [$], l_exp [$];
  assign m_tx_valid = mq.size() > 0;
  assign m_tx_sym   = m_tx_valid ? mq[0] : SYM_IDLE_RDY;
  assign l_tx_valid = lq.size() > 0;
  assign l_tx_sym   = l_tx_valid ? lq[0] : SYM_IDLE_RDY;

  always @(posedge clk) if (rst_n) begin
    if (m_tx_valid && m_tx_ready) void'(mq.pop_front());
    if (l_tx_valid && l_tx_ready) void'(lq.pop_front());
    if (m_rx_valid) begin
      checks++;
      if (m_rx_sym !== m_exp.pop_front()) begin failures++; $display("FAIL upstream symbol %h", m_rx_sym); end
    end
    if (l_rx_valid) begin
      checks++;
      if (l_exp.size() == 0 || l_rx_sym !== l_exp.pop_front()) begin failures++; $display("FAIL local symbol %h", l_rx_sym); end
    end
  end

  function automatic sym_t D(logic [7:0] v);
    return '{k: 1'b0, d: v};
  endfunction

  // header bytes in and out for destination d and source s at input address pin
  task automatic packet(bit from_net, logic [15:0] d, logic [15:0] s, logic [3:0] pin, int len, bit delivered);
    logic [15:0] dn, sn;
    sym_t pl [$];
    dn = {4'h0, d[15:4]};
    sn = {s[11:0], pin};
    for (int i = 0; i < len; i++) pl.push_back(D(8'($urandom)));
    if (from_net) begin
      mq.push_back(SYM_SOP); mq.push_back(D(d[7:0])); mq.push_back(D(d[15:8]));
      mq.push_back(D(s[7:0])); mq.push_back(D(s[15:8]));
      foreach (pl[i]) mq.push_back(pl[i]);
      mq.push_back(SYM_EOP);
    end else begin
      lq.push_back(SYM_SOP); lq.push_back(D(d[7:0])); lq.push_back(D(d[15:8]));
      lq.push_back(D(s[7:0])); lq.push_back(D(s[15:8]));
      foreach (pl[i]) lq.push_back(pl[i]);
      lq.push_back(SYM_EOP);
    end
    if (delivered) begin
      if (from_net) begin
        l_exp.push_back(SYM_SOP); l_exp.push_back(D(dn[7:0])); l_exp.push_back(D(dn[15:8]));
        l_exp.push_back(D(sn[7:0])); l_exp.push_back(D(sn[15:8]));
        foreach (pl[i]) l_exp.push_back(pl[i]);
        l_exp.push_back(SYM_EOP);
      end else begin
        m_exp.push_back(SYM_SOP); m_exp.push_back(D(dn[7:0])); m_exp.push_back(D(dn[15:8]));
        m_exp.push_back(D(sn[7:0])); m_exp.push_back(D(sn[15:8]));
        foreach (pl[i]) m_exp.push_back(pl[i]);
        m_exp.push_back(SYM_EOP);
      end
    end
  endtask

  // trigger line timing relative to the trigger symbol's load at the master
  int t_sent, rise [10], base = -1, ntrig = 0;
  logic [9:0] lines_q;
  always @(posedge clk) if (rst_n) begin
    if (m_trig_sent) begin
      t_sent = cyc;
      for (int l = 0; l < 10; l++) rise[l] = -1;
    end
    for (int l = 0; l < 10; l++) if (lines[l] && !lines_q[l]) rise[l] = cyc - t_sent;
    lines_q <= lines;
  end

  initial begin
    m_trig = 0;
    en = 10'b1011111101;
    for (int l = 0; l < 10; l++) delay[l] = 16'(l * 7);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1500) @(posedge clk);
    checks++;
    if (!link) begin failures++; $display("FAIL link down"); end
    packet(1, 16'h0000, 16'h00F0, UP_ADDR, 9, 1);   // to local device
    packet(0, 16'h00FF, 16'h0000, 4'd0, 7, 1);      // reply upstream
    packet(1, 16'h0003, 16'h0000, UP_ADDR, 3, 0);   // address 3 does not exist: dropped
    packet(1, 16'h0000, 16'h0FF1, UP_ADDR, 0, 1);   // empty payload
    while (mq.size() != 0 || lq.size() != 0 || m_exp.size() != 0 || l_exp.size() != 0) @(posedge clk);
    for (int t = 0; t < 5; t++) begin
      repeat ($urandom_range(20, 80)) @(negedge clk);
      m_trig = 1;
      @(negedge clk) m_trig = 0;
      repeat (200) @(negedge clk);
      for (int l = 0; l < 10; l++) begin
        checks++;
        if (!en[l]) begin
          if (rise[l] != -1) begin failures++; $display("FAIL disabled line %0d fired", l); end
        end else begin
          if (base < 0) base = rise[l] - l * 7;
          if (rise[l] != base + l * 7) begin
            failures++; $display("FAIL line %0d rose at %0d, expected %0d", l, rise[l], base + l * 7);
          end
        end
      end
      ntrig++;
    end
    $display("info: trigger symbol start to line 0 rise: %0d cycles", base);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

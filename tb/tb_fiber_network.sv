// tb_fiber_network -- end-to-end test of host -> switch -> endpoint at the default
// sizes of every block.
//
// A model of the host processor sends packets through the network and a model of
// the endpoint user logic answers each packet it gets by copying the received
// source address into the reply's destination, so the reply finds its way back
// without any routing table.  The test makes each mechanism of the design happen
// and counts it; a mechanism that never happened counts as a failure:
//   routed      packets host -> endpoint through the switch, rewritten correctly
//   reply       replies endpoint -> host using the collected source address
//   local_sw    packets to and from the switch's own local device (address 0)
//   dropped     a packet for a missing port vanishes
//   contention  two packets for the endpoint meet in the switch fabric
//   flowctl     the endpoint stops reading; "not ready" idles stop the switch
//   trig        global triggers reach switch SMA output and endpoint lines with a
//               latency that never changes, also inside packets and after the
//               switch and the endpoint have been power-cycled
//   rate        a 2000-byte payload arrives at 30 cycles per byte (40 Mbit/s at
//               150 MHz) once the stream runs
module tb_fiber_network;
  import fiber_pkg::*;

  logic clk = 0, h_rst = 0, s_rst = 0, e_rst = 0;
  int checks = 0, failures = 0;

  logic [6:0] host_line_o, sw_line_o;
  logic h_rx_valid, h_rx_ready, h_tx_valid, h_tx_ready, trig_req, trig_sent;
  sym_t h_rx_sym, h_tx_sym;
  logic s_rx_valid, s_rx_ready, s_tx_valid, s_tx_ready, sma, fwait, fstop;
  sym_t s_rx_sym, s_tx_sym;
  logic e_rx_valid, e_rx_ready, e_tx_valid, e_tx_ready;
  sym_t e_rx_sym, e_tx_sym;
  logic [9:0] trig_en, lines;
  logic [15:0] trig_delay [10];
  logic sw_up, ep_up, h_link, se_link;

  fiber_network dut (.clk, .host_rst_n(h_rst), .switch_rst_n(s_rst), .endpoint_rst_n(e_rst),
    .host_line_o, .host_line_i(7'd0), .sw_line_o, .sw_line_i(7'd0),
    .h_rx_valid_o(h_rx_valid), .h_rx_sym_o(h_rx_sym), .h_rx_ready_i(h_rx_ready),
    .h_tx_valid_i(h_tx_valid), .h_tx_sym_i(h_tx_sym), .h_tx_ready_o(h_tx_ready),
    .trig_req_i(trig_req), .trig_sent_o(trig_sent),
    .s_rx_valid_o(s_rx_valid), .s_rx_sym_o(s_rx_sym), .s_rx_ready_i(s_rx_ready),
    .s_tx_valid_i(s_tx_valid), .s_tx_sym_i(s_tx_sym), .s_tx_ready_o(s_tx_ready),
    .sma_trig_o(sma), .sw_fabric_wait_o(fwait), .sw_flow_stop_o(fstop),
    .e_rx_valid_o(e_rx_valid), .e_rx_sym_o(e_rx_sym), .e_rx_ready_i(e_rx_ready),
    .e_tx_valid_i(e_tx_valid), .e_tx_sym_i(e_tx_sym), .e_tx_ready_o(e_tx_ready),
    .trig_en_i(trig_en), .trig_delay_i(trig_delay), .trig_width_i(8'd3), .trig_lines_o(lines),
    .sw_up_link_o(sw_up), .ep_up_link_o(ep_up), .host_link_o(h_link), .sw_ep_link_o(se_link));

  always #1 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #6000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- packet helpers
  typedef sym_t pkt_t [$];

  function automatic sym_t D(logic [7:0] v);
    return '{k: 1'b0, d: v};
  endfunction

  function automatic pkt_t make(logic [15:0] dst, logic [15:0] src, int len, int tag);
    pkt_t p;
    p = '{SYM_SOP, D(dst[7:0]), D(dst[15:8]), D(src[7:0]), D(src[15:8]), D(8'(tag))};
    for (int i = 1; i < len; i++) p.push_back(D(8'(tag * 31 + i)));
    p.push_back(SYM_EOP);
    return p;
  endfunction

  sym_t hq [$], sq [$], eq [$];
  // The queue heads are driven through flops updated with nonblocking assignments,
  // so the design samples the symbol that was offered before the clock edge.
  initial begin
    h_tx_valid = 0; s_tx_valid = 0; e_tx_valid = 0;
    h_tx_sym = SYM_IDLE_RDY; s_tx_sym = SYM_IDLE_RDY; e_tx_sym = SYM_IDLE_RDY;
  end

  // received packet assembly at each local device
  sym_t hcur [$], scur [$], ecur [$];
  int n_routed = 0, n_reply = 0, n_local = 0;
  int e_first = -1, e_last = -1, e_bytes = 0;
  bit rate_run = 0;

  // expected header at arrival (after all rewrites) keyed by tag; a reply to tag t
  // carries tag t + 100 and is only sent when an expectation for it exists
  logic [15:0] exp_dst [int], exp_src [int];
  int          exp_len [int];

  task automatic check_packet(string where, sym_t p [$]);
    int tag, len;
    logic [15:0] dst, src;
    checks++;
    if (p.size() < 7 || !is_sop(p[0]) || !is_eop(p[p.size()-1])) begin
      failures++; $display("FAIL %s: malformed packet of %0d symbols", where, p.size()); return;
    end
    dst = {p[2].d, p[1].d};
    src = {p[4].d, p[3].d};
    tag = int'(p[5].d);
    len = p.size() - 6;
    if (!exp_dst.exists(tag)) begin
      failures++; $display("FAIL %s: unexpected packet tag %0d", where, tag); return;
    end
    if (dst !== exp_dst[tag] || src !== exp_src[tag] || len != exp_len[tag]) begin
      failures++;
      $display("FAIL %s tag %0d: dst %h src %h len %0d, expected %h %h %0d", where, tag, dst, src,
               len, exp_dst[tag], exp_src[tag], exp_len[tag]);
    end
    for (int i = 1; i < len; i++) if (p[5+i].d !== 8'(tag * 31 + i)) begin
      failures++; $display("FAIL %s tag %0d: payload byte %0d", where, tag, i); break;
    end
    exp_dst.delete(tag);
  endtask

  // local user logic: answer with the received source address as destination
  task automatic answer(ref sym_t q [$], input sym_t p [$], input int len);
    pkt_t r;
    int tag;
    tag = int'(p[5].d) + 100;
    if (tag < 256 && exp_dst.exists(tag)) begin
      r = make({p[4].d, p[3].d}, 16'h0000, len, tag);
      foreach (r[i]) q.push_back(r[i]);
    end
  endtask

  always @(posedge clk) begin
    if (h_tx_valid && h_tx_ready) void'(hq.pop_front());
    if (s_tx_valid && s_tx_ready) void'(sq.pop_front());
    if (e_tx_valid && e_tx_ready) void'(eq.pop_front());
    if (h_rst && h_rx_valid && h_rx_ready) begin
      hcur.push_back(h_rx_sym);
      if (is_eop(h_rx_sym)) begin
        check_packet("host", hcur);
        n_reply++;
        hcur.delete();
      end
    end
    if (s_rst && s_rx_valid && s_rx_ready) begin
      scur.push_back(s_rx_sym);
      if (is_eop(s_rx_sym)) begin
        check_packet("switch", scur);
        n_local++;
        answer(sq, scur, 4);
        scur.delete();
      end
    end
    if (e_rst && e_rx_valid && e_rx_ready) begin
      ecur.push_back(e_rx_sym);
      if (!e_rx_sym.k && rate_run) begin
        if (e_first < 0) e_first = cyc;
        e_last = cyc;
        e_bytes++;
      end
      if (is_eop(e_rx_sym)) begin
        check_packet("endpoint", ecur);
        n_routed++;
        answer(eq, ecur, 5);
        ecur.delete();
      end
    end
    h_tx_valid <= hq.size() > 0;
    h_tx_sym   <= hq.size() > 0 ? hq[0] : SYM_IDLE_RDY;
    s_tx_valid <= sq.size() > 0;
    s_tx_sym   <= sq.size() > 0 ? sq[0] : SYM_IDLE_RDY;
    e_tx_valid <= eq.size() > 0;
    e_tx_sym   <= eq.size() > 0 ? eq[0] : SYM_IDLE_RDY;
  end

  // ---------------------------------------------------------------- triggers
  int t_sent = -1, lat_sma = -1, lat_line = -1, n_trig = 0, n_trig_mid = 0;
  int lat_sma0 = -1, lat_line0 = -1;
  logic sma_q, line0_q;
  always @(posedge clk) begin
    sma_q   <= sma;
    line0_q <= lines[0];
    if (trig_sent) t_sent = cyc;
    if (sma && !sma_q && s_rst) begin
      lat_sma = cyc - t_sent;
      checks++;
      if (lat_sma0 < 0) lat_sma0 = lat_sma;
      else if (lat_sma != lat_sma0) begin failures++; $display("FAIL switch trigger latency %0d, was %0d", lat_sma, lat_sma0); end
    end
    if (lines[0] && !line0_q && e_rst) begin
      lat_line = cyc - t_sent;
      n_trig++;
      checks++;
      if (lat_line0 < 0) lat_line0 = lat_line;
      else if (lat_line != lat_line0) begin failures++; $display("FAIL endpoint trigger latency %0d, was %0d", lat_line, lat_line0); end
      if (ecur.size() > 0) n_trig_mid++;
    end
  end

  task automatic trigger();
    repeat ($urandom_range(10, 60)) @(negedge clk);
    trig_req = 1;
    @(negedge clk) trig_req = 0;
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_wait = 0, n_stop = 0, n_power = 0;
  always @(posedge clk) begin
    if (s_rst && fwait) n_wait++;
    if (s_rst && fstop) n_stop++;
  end

  task automatic send(ref sym_t q [$], input logic [15:0] dst, input int len, input int tag,
                      input logic [15:0] edst, input logic [15:0] esrc);
    pkt_t p;
    p = make(dst, 16'h0000, len, tag);
    exp_dst[tag] = edst;
    exp_src[tag] = esrc;
    exp_len[tag] = len;
    foreach (p[i]) q.push_back(p[i]);
  endtask

  task automatic expect_reply(int tag, logic [15:0] esrc, int len);
    exp_dst[tag + 100] = 16'h0000;
    exp_src[tag + 100] = esrc;
    exp_len[tag + 100] = len;
  endtask

  function automatic bit idle();
    return hq.size() == 0 && sq.size() == 0 && eq.size() == 0 && exp_dst.num() == 0 &&
           hcur.size() == 0 && scur.size() == 0 && ecur.size() == 0;
  endfunction

  task automatic settle(int max_cycles);
    int n = 0;
    while (!idle() && n < max_cycles) begin @(posedge clk); n++; end
    repeat (300) @(posedge clk);
  endtask

  task automatic power_cycle_switch_and_endpoint(int gap);
    @(negedge clk) s_rst = 0; e_rst = 0;
    repeat (gap) @(negedge clk);
    s_rst = 1;
    repeat (gap * 3 + 1) @(negedge clk);
    e_rst = 1;
    repeat (2500) @(posedge clk);
    n_power++;
    checks++;
    if (!(sw_up && ep_up && h_link && se_link)) begin failures++; $display("FAIL links after power cycle"); end
  endtask

  // Address bookkeeping.  dst/src are {byte2, byte1} = {N3, N2, N1, N0}; N0 is
  // used first.  Every node input shifts the destination one nibble down and pushes
  // its own port number (0 local, 15 upstream, 1..7 master ports) into the source.
  //   host local -> host port 1 -> switch port 7 -> endpoint local : dst 0071
  //   arrives with src {0, 0(host local), F(switch up), F(endpoint up)} = 00FF
  //   the answer to 00FF arrives at the host with src {0, 0, 7, 1} = 0071
  //   host local -> host port 1 -> switch local : dst 0001, arrives with src 000F,
  //   the answer arrives at the host with src 0001
  //   switch local -> port 7 -> endpoint local : dst 0007, arrives with src 000F,
  //   the answer arrives at the switch local device with src 0007
  localparam logic [15:0] EP_DST = 16'h0071;
  localparam logic [15:0] EP_SRC = 16'h00FF;
  localparam logic [15:0] SW_DST = 16'h0001;

  initial begin
    trig_req = 0;
    h_rx_ready = 1; s_rx_ready = 1; e_rx_ready = 1;
    trig_en = 10'h3FF;
    for (int l = 0; l < 10; l++) trig_delay[l] = 16'(l);
    repeat (3) @(posedge clk);
    h_rst = 1;
    repeat (5) @(posedge clk);
    s_rst = 1;
    repeat (11) @(posedge clk);
    e_rst = 1;
    repeat (2500) @(posedge clk);
    checks++;
    if (!(sw_up && ep_up && h_link && se_link)) begin failures++; $display("FAIL links not up"); end

    // routed packets and replies
    for (int t = 0; t < 4; t++) begin
      expect_reply(t, EP_DST, 5);
      send(hq, EP_DST, 8 + 5 * t, t, 16'h0000, EP_SRC);
    end
    settle(60000);
    // switch local device
    expect_reply(20, SW_DST, 4);
    send(hq, SW_DST, 6, 20, 16'h0000, 16'h000F);
    settle(20000);
    // dropped: switch port 9 does not exist
    begin
      pkt_t p;
      p = make(16'h0091, 16'h0000, 4, 250);
      foreach (p[i]) hq.push_back(p[i]);
    end
    settle(20000);
    // contention: host -> endpoint and switch local -> endpoint together
    expect_reply(10, EP_DST, 5);
    expect_reply(11, 16'h0007, 5);
    send(hq, EP_DST, 40, 10, 16'h0000, EP_SRC);
    send(sq, 16'h0007, 40, 11, 16'h0000, 16'h000F);
    settle(60000);
    // flow control: endpoint stops reading during a long packet
    e_rx_ready = 0;
    send(hq, EP_DST, 120, 12, 16'h0000, EP_SRC);
    repeat (9000) @(posedge clk);
    e_rx_ready = 1;
    settle(60000);
    // triggers, some during a packet
    for (int t = 0; t < 3; t++) begin trigger(); repeat (300) @(posedge clk); end
    send(hq, EP_DST, 100, 13, 16'h0000, EP_SRC);
    repeat (1500) @(posedge clk);
    trigger();
    repeat (600) @(posedge clk);
    trigger();
    settle(60000);
    // power cycles at different phases, then triggers again
    for (int c = 0; c < 3; c++) begin
      power_cycle_switch_and_endpoint(7 + 11 * c);
      for (int t = 0; t < 2; t++) begin trigger(); repeat (300) @(posedge clk); end
    end
    // data rate: a 2000-byte payload host -> endpoint
    rate_run = 1;
    e_first = -1;
    e_bytes = 0;
    send(hq, EP_DST, 2000, 14, 16'h0000, EP_SRC);
    settle(200000);
    rate_run = 0;

    $display("info: routed=%0d reply=%0d local_sw=%0d contention_cycles=%0d flowctl_cycles=%0d",
             n_routed, n_reply, n_local, n_wait, n_stop);
    $display("info: triggers=%0d in_packet=%0d power_cycles=%0d latency host->switch SMA %0d, host->endpoint line0 %0d cycles",
             n_trig, n_trig_mid, n_power, lat_sma0, lat_line0);
    begin
      real cpb;
      cpb = real'(e_last - e_first) / real'(e_bytes - 1);
      $display("info: payload rate %0.3f cycles per byte = %0.2f Mbit/s at 150 MHz", cpb, 150.0 * 8.0 / cpb);
      checks++;
      if (cpb > 30.5) begin failures++; $display("FAIL rate %0.3f cycles per byte", cpb); end
    end
    checks += 7;
    if (n_routed < 9)    begin failures++; $display("FAIL mechanism routed"); end
    if (n_reply < 6)     begin failures++; $display("FAIL mechanism reply"); end
    if (n_local < 2)     begin failures++; $display("FAIL mechanism local_sw"); end
    if (n_wait == 0)     begin failures++; $display("FAIL mechanism contention"); end
    if (n_stop == 0)     begin failures++; $display("FAIL mechanism flowctl"); end
    if (n_trig < 11 || n_trig_mid == 0) begin failures++; $display("FAIL mechanism trig"); end
    if (n_power != 3)    begin failures++; $display("FAIL mechanism power cycle"); end
    checks++;
    if (exp_dst.num() != 0) begin failures++; $display("FAIL %0d packets lost", exp_dst.num()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_switch_node -- the switch between a master port (standing for the host) and
// seven slave ports (standing for endpoints).
//
// Checks: routing by Dst[0] to the downstream port, upstream (address 15) and the
// local device (address 0), with the address fields rewritten as the packet format
// prescribes; packets for a missing address are dropped; two downstream ports
// sending upstream at once are both served (fabric wait seen); a trigger from the
// upstream side reaches all seven downstream ports in the same cycle and the SMA
// output, and its latency stays the same after the switch is reset at another phase.
module tb_switch_node;
  import fiber_pkg::*;

  localparam int ND = 7;
  logic clk = 0, rst_n = 0, sw_rst_n = 0;
  int checks = 0, failures = 0;

  // upstream partner (master)
  logic up_m2s, up_s2m;
  logic u_tx_valid, u_tx_ready, u_trig, u_trig_sent, u_rx_valid;
  sym_t u_tx_sym, u_rx_sym;
  // downstream partners (slaves)
  logic [ND-1:0] dn_m2s, dn_s2m;
  logic d_tx_valid [ND], d_tx_ready [ND], d_trig [ND], d_rx_valid [ND];
  sym_t d_tx_sym [ND], d_rx_sym [ND];
  // switch local device
  logic l_rx_valid, l_tx_valid, l_tx_ready;
  sym_t l_rx_sym, l_tx_sym;
  logic sw_trig, sma, up_link, fwait, fstop;
  logic [ND-1:0] dn_link;

  fiber_port #(.IS_MASTER(1'b1)) u_host (.clk, .rst_n, .line_o(up_m2s), .line_i(up_s2m), .resync_i(1'b0),
    .tx_valid_i(u_tx_valid), .tx_sym_i(u_tx_sym), .tx_ready_o(u_tx_ready),
    .trig_i(u_trig), .trig_sent_o(u_trig_sent), .trig_o(),
    .rx_valid_o(u_rx_valid), .rx_sym_o(u_rx_sym), .rx_ready_i(1'b1),
    .link_up_o(), .remote_ready_o(), .rx_busy_o(), .rx_sym_stb_o(), .code_err_o(), .ovf_o());

  for (genvar p = 0; p < ND; p++) begin : g_ep
    fiber_port #(.IS_MASTER(1'b0)) u_ep (.clk, .rst_n, .line_o(dn_s2m[p]), .line_i(dn_m2s[p]), .resync_i(1'b0),
      .tx_valid_i(d_tx_valid[p]), .tx_sym_i(d_tx_sym[p]), .tx_ready_o(d_tx_ready[p]),
      .trig_i(1'b0), .trig_sent_o(), .trig_o(d_trig[p]),
      .rx_valid_o(d_rx_valid[p]), .rx_sym_o(d_rx_sym[p]), .rx_ready_i(1'b1),
      .link_up_o(), .remote_ready_o(), .rx_busy_o(), .rx_sym_stb_o(), .code_err_o(), .ovf_o());
  end

  switch_node #(.N_DOWN(ND)) dut (.clk, .rst_n(sw_rst_n), .up_line_i(up_m2s), .up_line_o(up_s2m),
    .dn_line_o(dn_m2s), .dn_line_i(dn_s2m),
    .loc_rx_valid_o(l_rx_valid), .loc_rx_sym_o(l_rx_sym), .loc_rx_ready_i(1'b1),
    .loc_tx_valid_i(l_tx_valid), .loc_tx_sym_i(l_tx_sym), .loc_tx_ready_o(l_tx_ready),
    .trig_o(sw_trig), .sma_trig_o(sma), .up_link_o(up_link), .dn_link_o(dn_link),
    .fabric_wait_o(fwait), .flow_stop_o(fstop));

  always #1 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    for (int i = 0; i < ND + 2; i++) $display("watchdog: queue %0d tx %0d rx %0d", i, txq[i].size(), rxexp[i].size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // sources: index 0..ND-1 downstream partners, ND upstream partner, ND+1 local device
  sym_t txq [ND+2][$];
  sym_t rxexp [ND+2][$];
  assign u_tx_valid = txq[ND].size() > 0;
  assign u_tx_sym   = u_tx_valid ? txq[ND][0] : SYM_IDLE_RDY;
  assign l_tx_valid = txq[ND+1].size() > 0;
  assign l_tx_sym   = l_tx_valid ? txq[ND+1][0] : SYM_IDLE_RDY;
  always_comb for (int p = 0; p < ND; p++) begin
    d_tx_valid[p] = txq[p].size() > 0;
    d_tx_sym[p]   = d_tx_valid[p] ? txq[p][0] : SYM_IDLE_RDY;
  end

  task automatic chk_rx(int idx, sym_t s);
    sym_t e;
    checks++;
    if (rxexp[idx].size() == 0) begin failures++; $display("FAIL unexpected symbol %h at %0d", s, idx); end
    else begin
      e = rxexp[idx].pop_front();
      if (s !== e) begin failures++; $display("FAIL at %0d got %h exp %h", idx, s, e); end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (u_tx_valid && u_tx_ready) void'(txq[ND].pop_front());
    if (l_tx_valid && l_tx_ready) void'(txq[ND+1].pop_front());
    for (int p = 0; p < ND; p++) begin
      if (d_tx_valid[p] && d_tx_ready[p]) void'(txq[p].pop_front());
      if (d_rx_valid[p]) chk_rx(p, d_rx_sym[p]);
    end
    if (u_rx_valid) chk_rx(ND, u_rx_sym);
    if (l_rx_valid) chk_rx(ND+1, l_rx_sym);
  end

  function automatic sym_t D(logic [7:0] v);
    return '{k: 1'b0, d: v};
  endfunction

  // packet from source 'from' (entering the switch on port address pin) with
  // destination nibbles dst and source nibbles src; expected at sink 'to' (-1: dropped)
  task automatic packet(int from, logic [3:0] pin, logic [3:0] dst [4], logic [3:0] src [4], int len, int to);
    sym_t pl [$];
    for (int i = 0; i < len; i++) pl.push_back(D(8'($urandom)));
    txq[from].push_back(SYM_SOP);
    txq[from].push_back(D({dst[1], dst[0]}));
    txq[from].push_back(D({dst[3], dst[2]}));
    txq[from].push_back(D({src[1], src[0]}));
    txq[from].push_back(D({src[3], src[2]}));
    foreach (pl[i]) txq[from].push_back(pl[i]);
    txq[from].push_back(SYM_EOP);
    if (to >= 0) begin
      rxexp[to].push_back(SYM_SOP);
      rxexp[to].push_back(D({dst[2], dst[1]}));
      rxexp[to].push_back(D({4'h0, dst[3]}));
      rxexp[to].push_back(D({src[0], pin}));
      rxexp[to].push_back(D({src[2], src[1]}));
      foreach (pl[i]) rxexp[to].push_back(pl[i]);
      rxexp[to].push_back(SYM_EOP);
    end
  endtask

  function automatic bit all_done();
    for (int i = 0; i < ND + 2; i++) if (txq[i].size() != 0 || rxexp[i].size() != 0) return 0;
    return 1;
  endfunction

  // trigger monitoring
  int t_sent = 0, lat0 = -1, ntrig = 0, sma_seen = 0, wait_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_trig_sent) t_sent = cyc;
    if (d_trig[0]) begin
      int lat;
      ntrig++;
      lat = cyc - t_sent;
      checks++;
      if (lat0 < 0) lat0 = lat;
      else if (lat != lat0) begin failures++; $display("FAIL trigger latency %0d, was %0d", lat, lat0); end
      for (int p = 1; p < ND; p++) begin
        checks++;
        if (!d_trig[p]) begin failures++; $display("FAIL trigger not simultaneous at port %0d", p + 1); end
      end
    end
    if (sma) sma_seen++;
    if (fwait) wait_seen++;
  end

  task automatic trigger();
    repeat ($urandom_range(30, 90)) @(negedge clk);
    u_trig = 1;
    @(negedge clk) u_trig = 0;
    repeat (150) @(negedge clk);
  endtask

  initial begin
    logic [3:0] d [4], s [4];
    u_trig = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (7) @(posedge clk);
    sw_rst_n = 1;
    repeat (1500) @(posedge clk);
    checks++;
    if (!(up_link && &dn_link)) begin failures++; $display("FAIL links not up"); end
    // upstream -> downstream port 2 (endpoint behind it is Dst[1] = 0)
    d = '{4'd2, 4'd0, 4'd0, 4'd0}; s = '{4'd0, 4'd0, 4'd0, 4'd0};
    packet(ND, UP_ADDR, d, s, 10, 1);
    // upstream -> port 7 with further hops in the address
    d = '{4'd7, 4'd3, 4'd9, 4'd1}; s = '{4'd4, 4'd2, 4'd0, 4'd0};
    packet(ND, UP_ADDR, d, s, 5, 6);
    // upstream -> local device
    d = '{4'd0, 4'd0, 4'd0, 4'd0}; s = '{4'd0, 4'd0, 4'd0, 4'd0};
    packet(ND, UP_ADDR, d, s, 6, ND + 1);
    // downstream ports 3 and 4 -> upstream at the same time (contention)
    d = '{UP_ADDR, 4'd0, 4'd0, 4'd0}; s = '{4'd15, 4'd0, 4'd0, 4'd0};
    packet(2, 4'd3, d, s, 30, ND);
    packet(3, 4'd4, d, s, 30, ND);
    // local device -> port 5
    d = '{4'd5, 4'd0, 4'd0, 4'd0}; s = '{4'd0, 4'd0, 4'd0, 4'd0};
    packet(ND + 1, 4'd0, d, s, 8, 4);
    // missing address 9: dropped
    d = '{4'd9, 4'd0, 4'd0, 4'd0};
    packet(ND, UP_ADDR, d, s, 4, -1);
    // downstream 1 -> downstream 6
    d = '{4'd6, 4'd0, 4'd0, 4'd0}; s = '{4'd15, 4'd0, 4'd0, 4'd0};
    packet(0, 4'd1, d, s, 12, 5);
    while (!all_done()) @(posedge clk);
    checks++;
    if (wait_seen == 0) begin failures++; $display("FAIL no fabric contention seen"); end
    for (int t = 0; t < 4; t++) trigger();
    // reset the switch at a different phase, then trigger again: same latency
    @(negedge clk) sw_rst_n = 0;
    repeat (13) @(negedge clk);
    sw_rst_n = 1;
    repeat (1500) @(posedge clk);
    for (int t = 0; t < 4; t++) trigger();
    checks++;
    if (ntrig != 8 || sma_seen == 0) begin failures++; $display("FAIL triggers %0d sma %0d", ntrig, sma_seen); end
    $display("info: host-to-downstream trigger latency %0d cycles", lat0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_host_node -- the host with slave ports (standing for switches) on its
// master ports 1..3.
//
// Checks: packets from the host's local device leave on port Dst[0] with address
// fields rewritten (source address 0 added); packets from a port arrive at the local
// device with that port's number added as Src[0]; port-to-port forwarding; packets
// for a port the host does not have are dropped; a global trigger request reaches
// all connected ports in the same cycle, at a constant latency after trig_sent_o.
module tb_host_node;
  import fiber_pkg::*;

  localparam int NP = 7, NC = 3;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic [NP-1:0] h2s, s2h;
  logic p_tx_valid [NC], p_tx_ready [NC], p_trig [NC], p_rx_valid [NC];
  sym_t p_tx_sym [NC], p_rx_sym [NC];
  logic l_rx_valid, l_tx_valid, l_tx_ready, trig_req, trig_sent;
  sym_t l_rx_sym, l_tx_sym;
  logic [NP-1:0] link;

  host_node dut (.clk, .rst_n, .line_o(h2s), .line_i(s2h),
    .loc_rx_valid_o(l_rx_valid), .loc_rx_sym_o(l_rx_sym), .loc_rx_ready_i(1'b1),
    .loc_tx_valid_i(l_tx_valid), .loc_tx_sym_i(l_tx_sym), .loc_tx_ready_o(l_tx_ready),
    .trig_req_i(trig_req), .trig_sent_o(trig_sent), .link_o(link));

  for (genvar p = 0; p < NC; p++) begin : g_sw
    fiber_port #(.IS_MASTER(1'b0)) u_sw (.clk, .rst_n, .line_o(s2h[p]), .line_i(h2s[p]), .resync_i(1'b0),
      .tx_valid_i(p_tx_valid[p]), .tx_sym_i(p_tx_sym[p]), .tx_ready_o(p_tx_ready[p]),
      .trig_i(1'b0), .trig_sent_o(), .trig_o(p_trig[p]),
      .rx_valid_o(p_rx_valid[p]), .rx_sym_o(p_rx_sym[p]), .rx_ready_i(1'b1),
      .link_up_o(), .remote_ready_o(), .rx_busy_o(), .rx_sym_stb_o(), .code_err_o(), .ovf_o());
  end
  assign s2h[NP-1:NC] = '0;

  always #1 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // queues: 0..NC-1 ports, NC local device
  sym_t txq [NC+1][$], rxexp [NC+1][$];
  assign l_tx_valid = txq[NC].size() > 0;
  assign l_tx_sym   = l_tx_valid ? txq[NC][0] : SYM_IDLE_RDY;
  always_comb for (int p = 0; p < NC; p++) begin
    p_tx_valid[p] = txq[p].size() > 0;
    p_tx_sym[p]   = p_tx_valid[p] ? txq[p][0] : SYM_IDLE_RDY;
  end

  task automatic chk(int idx, sym_t s);
    checks++;
    if (rxexp[idx].size() == 0 || s !== rxexp[idx].pop_front()) begin
      failures++; $display("FAIL at %0d got %h", idx, s);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (l_tx_valid && l_tx_ready) void'(txq[NC].pop_front());
    if (l_rx_valid) chk(NC, l_rx_sym);
    for (int p = 0; p < NC; p++) begin
      if (p_tx_valid[p] && p_tx_ready[p]) void'(txq[p].pop_front());
      if (p_rx_valid[p]) chk(p, p_rx_sym[p]);
    end
  end

  function automatic sym_t D(logic [7:0] v);
    return '{k: 1'b0, d: v};
  endfunction

  task automatic packet(int from, logic [3:0] pin, logic [15:0] d, logic [15:0] s, int len, int to);
    logic [15:0] dn, sn;
    sym_t pk [$], ex [$];
    dn = {4'h0, d[15:4]};
    sn = {s[11:0], pin};
    pk = '{SYM_SOP, D(d[7:0]), D(d[15:8]), D(s[7:0]), D(s[15:8])};
    ex = '{SYM_SOP, D(dn[7:0]), D(dn[15:8]), D(sn[7:0]), D(sn[15:8])};
    for (int i = 0; i < len; i++) begin
      sym_t v;
      v = D(8'($urandom));
      pk.push_back(v);
      ex.push_back(v);
    end
    pk.push_back(SYM_EOP);
    ex.push_back(SYM_EOP);
    foreach (pk[i]) txq[from].push_back(pk[i]);
    if (to >= 0) foreach (ex[i]) rxexp[to].push_back(ex[i]);
  endtask

  function automatic bit all_done();
    for (int i = 0; i <= NC; i++) if (txq[i].size() != 0 || rxexp[i].size() != 0) return 0;
    return 1;
  endfunction

  int t_sent, lat0 = -1, ntrig = 0;
  always @(posedge clk) if (rst_n) begin
    if (trig_sent) t_sent = cyc;
    if (p_trig[0]) begin
      ntrig++;
      checks++;
      if (lat0 < 0) lat0 = cyc - t_sent;
      else if (cyc - t_sent != lat0) begin failures++; $display("FAIL trigger latency"); end
      for (int p = 1; p < NC; p++) begin
        checks++;
        if (!p_trig[p]) begin failures++; $display("FAIL trigger not simultaneous"); end
      end
    end
  end

  initial begin
    trig_req = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1500) @(posedge clk);
    checks++;
    if (link[NC-1:0] != '1) begin failures++; $display("FAIL links down"); end
    packet(NC, 4'd0, 16'h0052, 16'h0000, 10, 1);   // local -> port 2, then switch port 5
    packet(NC, 4'd0, 16'h0001, 16'h0000, 3, 0);    // local -> port 1
    packet(2, 4'd3, 16'h0000, 16'h00FF, 8, NC);    // port 3 -> local device
    packet(0, 4'd1, 16'h0003, 16'h000F, 6, 2);     // port 1 -> port 3
    packet(NC, 4'd0, 16'h0009, 16'h0000, 4, -1);   // port 9 does not exist
    while (!all_done()) @(posedge clk);
    for (int t = 0; t < 5; t++) begin
      repeat ($urandom_range(20, 90)) @(negedge clk);
      trig_req = 1;
      @(negedge clk) trig_req = 0;
      repeat (120) @(negedge clk);
    end
    checks++;
    if (ntrig != 5) begin failures++; $display("FAIL %0d triggers", ntrig); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_data_rate -- payload data rate against packet size on three paths.
//
// The host's local device sends single packets of 4 to 4096 payload bytes and the
// time from the acceptance of SOP at the host to the arrival of EOP at the far
// local device is measured, for three paths:
//   host -> endpoint, directly (a host_node wired to an endpoint_node)
//   host -> switch local device (inside fiber_network)
//   host -> switch -> endpoint local device (inside fiber_network)
// The rate counts payload bytes only, as user data at a 150 MHz base clock:
// rate = 8 * bytes / (cycles / 150 MHz).  Checked: every packet arrives complete
// with the expected return address, the rate rises with the packet size, never
// exceeds the 40 Mbit/s line limit, comes within 0.5 % of it for 4096 bytes, and the
// two-hop path is never faster than the direct one (it has the longer delivery
// time).  Nothing is parameterised: all modules run at their default sizes.
module tb_data_rate;
  import fiber_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  always #1 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #8000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ network under test
  logic h_rx_valid, h_tx_valid, h_tx_ready, s_rx_valid, s_tx_ready, e_rx_valid, e_tx_ready;
  sym_t h_rx_sym, h_tx_sym, s_rx_sym, e_rx_sym;
  logic [6:0] hl_o, sl_o;
  logic [9:0] lines;
  logic [15:0] tdel [10];
  logic trig_sent, sma, fwait, fstop, l0, l1, l2, l3;

  initial for (int i = 0; i < 10; i++) tdel[i] = '0;

  fiber_network u_net (.clk, .host_rst_n(rst_n), .switch_rst_n(rst_n), .endpoint_rst_n(rst_n),
    .host_line_o(hl_o), .host_line_i(7'd0), .sw_line_o(sl_o), .sw_line_i(7'd0),
    .h_rx_valid_o(h_rx_valid), .h_rx_sym_o(h_rx_sym), .h_rx_ready_i(1'b1),
    .h_tx_valid_i(h_tx_valid), .h_tx_sym_i(h_tx_sym), .h_tx_ready_o(h_tx_ready),
    .trig_req_i(1'b0), .trig_sent_o(trig_sent),
    .s_rx_valid_o(s_rx_valid), .s_rx_sym_o(s_rx_sym), .s_rx_ready_i(1'b1),
    .s_tx_valid_i(1'b0), .s_tx_sym_i(SYM_IDLE_RDY), .s_tx_ready_o(s_tx_ready),
    .sma_trig_o(sma), .sw_fabric_wait_o(fwait), .sw_flow_stop_o(fstop),
    .e_rx_valid_o(e_rx_valid), .e_rx_sym_o(e_rx_sym), .e_rx_ready_i(1'b1),
    .e_tx_valid_i(1'b0), .e_tx_sym_i(SYM_IDLE_RDY), .e_tx_ready_o(e_tx_ready),
    .trig_en_i('0), .trig_delay_i(tdel), .trig_width_i(8'd1), .trig_lines_o(lines),
    .sw_up_link_o(l0), .ep_up_link_o(l1), .host_link_o(l2), .sw_ep_link_o(l3));

  // direct host -> endpoint pair
  logic [6:0] dh_line_o, dh_line_i, dh_link;
  logic de_line_o, d_rx_valid, d_tx_valid, d_tx_ready, de_rx_valid, de_tx_ready, de_trig, de_link;
  logic dh_rx_valid, dh_trig_sent;
  sym_t dh_rx_sym, d_tx_sym, de_rx_sym;
  logic [9:0] de_lines;

  always_comb begin
    dh_line_i    = '0;
    dh_line_i[0] = de_line_o;
  end

  host_node u_dh (.clk, .rst_n, .line_o(dh_line_o), .line_i(dh_line_i),
    .loc_rx_valid_o(dh_rx_valid), .loc_rx_sym_o(dh_rx_sym), .loc_rx_ready_i(1'b1),
    .loc_tx_valid_i(d_tx_valid), .loc_tx_sym_i(d_tx_sym), .loc_tx_ready_o(d_tx_ready),
    .trig_req_i(1'b0), .trig_sent_o(dh_trig_sent), .link_o(dh_link));

  endpoint_node u_de (.clk, .rst_n, .up_line_i(dh_line_o[0]), .up_line_o(de_line_o),
    .loc_rx_valid_o(de_rx_valid), .loc_rx_sym_o(de_rx_sym), .loc_rx_ready_i(1'b1),
    .loc_tx_valid_i(1'b0), .loc_tx_sym_i(SYM_IDLE_RDY), .loc_tx_ready_o(de_tx_ready),
    .trig_en_i('0), .trig_delay_i(tdel), .trig_width_i(8'd1), .trig_lines_o(de_lines),
    .trig_o(de_trig), .up_link_o(de_link));

  // ------------------------------------------------------------ senders
  sym_t hq [$], dq [$];
  initial begin
    h_tx_valid = 0; h_tx_sym = SYM_IDLE_RDY; d_tx_valid = 0; d_tx_sym = SYM_IDLE_RDY;
  end

  int t_start = -1;
  always @(posedge clk) begin
    if (h_tx_valid && h_tx_ready) begin
      if (is_sop(h_tx_sym)) t_start = cyc;
      void'(hq.pop_front());
    end
    if (d_tx_valid && d_tx_ready) begin
      if (is_sop(d_tx_sym)) t_start = cyc;
      void'(dq.pop_front());
    end
    h_tx_valid <= hq.size() > 0;
    h_tx_sym   <= hq.size() > 0 ? hq[0] : SYM_IDLE_RDY;
    d_tx_valid <= dq.size() > 0;
    d_tx_sym   <= dq.size() > 0 ? dq[0] : SYM_IDLE_RDY;
  end

  function automatic sym_t D(logic [7:0] v);
    return '{k: 1'b0, d: v};
  endfunction

  // ------------------------------------------------------------ receivers
  sym_t rx [$];
  int   t_end = -1;
  int   which = 0;  // 0 direct endpoint, 1 switch local, 2 endpoint via switch
  always @(posedge clk) begin
    logic v;
    sym_t s;
    v = (which == 0) ? de_rx_valid : (which == 1) ? s_rx_valid : e_rx_valid;
    s = (which == 0) ? de_rx_sym   : (which == 1) ? s_rx_sym   : e_rx_sym;
    if (rst_n && v) begin
      rx.push_back(s);
      if (is_eop(s)) t_end = cyc;
    end
  end

  localparam int NSIZE = 6;
  localparam int SIZES [NSIZE] = '{4, 16, 64, 256, 1024, 4096};
  real rate [3][NSIZE];

  task automatic run(int path, int bytes);
    logic [15:0] dst, src;
    sym_t p [$];
    int tmo;
    dst = (path == 0) ? 16'h0001 : (path == 1) ? 16'h0001 : 16'h0071;
    src = (path == 0) ? 16'h000F : (path == 1) ? 16'h000F : 16'h00FF;
    which = path;
    rx.delete();
    t_end = -1;
    t_start = -1;
    p = '{SYM_SOP, D(dst[7:0]), D(dst[15:8]), D(8'h00), D(8'h00)};
    for (int i = 0; i < bytes; i++) p.push_back(D(8'(i * 7 + bytes)));
    p.push_back(SYM_EOP);
    @(posedge clk);
    if (path == 0) foreach (p[i]) dq.push_back(p[i]);
    else           foreach (p[i]) hq.push_back(p[i]);
    tmo = 0;
    while (t_end < 0 && tmo < 40 * bytes + 5000) begin @(posedge clk); tmo++; end
    checks++;
    if (t_end < 0 || rx.size() != bytes + 6 || {rx[2].d, rx[1].d} != 16'h0000 ||
        {rx[4].d, rx[3].d} != src) begin
      failures++;
      $display("FAIL path %0d, %0d bytes: %0d symbols arrived", path, bytes, rx.size());
      rate[path][0] = 0.0;
      return;
    end
    for (int i = 0; i < bytes; i++) if (rx[5 + i].d != 8'(i * 7 + bytes)) begin
      failures++; $display("FAIL path %0d, %0d bytes: payload byte %0d", path, bytes, i); break;
    end
  endtask

  initial begin
    string name [3];
    name = '{"host -> endpoint        ", "host -> switch          ", "host -> switch -> endpoint"};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (!(l0 && l1 && l2 && l3 && de_link)) begin failures++; $display("FAIL links not up"); end
    for (int path = 0; path < 3; path++)
      for (int s = 0; s < NSIZE; s++) begin
        run(path, SIZES[s]);
        rate[path][s] = (t_end > t_start && t_start >= 0) ? 1200.0 * SIZES[s] / real'(t_end - t_start) : 0.0;
        repeat (200) @(posedge clk);
      end
    for (int path = 0; path < 3; path++) begin
      $display("info: %s  %6.2f %6.2f %6.2f %6.2f %6.2f %6.2f Mbit/s for 4..4096 bytes", name[path],
               rate[path][0], rate[path][1], rate[path][2], rate[path][3], rate[path][4], rate[path][5]);
      for (int s = 0; s < NSIZE; s++) begin
        checks++;
        if (rate[path][s] >= 40.0) begin failures++; $display("FAIL rate above the line limit"); end
        if (s > 0) begin
          checks++;
          if (rate[path][s] <= rate[path][s-1]) begin failures++; $display("FAIL rate does not rise with size"); end
        end
      end
      checks++;
      if (rate[path][NSIZE-1] < 39.8) begin failures++; $display("FAIL 4096-byte rate %0.2f", rate[path][NSIZE-1]); end
    end
    for (int s = 0; s < NSIZE; s++) begin
      checks++;
      if (rate[2][s] > rate[0][s]) begin failures++; $display("FAIL two hops faster than one at %0d bytes", SIZES[s]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

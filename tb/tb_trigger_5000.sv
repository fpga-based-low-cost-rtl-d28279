// tb_trigger_5000 -- 5000 global triggers through host, switch and endpoint.
//
// The host sends 5000 triggers at random intervals while packets stream from the
// host to the endpoint, so triggers land both between and inside packets.  After
// every 1000 triggers the switch and the endpoint are power-cycled with their
// resets released at random phases.  For every trigger the testbench measures the
// cycle count from the host's trigger load (trig_sent_o) to the rising edge of the
// switch's SMA output and of each of the 10 endpoint trigger lines.  Checked: every
// trigger arrives at all outputs, each latency is the same for all 5000 triggers,
// and line l rises exactly delay_l cycles after line 0 (delays 0, 37, 74, ...).
// All modules run at their default sizes.
module tb_trigger_5000;
  import fiber_pkg::*;

  localparam int N_TRIGGERS = 5000;

  logic clk = 0, h_rst = 0, s_rst = 0, e_rst = 0;
  int checks = 0, failures = 0, cyc = 0;

  always #1 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic h_rx_valid, h_tx_valid, h_tx_ready, s_rx_valid, s_tx_ready, e_rx_valid, e_tx_ready;
  sym_t h_rx_sym, h_tx_sym, s_rx_sym, e_rx_sym;
  logic [6:0] hl_o, sl_o;
  logic [9:0] lines, lines_q;
  logic [15:0] tdel [10];
  logic trig_req, trig_sent, sma, sma_q, fwait, fstop, l0, l1, l2, l3;

  initial for (int i = 0; i < 10; i++) tdel[i] = 16'(37 * i);

  fiber_network u_net (.clk, .host_rst_n(h_rst), .switch_rst_n(s_rst), .endpoint_rst_n(e_rst),
    .host_line_o(hl_o), .host_line_i(7'd0), .sw_line_o(sl_o), .sw_line_i(7'd0),
    .h_rx_valid_o(h_rx_valid), .h_rx_sym_o(h_rx_sym), .h_rx_ready_i(1'b1),
    .h_tx_valid_i(h_tx_valid), .h_tx_sym_i(h_tx_sym), .h_tx_ready_o(h_tx_ready),
    .trig_req_i(trig_req), .trig_sent_o(trig_sent),
    .s_rx_valid_o(s_rx_valid), .s_rx_sym_o(s_rx_sym), .s_rx_ready_i(1'b1),
    .s_tx_valid_i(1'b0), .s_tx_sym_i(SYM_IDLE_RDY), .s_tx_ready_o(s_tx_ready),
    .sma_trig_o(sma), .sw_fabric_wait_o(fwait), .sw_flow_stop_o(fstop),
    .e_rx_valid_o(e_rx_valid), .e_rx_sym_o(e_rx_sym), .e_rx_ready_i(1'b1),
    .e_tx_valid_i(1'b0), .e_tx_sym_i(SYM_IDLE_RDY), .e_tx_ready_o(e_tx_ready),
    .trig_en_i('1), .trig_delay_i(tdel), .trig_width_i(8'd3), .trig_lines_o(lines),
    .sw_up_link_o(l0), .ep_up_link_o(l1), .host_link_o(l2), .sw_ep_link_o(l3));

  // background traffic: packets of 20..60 bytes, host -> switch port 7 -> endpoint
  logic streaming = 0;
  int   pkt_bytes = 0, in_pkt_trigs = 0;
  logic e_in_pkt = 0;
  initial begin h_tx_valid = 0; h_tx_sym = SYM_IDLE_RDY; end
  always @(posedge clk) begin
    sym_t nxt;
    if (h_tx_valid && h_tx_ready) pkt_bytes++;
    if (!h_tx_valid || h_tx_ready) begin
      // next symbol of an endless train of packets, counted by pkt_bytes
      h_tx_valid <= streaming;
      h_tx_sym   <= SYM_IDLE_RDY;
      if (streaming) begin
        int k;
        k = pkt_bytes % 40;
        nxt = (k == 0) ? SYM_SOP : (k == 1) ? '{k: 1'b0, d: 8'h71} :
              (k <= 4) ? '{k: 1'b0, d: 8'h00} : (k == 39) ? SYM_EOP : '{k: 1'b0, d: 8'(k)};
        h_tx_sym <= nxt;
      end
    end
    if (e_rx_valid) e_in_pkt <= is_sop(e_rx_sym) ? 1'b1 : is_eop(e_rx_sym) ? 1'b0 : e_in_pkt;
  end

  // latency measurement
  int t_sent = -1, got_sma = 0, got_line [10];
  int ref_sma = -1, ref_line [10];
  bit measuring = 0;
  initial for (int l = 0; l < 10; l++) begin got_line[l] = 0; ref_line[l] = -1; end
  always @(posedge clk) begin
    sma_q   <= sma;
    lines_q <= lines;
    if (trig_sent) begin
      t_sent = cyc;
      if (e_in_pkt) in_pkt_trigs++;
    end
    if (measuring && sma && !sma_q) begin
      got_sma++;
      checks++;
      if (ref_sma < 0) ref_sma = cyc - t_sent;
      else if (cyc - t_sent != ref_sma) begin
        failures++; $display("FAIL SMA latency %0d, expected %0d", cyc - t_sent, ref_sma);
      end
    end
    for (int l = 0; l < 10; l++) if (measuring && lines[l] && !lines_q[l]) begin
      got_line[l]++;
      checks++;
      if (ref_line[l] < 0) ref_line[l] = cyc - t_sent;
      else if (cyc - t_sent != ref_line[l]) begin
        failures++; $display("FAIL line %0d latency %0d, expected %0d", l, cyc - t_sent, ref_line[l]);
      end
    end
  end

  initial begin
    trig_req = 0;
    repeat (3) @(posedge clk);
    h_rst = 1;
    repeat ($urandom_range(1, 40)) @(posedge clk);
    s_rst = 1;
    repeat ($urandom_range(1, 40)) @(posedge clk);
    e_rst = 1;
    repeat (3000) @(posedge clk);
    streaming = 1;
    measuring = 1;
    for (int t = 0; t < N_TRIGGERS; t++) begin
      if (t > 0 && t % 1000 == 0) begin
        repeat (2000) @(posedge clk);
        measuring = 0;
        streaming = 0;
        repeat (2000) @(posedge clk);
        @(negedge clk) s_rst = 0; e_rst = 0;
        repeat ($urandom_range(1, 60)) @(negedge clk);
        s_rst = 1;
        repeat ($urandom_range(1, 60)) @(negedge clk);
        e_rst = 1;
        repeat (3000) @(posedge clk);
        checks++;
        if (!(l0 && l1 && l2 && l3)) begin failures++; $display("FAIL links after power cycle"); end
        measuring = 1;
        streaming = 1;
      end
      // the last trigger's outputs are all seen 72 + 9 * 37 cycles later
      repeat ($urandom_range(420, 700)) @(negedge clk);
      trig_req = 1;
      @(negedge clk) trig_req = 0;
    end
    repeat (1000) @(posedge clk);
    $display("info: %0d triggers, %0d sent while a packet was arriving at the endpoint", N_TRIGGERS, in_pkt_trigs);
    $display("info: latency from trigger load: switch SMA %0d cycles, endpoint lines %0d .. %0d cycles",
             ref_sma, ref_line[0], ref_line[9]);
    checks++;
    if (got_sma != N_TRIGGERS) begin failures++; $display("FAIL %0d SMA pulses", got_sma); end
    for (int l = 0; l < 10; l++) begin
      checks += 2;
      if (got_line[l] != N_TRIGGERS) begin failures++; $display("FAIL %0d pulses on line %0d", got_line[l], l); end
      if (ref_line[l] - ref_line[0] != 37 * l) begin failures++; $display("FAIL line %0d offset", l); end
    end
    checks++;
    if (in_pkt_trigs == 0) begin failures++; $display("FAIL no trigger inside a packet"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

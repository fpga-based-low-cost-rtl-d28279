// endpoint_node -- network endpoint: one slave port, a local device at port address
// 0 and the configurable trigger unit.
//
// The endpoint is a leaf of the tree.  It uses the same router structure as a
// switch, reduced to two crossbar indices: 0 = local device (the user logic that
// processes payloads) and 1 = the upstream slave port (address fiber_pkg::UP_ADDR).
// A packet from the network whose Dst[0] is 0 is delivered to the local device with
// its source field extended by UP_ADDR, so the local device can answer by copying
// the received source address into the destination of its reply.  Packets from the
// local device are rewritten the same way and leave through the slave port.  The
// endpoint has no output queues (unlike the switch).
//
// A received trigger symbol drives trigger_unit, whose N_TRIG lines (10 in the
// paper) go to the stacked cards.  The configuration of the trigger unit (enable,
// delay per line, pulse width) is brought out as ports, because the paper does not
// describe the application protocol that writes it.
module endpoint_node
  import fiber_pkg::*;
#(
  parameter int unsigned RXBUF_DEPTH = 16,
  parameter int unsigned RXBUF_HI    = 8,
  parameter int unsigned RXBUF_LO    = 4,
  parameter int unsigned N_TRIG      = 10,
  parameter int unsigned DELAY_W     = 16
) (
  input  logic clk,
  input  logic rst_n,
  // slave port: Tx fiber in, Rx fiber out
  input  logic up_line_i,
  output logic up_line_o,
  // local device
  output logic loc_rx_valid_o,
  output sym_t loc_rx_sym_o,
  input  logic loc_rx_ready_i,
  input  logic loc_tx_valid_i,
  input  sym_t loc_tx_sym_i,
  output logic loc_tx_ready_o,
  // trigger unit
  input  logic [N_TRIG-1:0]  trig_en_i,
  input  logic [DELAY_W-1:0] trig_delay_i [N_TRIG],
  input  logic [7:0]         trig_width_i,
  output logic [N_TRIG-1:0]  trig_lines_o,
  output logic               trig_o,
  output logic               up_link_o
);

  logic       ir_valid [2];  sym_t ir_sym [2];  logic ir_ready [2];
  logic       xi_valid [2];  sym_t xi_sym [2];  logic xi_ready [2];
  logic [3:0] xi_dest  [2];
  logic [0:0] xi_sel   [2];
  logic       xi_drop  [2];
  logic       xo_valid [2];  sym_t xo_sym [2];  logic xo_ready [2];

  fiber_port #(.IS_MASTER(1'b0), .RXBUF_DEPTH(RXBUF_DEPTH), .RXBUF_HI(RXBUF_HI),
               .RXBUF_LO(RXBUF_LO)) u_up (
    .clk, .rst_n, .line_o(up_line_o), .line_i(up_line_i), .resync_i(1'b0),
    .tx_valid_i(xo_valid[1]), .tx_sym_i(xo_sym[1]), .tx_ready_o(xo_ready[1]),
    .trig_i(1'b0), .trig_sent_o(), .trig_o(trig_o),
    .rx_valid_o(ir_valid[1]), .rx_sym_o(ir_sym[1]), .rx_ready_i(ir_ready[1]),
    .link_up_o(up_link_o), .remote_ready_o(), .rx_busy_o(),
    .rx_sym_stb_o(), .code_err_o(), .ovf_o()
  );

  assign ir_valid[0]    = loc_tx_valid_i;
  assign ir_sym[0]      = loc_tx_sym_i;
  assign loc_tx_ready_o = ir_ready[0];

  for (genvar p = 0; p < 2; p++) begin : g_rw
    addr_rewrite #(.PORT_ID(p == 0 ? 4'd0 : UP_ADDR)) u_rw (
      .clk, .rst_n,
      .in_valid_i(ir_valid[p]), .in_sym_i(ir_sym[p]), .in_ready_o(ir_ready[p]),
      .out_valid_o(xi_valid[p]), .out_sym_o(xi_sym[p]), .out_dest_o(xi_dest[p]),
      .out_ready_i(xi_ready[p])
    );
    assign xi_sel[p]  = (xi_dest[p] == UP_ADDR);
    assign xi_drop[p] = (xi_dest[p] != 4'd0) && (xi_dest[p] != UP_ADDR);
  end

  pkt_crossbar #(.N_IN(2), .N_OUT(2)) u_xbar (
    .clk, .rst_n,
    .in_valid_i(xi_valid), .in_sym_i(xi_sym), .in_sel_i(xi_sel), .in_drop_i(xi_drop),
    .in_ready_o(xi_ready), .in_wait_o(),
    .out_valid_o(xo_valid), .out_sym_o(xo_sym), .out_ready_i(xo_ready)
  );

  assign loc_rx_valid_o = xo_valid[0];
  assign loc_rx_sym_o   = xo_sym[0];
  assign xo_ready[0]    = loc_rx_ready_i;

  trigger_unit #(.N_LINES(N_TRIG), .DELAY_W(DELAY_W), .WIDTH_W(8)) u_trig (
    .clk, .rst_n, .trig_i(trig_o), .en_i(trig_en_i), .delay_i(trig_delay_i),
    .width_i(trig_width_i), .trig_o(trig_lines_o)
  );

endmodule

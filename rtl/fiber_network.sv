// fiber_network -- host, switch and endpoint joined by fiber pairs, as in the
// paper's test setup (host -> switch -> endpoint).
//
// The host's master port 1 drives the switch's upstream slave port; the switch's
// master port EP_PORT drives the endpoint's slave port.  Each "fiber" is a plain
// wire here: the optical transmitters and receivers, and the PLLs that recover the
// clock in the switch and the endpoint, are outside the RTL.  The whole network
// therefore runs on one clock, the host's 150 MHz base clock, which is what the
// recovered clocks are once their PLLs have locked.  Every device has its own reset
// so that power-cycling a single device can be exercised.
//
// The remaining host and switch master ports are brought out as fiber line pins so
// that more switches or endpoints can be attached.  The local devices of all three
// nodes (host processor side, switch virtual interface, endpoint user logic) are
// symbol stream ports, and the endpoint's trigger configuration is an input.
//
// Packet addressing example: the host's local device reaches the endpoint with
// destination nibbles Dst[0] = 1 (host port), Dst[1] = EP_PORT (switch port),
// Dst[2] = 0 (endpoint local device); the endpoint receives source nibbles
// Src[0] = 15, Src[1] = 15, Src[2] = 0, which is the route back.
module fiber_network
  import fiber_pkg::*;
#(
  parameter int unsigned HOST_PORTS  = 7,
  parameter int unsigned SW_DOWN     = 7,
  parameter int unsigned EP_PORT     = 7,
  parameter int unsigned RXBUF_DEPTH = 16,
  parameter int unsigned N_TRIG      = 10
) (
  input  logic clk,
  input  logic host_rst_n,
  input  logic switch_rst_n,
  input  logic endpoint_rst_n,
  // spare fiber ports
  output logic [HOST_PORTS-1:0] host_line_o,
  input  logic [HOST_PORTS-1:0] host_line_i,
  output logic [SW_DOWN-1:0]    sw_line_o,
  input  logic [SW_DOWN-1:0]    sw_line_i,
  // host local device (processor side)
  output logic h_rx_valid_o,
  output sym_t h_rx_sym_o,
  input  logic h_rx_ready_i,
  input  logic h_tx_valid_i,
  input  sym_t h_tx_sym_i,
  output logic h_tx_ready_o,
  input  logic trig_req_i,
  output logic trig_sent_o,
  // switch local device
  output logic s_rx_valid_o,
  output sym_t s_rx_sym_o,
  input  logic s_rx_ready_i,
  input  logic s_tx_valid_i,
  input  sym_t s_tx_sym_i,
  output logic s_tx_ready_o,
  output logic sma_trig_o,
  output logic sw_fabric_wait_o,
  output logic sw_flow_stop_o,
  // endpoint local device and trigger unit
  output logic e_rx_valid_o,
  output sym_t e_rx_sym_o,
  input  logic e_rx_ready_i,
  input  logic e_tx_valid_i,
  input  sym_t e_tx_sym_i,
  output logic e_tx_ready_o,
  input  logic [N_TRIG-1:0] trig_en_i,
  input  logic [15:0]       trig_delay_i [N_TRIG],
  input  logic [7:0]        trig_width_i,
  output logic [N_TRIG-1:0] trig_lines_o,
  // link status
  output logic sw_up_link_o,
  output logic ep_up_link_o,
  output logic host_link_o,
  output logic sw_ep_link_o
);

  logic [HOST_PORTS-1:0] h_line_o, h_line_i, h_link;
  logic [SW_DOWN-1:0]    s_line_o, s_line_i, s_link;
  logic s_up_o, e_up_o;

  host_node #(.N_PORTS(HOST_PORTS), .RXBUF_DEPTH(RXBUF_DEPTH)) u_host (
    .clk, .rst_n(host_rst_n), .line_o(h_line_o), .line_i(h_line_i),
    .loc_rx_valid_o(h_rx_valid_o), .loc_rx_sym_o(h_rx_sym_o), .loc_rx_ready_i(h_rx_ready_i),
    .loc_tx_valid_i(h_tx_valid_i), .loc_tx_sym_i(h_tx_sym_i), .loc_tx_ready_o(h_tx_ready_o),
    .trig_req_i, .trig_sent_o, .link_o(h_link)
  );

  switch_node #(.N_DOWN(SW_DOWN), .RXBUF_DEPTH(RXBUF_DEPTH)) u_switch (
    .clk, .rst_n(switch_rst_n), .up_line_i(h_line_o[0]), .up_line_o(s_up_o),
    .dn_line_o(s_line_o), .dn_line_i(s_line_i),
    .loc_rx_valid_o(s_rx_valid_o), .loc_rx_sym_o(s_rx_sym_o), .loc_rx_ready_i(s_rx_ready_i),
    .loc_tx_valid_i(s_tx_valid_i), .loc_tx_sym_i(s_tx_sym_i), .loc_tx_ready_o(s_tx_ready_o),
    .trig_o(), .sma_trig_o, .up_link_o(sw_up_link_o), .dn_link_o(s_link),
    .fabric_wait_o(sw_fabric_wait_o), .flow_stop_o(sw_flow_stop_o)
  );

  endpoint_node #(.RXBUF_DEPTH(RXBUF_DEPTH), .N_TRIG(N_TRIG), .DELAY_W(16)) u_ep (
    .clk, .rst_n(endpoint_rst_n), .up_line_i(s_line_o[EP_PORT-1]), .up_line_o(e_up_o),
    .loc_rx_valid_o(e_rx_valid_o), .loc_rx_sym_o(e_rx_sym_o), .loc_rx_ready_i(e_rx_ready_i),
    .loc_tx_valid_i(e_tx_valid_i), .loc_tx_sym_i(e_tx_sym_i), .loc_tx_ready_o(e_tx_ready_o),
    .trig_en_i, .trig_delay_i, .trig_width_i, .trig_lines_o, .trig_o(),
    .up_link_o(ep_up_link_o)
  );

  // fiber wiring: host port 1 <-> switch upstream, switch port EP_PORT <-> endpoint
  always_comb begin
    h_line_i = host_line_i;
    h_line_i[0] = s_up_o;
    s_line_i = sw_line_i;
    s_line_i[EP_PORT-1] = e_up_o;
    host_line_o = h_line_o;
    host_line_o[0] = 1'b0;
    sw_line_o = s_line_o;
    sw_line_o[EP_PORT-1] = 1'b0;
  end

  assign host_link_o  = h_link[0];
  assign sw_ep_link_o = s_link[EP_PORT-1];

endmodule

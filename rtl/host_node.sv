// host_node -- fiber side of the network host (the tree root).
//
// The host has only master ports; it supplies the network clock (its base clock
// drives every Tx fiber) and is the only device that starts trigger symbols.  Port
// address 0 is the host's local device: the packet interface towards the processor
// that bridges Ethernet to the fiber network (the processor and its software are
// not part of this RTL).  Addresses 1..N_PORTS are the master ports.  As in every
// device, packets pass addr_rewrite and a pkt_crossbar, so a packet the processor
// sends with destination {.., Dst[1], Dst[0]} leaves on port Dst[0] with its
// destination shifted and source address 0 recorded, and replies arrive at the
// local device carrying the full return path.
//
// trig_req_i (one cycle) requests a global trigger; every master port sends the
// trigger symbol in its next symbol slot.  All master ports leave reset together
// and therefore share one symbol framing, so trig_sent_o (the load cycle of the
// trigger symbol) is common to all ports; it marks the reference point from which
// trigger latencies are measured.  N_PORTS = 7 follows the seven links of the host
// in the paper's planned network figure; the paper does not state a port count.
module host_node
  import fiber_pkg::*;
#(
  parameter int unsigned N_PORTS     = 7,
  parameter int unsigned RXBUF_DEPTH = 16,
  parameter int unsigned RXBUF_HI    = 8,
  parameter int unsigned RXBUF_LO    = 4
) (
  input  logic clk,
  input  logic rst_n,
  // master ports: Tx fiber out, Rx fiber in
  output logic [N_PORTS-1:0] line_o,
  input  logic [N_PORTS-1:0] line_i,
  // local device (processor side, address 0)
  output logic loc_rx_valid_o,
  output sym_t loc_rx_sym_o,
  input  logic loc_rx_ready_i,
  input  logic loc_tx_valid_i,
  input  sym_t loc_tx_sym_i,
  output logic loc_tx_ready_o,
  // global trigger
  input  logic trig_req_i,
  output logic trig_sent_o,
  output logic [N_PORTS-1:0] link_o
);

  localparam int unsigned NP = N_PORTS + 1;
  localparam int unsigned SW = $clog2(NP);

  logic          ir_valid [NP];  sym_t ir_sym [NP];  logic ir_ready [NP];
  logic          xi_valid [NP];  sym_t xi_sym [NP];  logic xi_ready [NP];
  logic [3:0]    xi_dest  [NP];
  logic [SW-1:0] xi_sel   [NP];
  logic          xi_drop  [NP];
  logic          xo_valid [NP];  sym_t xo_sym [NP];  logic xo_ready [NP];
  logic [N_PORTS-1:0] sent;

  for (genvar p = 1; p <= N_PORTS; p++) begin : g_port
    fiber_port #(.IS_MASTER(1'b1), .RXBUF_DEPTH(RXBUF_DEPTH), .RXBUF_HI(RXBUF_HI),
                 .RXBUF_LO(RXBUF_LO)) u_port (
      .clk, .rst_n, .line_o(line_o[p-1]), .line_i(line_i[p-1]), .resync_i(1'b0),
      .tx_valid_i(xo_valid[p]), .tx_sym_i(xo_sym[p]), .tx_ready_o(xo_ready[p]),
      .trig_i(trig_req_i), .trig_sent_o(sent[p-1]), .trig_o(),
      .rx_valid_o(ir_valid[p]), .rx_sym_o(ir_sym[p]), .rx_ready_i(ir_ready[p]),
      .link_up_o(link_o[p-1]), .remote_ready_o(), .rx_busy_o(),
      .rx_sym_stb_o(), .code_err_o(), .ovf_o()
    );
  end

  assign trig_sent_o = sent[0];

  assign ir_valid[0]    = loc_tx_valid_i;
  assign ir_sym[0]      = loc_tx_sym_i;
  assign loc_tx_ready_o = ir_ready[0];

  for (genvar p = 0; p < NP; p++) begin : g_rw
    addr_rewrite #(.PORT_ID(4'(p))) u_rw (
      .clk, .rst_n,
      .in_valid_i(ir_valid[p]), .in_sym_i(ir_sym[p]), .in_ready_o(ir_ready[p]),
      .out_valid_o(xi_valid[p]), .out_sym_o(xi_sym[p]), .out_dest_o(xi_dest[p]),
      .out_ready_i(xi_ready[p])
    );
    assign xi_sel[p]  = SW'(xi_dest[p]);
    assign xi_drop[p] = int'(xi_dest[p]) > int'(N_PORTS);
  end

  pkt_crossbar #(.N_IN(NP), .N_OUT(NP)) u_xbar (
    .clk, .rst_n,
    .in_valid_i(xi_valid), .in_sym_i(xi_sym), .in_sel_i(xi_sel), .in_drop_i(xi_drop),
    .in_ready_o(xi_ready), .in_wait_o(),
    .out_valid_o(xo_valid), .out_sym_o(xo_sym), .out_ready_i(xo_ready)
  );

  assign loc_rx_valid_o = xo_valid[0];
  assign loc_rx_sym_o   = xo_sym[0];
  assign xo_ready[0]    = loc_rx_ready_i;

endmodule

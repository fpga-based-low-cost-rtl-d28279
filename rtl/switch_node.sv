// switch_node -- network switch: one upstream slave port, N_DOWN downstream master
// ports and a local device at port address 0.
//
// Port addresses: 0 is the switch's own local device (the paper's "virtual
// interface" that makes a switch usable like an endpoint), 1..N_DOWN are the
// downstream master ports and fiber_pkg::UP_ADDR (15) is the upstream slave port.
// Every packet that enters (from a fiber or from the local device) passes an
// addr_rewrite stage carrying that input's address, which picks the output from
// Dst[0] and rewrites the address fields; pkt_crossbar connects it to the output.
// Packets for the fibers then wait in a small output queue per port (the switch's
// extra queues in the switching fabric) before the port serializes them.  Packets
// for an address the switch does not have are dropped.
//
// Clock and trigger: the switch runs on the clock recovered from its upstream port.
// Once that port is symbol aligned, the transmit framing of all downstream ports is
// restarted on a received symbol boundary, so that every downstream symbol starts a
// fixed number of cycles after an upstream symbol (this design's way to make the
// paper's "constant delay" forwarding hold across power cycles).  A received trigger
// symbol is handed to all downstream ports, which send it in their very next symbol
// slot, and is also shown as a pulse of SMA_PULSE cycles on sma_trig_o (the
// debugging SMA output).
//
// Timing: trigger forwarding delay is constant; see fiber_port for link latency.
module switch_node
  import fiber_pkg::*;
#(
  parameter int unsigned N_DOWN      = 7,
  parameter int unsigned RXBUF_DEPTH = 16,
  parameter int unsigned RXBUF_HI    = 8,
  parameter int unsigned RXBUF_LO    = 4,
  parameter int unsigned TXQ_DEPTH   = 8,
  parameter int unsigned SMA_PULSE   = 16
) (
  input  logic clk,
  input  logic rst_n,
  // upstream slave port: Tx fiber in, Rx fiber out
  input  logic up_line_i,
  output logic up_line_o,
  // downstream master ports: Tx fiber out, Rx fiber in
  output logic [N_DOWN-1:0] dn_line_o,
  input  logic [N_DOWN-1:0] dn_line_i,
  // local device (port address 0)
  output logic loc_rx_valid_o,
  output sym_t loc_rx_sym_o,
  input  logic loc_rx_ready_i,
  input  logic loc_tx_valid_i,
  input  sym_t loc_tx_sym_i,
  output logic loc_tx_ready_o,
  // trigger and status
  output logic              trig_o,
  output logic              sma_trig_o,
  output logic              up_link_o,
  output logic [N_DOWN-1:0] dn_link_o,
  output logic              fabric_wait_o,
  output logic              flow_stop_o
);

  localparam int unsigned NP = N_DOWN + 2;  // local, downstream..., upstream
  localparam int unsigned UP = N_DOWN + 1;
  localparam int unsigned SW = $clog2(NP);

  // per crossbar index: stream from the input side, stream to the output side
  logic          ir_valid [NP];  sym_t ir_sym [NP];  logic ir_ready [NP];
  logic          xi_valid [NP];  sym_t xi_sym [NP];  logic xi_ready [NP];
  logic [3:0]    xi_dest  [NP];
  logic [SW-1:0] xi_sel   [NP];
  logic          xi_drop  [NP];
  logic          xi_wait  [NP];
  logic          xo_valid [NP];  sym_t xo_sym [NP];  logic xo_ready [NP];
  logic          tq_valid [NP];  sym_t tq_sym [NP];  logic tq_ready [NP];

  logic up_trig, up_stb, resync_q, resync_done_q;
  logic [NP-1:0] remote_rdy;

  // ------------------------------------------------------------- fiber ports
  fiber_port #(.IS_MASTER(1'b0), .RXBUF_DEPTH(RXBUF_DEPTH), .RXBUF_HI(RXBUF_HI),
               .RXBUF_LO(RXBUF_LO)) u_up (
    .clk, .rst_n, .line_o(up_line_o), .line_i(up_line_i), .resync_i(1'b0),
    .tx_valid_i(tq_valid[UP]), .tx_sym_i(tq_sym[UP]), .tx_ready_o(tq_ready[UP]),
    .trig_i(1'b0), .trig_sent_o(), .trig_o(up_trig),
    .rx_valid_o(ir_valid[UP]), .rx_sym_o(ir_sym[UP]), .rx_ready_i(ir_ready[UP]),
    .link_up_o(up_link_o), .remote_ready_o(remote_rdy[UP]), .rx_busy_o(),
    .rx_sym_stb_o(up_stb), .code_err_o(), .ovf_o()
  );

  for (genvar p = 1; p <= N_DOWN; p++) begin : g_dn
    fiber_port #(.IS_MASTER(1'b1), .RXBUF_DEPTH(RXBUF_DEPTH), .RXBUF_HI(RXBUF_HI),
                 .RXBUF_LO(RXBUF_LO)) u_dn (
      .clk, .rst_n, .line_o(dn_line_o[p-1]), .line_i(dn_line_i[p-1]), .resync_i(resync_q),
      .tx_valid_i(tq_valid[p]), .tx_sym_i(tq_sym[p]), .tx_ready_o(tq_ready[p]),
      .trig_i(up_trig), .trig_sent_o(), .trig_o(),
      .rx_valid_o(ir_valid[p]), .rx_sym_o(ir_sym[p]), .rx_ready_i(ir_ready[p]),
      .link_up_o(dn_link_o[p-1]), .remote_ready_o(remote_rdy[p]), .rx_busy_o(),
      .rx_sym_stb_o(), .code_err_o(), .ovf_o()
    );
  end

  // local device as crossbar index 0
  assign ir_valid[0]    = loc_tx_valid_i;
  assign ir_sym[0]      = loc_tx_sym_i;
  assign loc_tx_ready_o = ir_ready[0];
  assign remote_rdy[0]  = 1'b1;

  // ------------------------------------------------------------- routing
  function automatic logic [3:0] port_addr(int unsigned idx);
    return (idx == UP) ? UP_ADDR : 4'(idx);
  endfunction

  for (genvar p = 0; p < NP; p++) begin : g_rw
    addr_rewrite #(.PORT_ID(port_addr(p))) u_rw (
      .clk, .rst_n,
      .in_valid_i(ir_valid[p]), .in_sym_i(ir_sym[p]), .in_ready_o(ir_ready[p]),
      .out_valid_o(xi_valid[p]), .out_sym_o(xi_sym[p]), .out_dest_o(xi_dest[p]),
      .out_ready_i(xi_ready[p])
    );
    always_comb begin
      xi_drop[p] = 1'b0;
      if (xi_dest[p] == UP_ADDR)                  xi_sel[p] = SW'(UP);
      else if (int'(xi_dest[p]) <= int'(N_DOWN))  xi_sel[p] = SW'(xi_dest[p]);
      else begin
        xi_sel[p]  = '0;
        xi_drop[p] = 1'b1;
      end
    end
  end

  pkt_crossbar #(.N_IN(NP), .N_OUT(NP)) u_xbar (
    .clk, .rst_n,
    .in_valid_i(xi_valid), .in_sym_i(xi_sym), .in_sel_i(xi_sel), .in_drop_i(xi_drop),
    .in_ready_o(xi_ready), .in_wait_o(xi_wait),
    .out_valid_o(xo_valid), .out_sym_o(xo_sym), .out_ready_i(xo_ready)
  );

  // local device output: straight from the crossbar
  assign loc_rx_valid_o = xo_valid[0];
  assign loc_rx_sym_o   = xo_sym[0];
  assign xo_ready[0]    = loc_rx_ready_i;
  assign tq_valid[0]    = 1'b0;
  assign tq_sym[0]      = SYM_IDLE_RDY;

  // output queues towards the fiber ports
  for (genvar p = 1; p < NP; p++) begin : g_txq
    logic full, empty;
    sync_fifo #(.WIDTH(SYM_W), .DEPTH(TXQ_DEPTH)) u_q (
      .clk, .rst_n, .push_i(xo_valid[p] && !full), .din_i(xo_sym[p]),
      .pop_i(tq_ready[p] && !empty), .dout_o(tq_sym[p]), .empty_o(empty),
      .full_o(full), .count_o()
    );
    assign xo_ready[p] = !full;
    assign tq_valid[p] = !empty;
  end

  // ------------------------------------------------------------- trigger & sync
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resync_q      <= 1'b0;
      resync_done_q <= 1'b0;
    end else begin
      resync_q <= 1'b0;
      if (!up_link_o) resync_done_q <= 1'b0;
      else if (up_stb && !resync_done_q) begin
        resync_q      <= 1'b1;
        resync_done_q <= 1'b1;
      end
    end
  end

  logic [$clog2(SMA_PULSE+1)-1:0] sma_cnt_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       sma_cnt_q <= '0;
    else if (up_trig) sma_cnt_q <= SMA_PULSE[$bits(sma_cnt_q)-1:0];
    else if (sma_cnt_q != '0) sma_cnt_q <= sma_cnt_q - 1'b1;

  assign sma_trig_o = (sma_cnt_q != '0);
  assign trig_o     = up_trig;

  always_comb begin
    fabric_wait_o = 1'b0;
    flow_stop_o   = 1'b0;
    for (int p = 0; p < NP; p++) begin
      fabric_wait_o |= xi_wait[p];
      flow_stop_o   |= tq_valid[p] && !remote_rdy[p];
    end
  end

endmodule

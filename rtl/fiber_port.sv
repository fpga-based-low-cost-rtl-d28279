// fiber_port -- one fiber interface of a host, switch or endpoint.
//
// A port joins a pair of plastic fibers to the packet fabric.  IS_MASTER selects the
// side of the link:
//   master port  sends on the Tx fiber with the self-clocking 1/data/0 bit format
//                (txf_serializer) and receives the NRZ Rx fiber by oversampling
//                (rxf_oversampler);
//   slave port   receives the Tx fiber (txf_sampler, standing in for the recovered
//                clock) and sends NRZ on the Rx fiber (rxf_serializer).
// Both sides use 8b/10b coding (enc_8b10b / dec_8b10b) and comma alignment.
//
// Transmit symbol choice, made once per symbol (every 30 cycles), in priority order:
//   1. trigger symbol, if one was requested (trig_i) -- it may be sent at any time,
//      also inside a packet, as the paper requires;
//   2. a flow-control idle, if this port's receive-buffer state changed since the
//      last idle was sent (this design's choice, so that the state gets through
//      even while data flows without pauses);
//   3. the next packet symbol (SOP, data, EOP) from tx_*, if the far end last
//      signalled "ready to receive";
//   4. otherwise an idle: K.28.5 "ready" or K.28.1 "not ready".
// Receive side: trigger symbols produce a trig_o pulse and are not buffered; idles
// update remote_ready_o; packet symbols enter a receive buffer of RXBUF_DEPTH
// entries.  The "not ready" state is entered when the buffer holds RXBUF_HI entries
// or more and left when it holds RXBUF_LO or fewer (hysteresis, as the paper
// suggests; the levels are this design's choice).
//
// Timing: a trigger request in the cycle of a symbol load goes out with that load;
// trig_sent_o marks the load cycle of a trigger symbol.  From the start of a symbol
// on the line to trig_o at the far end the latency is fixed (35 cycles on a
// master-to-slave link), which makes trigger delays deterministic.
// resync_i (master only) restarts the transmit symbol framing.
module fiber_port
  import fiber_pkg::*;
#(
  parameter bit          IS_MASTER   = 1'b1,
  parameter int unsigned RXBUF_DEPTH = 16,
  parameter int unsigned RXBUF_HI    = 8,
  parameter int unsigned RXBUF_LO    = 4
) (
  input  logic clk,
  input  logic rst_n,
  // fiber side
  output logic line_o,
  input  logic line_i,
  input  logic resync_i,
  // packet symbols to send
  input  logic tx_valid_i,
  input  sym_t tx_sym_i,
  output logic tx_ready_o,
  // trigger
  input  logic trig_i,
  output logic trig_sent_o,
  output logic trig_o,
  // received packet symbols
  output logic rx_valid_o,
  output sym_t rx_sym_o,
  input  logic rx_ready_i,
  // status
  output logic link_up_o,
  output logic remote_ready_o,
  output logic rx_busy_o,
  output logic rx_sym_stb_o,
  output logic code_err_o,
  output logic ovf_o
);

  // ------------------------------------------------------------------ transmit
  logic       load;
  logic [9:0] code;
  sym_t       tx_sel;
  logic       trig_pend_q, fc_adv_q;
  logic       send_trig, send_fc, send_data;

  always_comb begin
    send_trig = trig_pend_q || trig_i;
    send_fc   = !send_trig && (fc_adv_q != rx_busy_o);
    send_data = !send_trig && !send_fc && remote_ready_o && tx_valid_i;
    if (send_trig)      tx_sel = SYM_TRIG;
    else if (send_data) tx_sel = tx_sym_i;
    else if (rx_busy_o) tx_sel = SYM_IDLE_BUSY;
    else                tx_sel = SYM_IDLE_RDY;
  end

  assign tx_ready_o  = load && !send_trig && !send_fc && remote_ready_o;
  assign trig_sent_o = load && send_trig;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_pend_q <= 1'b0;
      fc_adv_q    <= 1'b0;
    end else begin
      if (load && send_trig) trig_pend_q <= 1'b0;
      else if (trig_i)       trig_pend_q <= 1'b1;
      if (load && !send_trig) fc_adv_q <= rx_busy_o;
    end
  end

  enc_8b10b u_enc (
    .clk, .rst_n, .load, .sym_i(tx_sel), .code_o(code), .rd_o(), .kerr_o()
  );

  // ------------------------------------------------------------------ bit level
  logic rbit, rbit_valid, bit_lock;

  if (IS_MASTER) begin : g_master
    txf_serializer u_ser (
      .clk, .rst_n, .resync_i, .code_i(code), .load_o(load), .line_o
    );
    rxf_oversampler u_rx (
      .clk, .rst_n, .line_i, .bit_o(rbit), .bit_valid_o(rbit_valid)
    );
    assign bit_lock = 1'b1;
  end else begin : g_slave
    rxf_serializer u_ser (
      .clk, .rst_n, .code_i(code), .load_o(load), .line_o
    );
    txf_sampler u_rx (
      .clk, .rst_n, .line_i, .bit_o(rbit), .bit_valid_o(rbit_valid), .locked_o(bit_lock)
    );
  end

  // ------------------------------------------------------------------ receive
  logic [9:0] rcode;
  logic       rcode_valid, aligned;
  sym_t       dsym;
  logic       derr;

  comma_align u_align (
    .clk, .rst_n, .enable_i(bit_lock), .bit_i(rbit), .bit_valid_i(rbit_valid),
    .code_o(rcode), .code_valid_o(rcode_valid), .aligned_o(aligned), .realign_o()
  );

  dec_8b10b u_dec (.code_i(rcode), .sym_o(dsym), .err_o(derr));

  logic push, full, empty;
  logic [$clog2(RXBUF_DEPTH+1)-1:0] level;

  assign push = rcode_valid && !derr && dsym != SYM_TRIG &&
                dsym != SYM_IDLE_RDY && dsym != SYM_IDLE_BUSY && !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_o         <= 1'b0;
      remote_ready_o <= 1'b0;
      rx_busy_o      <= 1'b0;
      code_err_o     <= 1'b0;
      ovf_o          <= 1'b0;
      rx_sym_stb_o   <= 1'b0;
    end else begin
      rx_sym_stb_o <= rcode_valid;
      trig_o       <= rcode_valid && !derr && dsym == SYM_TRIG;
      code_err_o   <= rcode_valid && derr;
      ovf_o        <= rcode_valid && !derr && full && dsym != SYM_TRIG &&
                      dsym != SYM_IDLE_RDY && dsym != SYM_IDLE_BUSY;
      if (!aligned)                                   remote_ready_o <= 1'b0;
      else if (rcode_valid && dsym == SYM_IDLE_RDY)   remote_ready_o <= 1'b1;
      else if (rcode_valid && dsym == SYM_IDLE_BUSY)  remote_ready_o <= 1'b0;
      if (level >= RXBUF_HI[$bits(level)-1:0])        rx_busy_o <= 1'b1;
      else if (level <= RXBUF_LO[$bits(level)-1:0])   rx_busy_o <= 1'b0;
    end
  end

  sync_fifo #(.WIDTH(SYM_W), .DEPTH(RXBUF_DEPTH)) u_rxbuf (
    .clk, .rst_n, .push_i(push), .din_i(dsym), .pop_i(rx_ready_i && !empty),
    .dout_o(rx_sym_o), .empty_o(empty), .full_o(full), .count_o(level)
  );

  assign rx_valid_o = !empty;
  assign link_up_o  = aligned;

endmodule

// pkt_crossbar -- packet switching fabric with per-output round-robin arbitration.
//
// N_IN symbol streams, each presenting whole packets (SOP ... EOP) together with the
// index of the output they are for, are connected to N_OUT output streams.  An idle
// output grants the next input (round robin from the last winner) whose head symbol
// is an SOP for it; the connection then holds, one symbol per cycle as the output
// accepts them, until the EOP has passed.  Packets are never interleaved on an
// output, so after the 2-byte header decision the payload streams straight through.
// An input flagged in_drop_i (no output for its address) is drained and discarded.
// The paper names "packet arbitration" in the switch without describing it; round
// robin with packet-long grants is this design's choice.
//
// Interface: in_sel_i[i] is the output index of input i; in_wait_o[i] shows that
// input i has a symbol but is held back (output taken by another input, or output
// not ready).  Timing: one cycle from SOP at an input to the grant, then zero-latency
// pass-through.
module pkt_crossbar
  import fiber_pkg::*;
#(
  parameter int unsigned N_IN  = 3,
  parameter int unsigned N_OUT = 3,
  localparam int unsigned SW   = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned IW   = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid_i [N_IN],
  input  sym_t          in_sym_i   [N_IN],
  input  logic [SW-1:0] in_sel_i   [N_IN],
  input  logic          in_drop_i  [N_IN],
  output logic          in_ready_o [N_IN],
  output logic          in_wait_o  [N_IN],
  output logic          out_valid_o [N_OUT],
  output sym_t          out_sym_o   [N_OUT],
  input  logic          out_ready_i [N_OUT]
);

  logic          busy_q  [N_OUT];
  logic [IW-1:0] grant_q [N_OUT];
  logic [IW-1:0] last_q  [N_OUT];

  // connection: outputs read the granted input, inputs get the ready of their output
  always_comb begin
    for (int i = 0; i < N_IN; i++) in_ready_o[i] = in_drop_i[i] && in_valid_i[i];
    for (int o = 0; o < N_OUT; o++) begin
      out_valid_o[o] = busy_q[o] && in_valid_i[grant_q[o]];
      out_sym_o[o]   = in_sym_i[grant_q[o]];
      if (busy_q[o]) in_ready_o[grant_q[o]] = out_ready_i[o];
    end
    for (int i = 0; i < N_IN; i++) in_wait_o[i] = in_valid_i[i] && !in_ready_o[i];
  end

  // n-th input after the last winner, wrapping around
  function automatic int rr_idx(logic [IW-1:0] last, int n);
    return (int'(last) + n) % N_IN;
  endfunction

  // input i holds the SOP of a packet for output o
  function automatic logic requests(int i, int o);
    return in_valid_i[i] && !in_drop_i[i] && int'(in_sel_i[i]) == o && is_sop(in_sym_i[i]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) begin
        busy_q[o]  <= 1'b0;
        grant_q[o] <= '0;
        last_q[o]  <= IW'(N_IN - 1);
      end
    end else begin
      for (int o = 0; o < N_OUT; o++) begin
        if (busy_q[o]) begin
          if (in_valid_i[grant_q[o]] && out_ready_i[o] && is_eop(in_sym_i[grant_q[o]]))
            busy_q[o] <= 1'b0;
        end else begin
          // round robin: first requester after the last winner
          for (int n = N_IN; n >= 1; n--) begin
            if (requests(rr_idx(last_q[o], n), o)) begin
              busy_q[o]  <= 1'b1;
              grant_q[o] <= IW'(rr_idx(last_q[o], n));
              last_q[o]  <= IW'(rr_idx(last_q[o], n));
            end
          end
        end
      end
    end
  end

endmodule

// trigger_unit -- configurable trigger outputs of an endpoint.
//
// The endpoint drives N_LINES trigger lines (10 on the paper's PC/104-like stack
// connectors).  When a trigger symbol arrives from the network (trig_i pulse), every
// enabled line waits its own programmed delay in base clock cycles and then emits a
// pulse of width_i cycles.  Because the trigger symbol reaches each endpoint after a
// constant, measurable network latency, per-line delays let triggers at different
// endpoints be aligned, which is how the paper proposes to use "high frequency
// counters".  The paper names the unit as configurable but does not describe it;
// delay counters per line with a shared pulse width are this design's choice.
//
// Interface: en_i / delay_i[line] / width_i are static configuration inputs;
// trig_o[line] is registered.  Timing: line l goes high delay_i[l] + 1 cycles after
// the cycle in which trig_i is high, for max(width_i, 1) cycles.  A new trigger
// restarts a line that is still busy.
module trigger_unit #(
  parameter int unsigned N_LINES = 10,
  parameter int unsigned DELAY_W = 16,
  parameter int unsigned WIDTH_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               trig_i,
  input  logic [N_LINES-1:0] en_i,
  input  logic [DELAY_W-1:0] delay_i [N_LINES],
  input  logic [WIDTH_W-1:0] width_i,
  output logic [N_LINES-1:0] trig_o
);

  typedef enum logic [1:0] {L_IDLE, L_WAIT, L_PULSE} lstate_e;

  lstate_e            st_q  [N_LINES];
  logic [DELAY_W-1:0] cnt_q [N_LINES];
  logic [WIDTH_W-1:0] pw_q  [N_LINES];
  logic [WIDTH_W-1:0] width;

  assign width = (width_i == '0) ? WIDTH_W'(1) : width_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LINES; l++) begin
        st_q[l]  <= L_IDLE;
        cnt_q[l] <= '0;
        pw_q[l]  <= '0;
      end
    end else begin
      for (int l = 0; l < N_LINES; l++) begin
        if (trig_i && en_i[l]) begin
          cnt_q[l] <= delay_i[l];
          pw_q[l]  <= width;
          st_q[l]  <= (delay_i[l] == '0) ? L_PULSE : L_WAIT;
        end else begin
          unique case (st_q[l])
            L_WAIT: begin
              cnt_q[l] <= cnt_q[l] - 1'b1;
              if (cnt_q[l] == DELAY_W'(1)) st_q[l] <= L_PULSE;
            end
            L_PULSE: begin
              pw_q[l] <= pw_q[l] - 1'b1;
              if (pw_q[l] == WIDTH_W'(1)) st_q[l] <= L_IDLE;
            end
            default: ;
          endcase
        end
      end
    end
  end

  always_comb
    for (int l = 0; l < N_LINES; l++) trig_o[l] = (st_q[l] == L_PULSE);

endmodule

// txf_serializer -- bit-level encoder of a master port's Tx fiber.
//
// Every bit of a ten-bit code word occupies three base clock cycles on the fiber:
// a logical 1, then the data bit, then a logical 0 (paper, Sec. "Network
// synchronicity" and its Fig. 2).  The line therefore has a rising edge every third
// cycle on which the slave's PLL locks, whatever the data.  Bits go out MSB first
// (bit 9 = 8b/10b bit 'a').
//
// Interface: code_i is taken in the cycle load_o is high (a new code word every 30
// cycles); load_o doubles as "next symbol starts now" for the symbol multiplexer.
// resync_i restarts the bit and symbol framing immediately (with a load), which a
// switch uses to put its master ports at a fixed phase to its upstream receiver.
// line_o is driven from a flip-flop, as in the paper's block diagram; the first
// cycle of a symbol appears on line_o two cycles after its load.
// After reset the serializer loads its first code word in the first cycle.
module txf_serializer (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       resync_i,
  input  logic [9:0] code_i,
  output logic       load_o,
  output logic       line_o
);

  logic [1:0] phase_q;
  logic [3:0] bit_q;
  logic [9:0] sh_q;

  assign load_o = resync_i || (phase_q == 2'd2 && bit_q == 4'd9);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q <= 2'd2;
      bit_q   <= 4'd9;
      sh_q    <= '0;
      line_o  <= 1'b0;
    end else begin
      if (load_o) begin
        phase_q <= 2'd0;
        bit_q   <= 4'd0;
        sh_q    <= code_i;
      end else if (phase_q == 2'd2) begin
        phase_q <= 2'd0;
        bit_q   <= bit_q + 4'd1;
        sh_q    <= {sh_q[8:0], 1'b0};
      end else begin
        phase_q <= phase_q + 2'd1;
      end
      // output flop: 1, data, 0
      unique case (phase_q)
        2'd0:    line_o <= 1'b1;
        2'd1:    line_o <= sh_q[9];
        default: line_o <= 1'b0;
      endcase
    end
  end

endmodule

// rxf_serializer -- bit-level transmitter of a slave port's Rx fiber.
//
// The Rx fiber (slave to master) carries no timing information: each bit of the
// ten-bit code word is put on the line "as is" (NRZ) for three base clock cycles,
// i.e. at a third of the Tx fiber base clock (paper, Sec. "Network synchronicity").
// Bits go out MSB first.
//
// Interface: code_i is taken in the cycle load_o is high (every 30 cycles); line_o
// is registered.  After reset the first code word is loaded in the first cycle.
module rxf_serializer (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [9:0] code_i,
  output logic       load_o,
  output logic       line_o
);

  logic [1:0] phase_q;
  logic [3:0] bit_q;
  logic [9:0] sh_q;

  assign load_o = (phase_q == 2'd2 && bit_q == 4'd9);

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
      line_o <= (load_o) ? code_i[9] : (phase_q == 2'd2) ? sh_q[8] : sh_q[9];
    end
  end

endmodule

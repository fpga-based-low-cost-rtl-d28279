// rxf_oversampler -- bit-level receiver of a master port's Rx fiber.
//
// The slave sends NRZ bits at a third of the base clock, with no clock information;
// the paper decodes them "by oversampling".  This receiver samples the line on every
// base clock cycle (three samples per bit), restarts its phase counter on every line
// transition and takes the bit on the middle sample of each three.  Because the
// slave's clock is recovered from this master's Tx fiber, the bit period is exactly
// three cycles and runs without transitions do not drift.
//
// Interface: line_i (two-flop synchronized inside), bit_o / bit_valid_o one pulse per
// bit.  Timing: a bit is delivered about four cycles after its first cycle on line_i.
module rxf_oversampler (
  input  logic clk,
  input  logic rst_n,
  input  logic line_i,
  output logic bit_o,
  output logic bit_valid_o
);

  logic       s1_q, s2_q, s3_q;
  logic [1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s1_q, s2_q, s3_q} <= '0;
      cnt_q       <= '0;
      bit_o       <= 1'b0;
      bit_valid_o <= 1'b0;
    end else begin
      s1_q <= line_i;
      s2_q <= s1_q;
      s3_q <= s2_q;
      if (s2_q != s3_q)       cnt_q <= 2'd1;
      else if (cnt_q == 2'd2) cnt_q <= 2'd0;
      else                    cnt_q <= cnt_q + 2'd1;
      bit_valid_o <= (cnt_q == 2'd1);
      if (cnt_q == 2'd1) bit_o <= s2_q;
    end
  end

endmodule

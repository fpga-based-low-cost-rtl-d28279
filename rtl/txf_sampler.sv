// txf_sampler -- bit-level decoder of a slave port's Tx fiber.
//
// In the paper the slave's PLL locks onto the rising edge that begins every bit
// cell (1, data, 0) and the data bit is sampled on the falling edge of that
// recovered clock, i.e. in the middle of the cell's second third.  This module does
// the same job digitally at the base clock rate, for a slave whose base clock is
// already frequency and phase locked (the PLL itself is analog and not part of the
// RTL): it detects the rising edge of the line and samples the line one cycle later,
// in the data third of the cell.  It declares lock after LOCK_EDGES consecutive
// rising edges exactly three cycles apart and drops lock on any edge spacing other
// than three cycles.
//
// Interface: line_i (two-flop synchronized inside), bit_o / bit_valid_o one pulse per
// received bit (every third cycle), locked_o.
// Timing: two synchronizer flops, edge detection and the sample flop: bit_valid_o is
// high four clock edges after the edge that first sees the cell's rising edge.
module txf_sampler #(
  parameter int unsigned LOCK_EDGES = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic line_i,
  output logic bit_o,
  output logic bit_valid_o,
  output logic locked_o
);

  logic       s1_q, s2_q, s3_q;
  logic       take_q;
  logic [2:0] gap_q;
  logic [$clog2(LOCK_EDGES+1)-1:0] good_q;
  logic       rise;

  assign rise = s2_q && !s3_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s1_q, s2_q, s3_q} <= '0;
      take_q      <= 1'b0;
      bit_o       <= 1'b0;
      bit_valid_o <= 1'b0;
      gap_q       <= '0;
      good_q      <= '0;
    end else begin
      s1_q   <= line_i;
      s2_q   <= s1_q;
      s3_q   <= s2_q;
      take_q <= rise;
      bit_valid_o <= take_q;
      if (take_q) bit_o <= s2_q;
      // lock detector: rising edges must be exactly three cycles apart
      if (rise) begin
        gap_q <= 3'd1;
        if (gap_q == 3'd3) begin
          if (good_q != LOCK_EDGES[$bits(good_q)-1:0]) good_q <= good_q + 1'b1;
        end else begin
          good_q <= '0;
        end
      end else if (gap_q >= 3'd3) begin
        gap_q  <= 3'd4;
        good_q <= '0;
      end else begin
        gap_q <= gap_q + 3'd1;
      end
    end
  end

  assign locked_o = (good_q == LOCK_EDGES[$bits(good_q)-1:0]);

endmodule

// comma_align -- symbol synchronization on the comma characters K.28.1 and K.28.5.
//
// The received bits are shifted into a ten-bit window.  Whenever the window holds a
// K.28.1 or K.28.5 code word (either disparity) the symbol boundary is set there;
// from then on every tenth bit closes a code word.  These commas cannot appear
// across the boundary of other valid code words, so a comma seen at another position
// means the alignment was wrong and it is corrected (counted by realign_o).  Until
// the first comma no code words are delivered.  Dropping enable_i (bit lock lost)
// clears the alignment.
//
// Interface: bit_i / bit_valid_i in (first received bit = 'a'), code_o[9:0] /
// code_valid_o out, aligned_o, realign_o (pulse).
// Timing: code_valid_o is high one cycle after the bit that completes the word.
module comma_align
  import fiber_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable_i,
  input  logic       bit_i,
  input  logic       bit_valid_i,
  output logic [9:0] code_o,
  output logic       code_valid_o,
  output logic       aligned_o,
  output logic       realign_o
);

  logic [9:0] sh_q, sh_next;
  logic [3:0] cnt_q;
  logic       comma;

  assign sh_next = {sh_q[8:0], bit_i};
  assign comma   = (sh_next == C28_1_N) || (sh_next == C28_1_P) ||
                   (sh_next == C28_5_N) || (sh_next == C28_5_P);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q         <= '0;
      cnt_q        <= '0;
      code_o       <= '0;
      code_valid_o <= 1'b0;
      aligned_o    <= 1'b0;
      realign_o    <= 1'b0;
    end else begin
      code_valid_o <= 1'b0;
      realign_o    <= 1'b0;
      if (!enable_i) begin
        aligned_o <= 1'b0;
        cnt_q     <= '0;
      end else if (bit_valid_i) begin
        sh_q <= sh_next;
        if (comma) begin
          realign_o    <= aligned_o && (cnt_q != 4'd9);
          aligned_o    <= 1'b1;
          cnt_q        <= '0;
          code_o       <= sh_next;
          code_valid_o <= 1'b1;
        end else if (cnt_q == 4'd9) begin
          cnt_q        <= '0;
          code_o       <= sh_next;
          code_valid_o <= aligned_o;
        end else begin
          cnt_q <= cnt_q + 4'd1;
        end
      end
    end
  end

endmodule

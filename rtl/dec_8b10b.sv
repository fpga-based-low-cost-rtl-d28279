// dec_8b10b -- 8b/10b decoder.
//
// Maps an aligned ten-bit code word back to a data byte or control character.  The
// 6-bit and 4-bit sub-blocks are looked up separately against the encoder tables of
// code8b10b_pkg, in both disparity columns.  K.28.y is recognised from its 6-bit
// block (001111 / 110000) and K.23/27/29/30.7 from the alternate 4-bit block A7
// following those four 6-bit blocks.  A code word that matches no table entry sets
// err_o.  The running disparity itself is not checked: a disparity error that still
// yields valid sub-blocks decodes silently (a simplification of this design).
//
// Interface: code_i[9:0] (bit 9 = 'a', received first), sym_o, err_o.
// Timing: purely combinational; the fiber port registers the result.
module dec_8b10b
  import fiber_pkg::*;
  import code8b10b_pkg::*;
(
  input  logic [9:0] code_i,
  output sym_t       sym_o,
  output logic       err_o
);

  logic [5:0] c6;
  logic [3:0] c4;
  logic [4:0] x;
  logic [2:0] y;
  logic       ok6, ok4, k28, k;
  logic [5:0] t6;
  logic [3:0] t4;

  always_comb begin
    c6  = code_i[9:4];
    c4  = code_i[3:0];
    x   = '0;
    y   = '0;
    ok6 = 1'b0;
    ok4 = 1'b0;
    k   = 1'b0;
    t6  = '0;
    t4  = '0;
    k28 = (c6 == 6'b001111) || (c6 == 6'b110000);
    if (k28) begin
      x   = 5'd28;
      ok6 = 1'b1;
    end else begin
      for (int i = 0; i < 32; i++) begin
        t6 = enc6_n(5'(i));
        if (c6 == t6 || ((ones6(t6) != 3 || t6 == 6'b111000) && c6 == ~t6)) begin
          x   = 5'(i);
          ok6 = 1'b1;
        end
      end
    end
    if (k28) begin
      for (int j = 0; j < 8; j++) begin
        t4 = enc4_k28_n(3'(j));
        if ((c6 == 6'b001111 && c4 == ~t4) || (c6 == 6'b110000 && c4 == t4)) begin
          y   = 3'(j);
          ok4 = 1'b1;
        end
      end
      k = 1'b1;
    end else if (c4 == 4'b0111 || c4 == 4'b1000) begin
      y   = 3'd7;
      ok4 = 1'b1;
      k   = (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30);
    end else begin
      for (int j = 0; j < 8; j++) begin
        t4 = enc4_n(3'(j));
        if (c4 == t4 || ((ones4(t4) != 2 || t4 == 4'b1100) && c4 == ~t4)) begin
          y   = 3'(j);
          ok4 = 1'b1;
        end
      end
    end
    sym_o = '{k: k, d: {y, x}};
    err_o = !(ok6 && ok4);
  end

endmodule

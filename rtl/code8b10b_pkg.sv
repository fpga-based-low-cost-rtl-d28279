// code8b10b_pkg -- code tables of the Widmer/Franaszek 8b/10b line code.
//
// The encoder and the decoder share these tables.  Each table gives the code for a
// negative running disparity ("RD-" column); the "RD+" code is its bitwise complement
// for every sub-block that is not disparity neutral, and for the two neutral
// exceptions D.x.07 (111000) and D.x.3 (1100).  Bit order inside a sub-block is
// abcdei for the 6-bit part and fghj for the 4-bit part, the leftmost bit being sent
// first.  The tables are the standard ones of the cited code; the paper uses the
// code without reprinting it.
package code8b10b_pkg;

  // 5b/6b sub-block, RD- column, indexed by EDCBA (x of D.x.y)
  function automatic logic [5:0] enc6_n(logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  // 3b/4b sub-block of data characters, RD- column, indexed by HGF (y of D.x.y);
  // y = 7 gives the primary code P7, the alternate A7 is 0111
  function automatic logic [3:0] enc4_n(logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;
    endcase
  endfunction

  // 3b/4b sub-block of K.28.y, RD- column (used when the disparity after the 6-bit
  // block is negative, i.e. after 110000)
  function automatic logic [3:0] enc4_k28_n(logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b0110;
      3'd2: return 4'b1010;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b0101;
      3'd6: return 4'b1001;  default: return 4'b0111;
    endcase
  endfunction

  function automatic int unsigned ones6(logic [5:0] c);
    return int'(c[0]) + int'(c[1]) + int'(c[2]) + int'(c[3]) + int'(c[4]) + int'(c[5]);
  endfunction

  function automatic int unsigned ones4(logic [3:0] c);
    return int'(c[0]) + int'(c[1]) + int'(c[2]) + int'(c[3]);
  endfunction

  // true for the control characters this code defines: K.28.0..7, K.23/27/29/30.7
  function automatic logic valid_k(logic [7:0] b);
    return (b[4:0] == 5'd28) ||
           (b[7:5] == 3'd7 && (b[4:0] == 5'd23 || b[4:0] == 5'd27 ||
                               b[4:0] == 5'd29 || b[4:0] == 5'd30));
  endfunction

endpackage

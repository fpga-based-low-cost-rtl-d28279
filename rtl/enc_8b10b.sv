// enc_8b10b -- 8b/10b encoder with running disparity.
//
// Encodes one symbol (data byte or control character) into the ten-bit code of the
// Widmer/Franaszek line code that the paper uses for symbol synchronization.  The
// code word is formed combinationally from the symbol and the current running
// disparity; the running disparity register advances when the consumer pulses
// 'load' (the serializer takes the code word in that cycle).
//
// Interface: sym_i (sym_t) in, code_o[9:0] out (bit 9 = 'a', sent first), rd_o the
// running disparity before this code (0 = negative), kerr_o flags a control
// character the code does not define (it is sent as K.28.5 instead).
// Timing: zero latency from sym_i to code_o; rd updates on the clock edge with load.
// Reset value of the running disparity is negative, as is customary for this code.
module enc_8b10b
  import fiber_pkg::*;
  import code8b10b_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  sym_t       sym_i,
  output logic [9:0] code_o,
  output logic       rd_o,
  output logic       kerr_o
);

  logic       rd_q, rd_next;
  logic [4:0] x;
  logic [2:0] y;
  logic       k;
  logic [5:0] c6n, c6;
  logic [3:0] c4n, c4;
  logic       rd6;

  always_comb begin
    kerr_o = sym_i.k && !valid_k(sym_i.d);
    k = sym_i.k;
    x = sym_i.d[4:0];
    y = sym_i.d[7:5];
    if (kerr_o) begin
      k = 1'b1;
      x = 5'd28;
      y = 3'd5;
    end
    // 5b/6b
    c6n = (k && x == 5'd28) ? 6'b001111 : enc6_n(x);
    c6  = (rd_q && (ones6(c6n) != 3 || c6n == 6'b111000)) ? ~c6n : c6n;
    rd6 = rd_q ^ (ones6(c6n) != 3);
    // 3b/4b
    if (k && x == 5'd28) begin
      c4n = enc4_k28_n(y);
      c4  = rd6 ? ~c4n : c4n;
    end else if (y == 3'd7 && (k || (!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                                    ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14)))) begin
      c4n = 4'b0111;  // alternate A7
      c4  = rd6 ? ~c4n : c4n;
    end else begin
      c4n = enc4_n(y);
      c4  = (rd6 && (ones4(c4n) != 2 || c4n == 4'b1100)) ? ~c4n : c4n;
    end
    rd_next = rd6 ^ (ones4(c4n) != 2);
    code_o  = {c6, c4};
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    rd_q <= 1'b0;
    else if (load) rd_q <= rd_next;

  assign rd_o = rd_q;

endmodule

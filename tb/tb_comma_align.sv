// tb_comma_align -- checks symbol alignment on K.28.1 / K.28.5.
//
// A bitstream of random junk bits followed by code words (a comma first, then data
// code words) is fed one bit every three cycles.  No code word may be delivered
// before the comma; afterwards every delivered word must equal the sent one, on the
// sent boundaries.  A comma placed three bits off the old boundary must realign.
module tb_comma_align;
  import fiber_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, b = 0, bv = 0;
  logic [9:0] code;
  logic cv, aligned, realign;
  int checks = 0, failures = 0;
  int realigns = 0;
  bit checking = 1;

  comma_align dut (.clk, .rst_n, .enable_i(en), .bit_i(b), .bit_valid_i(bv),
                   .code_o(code), .code_valid_o(cv), .aligned_o(aligned), .realign_o(realign));

  always #1 clk = ~clk;

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // known data code words without comma content (D21.5, D10.2, D0.0 RD-, D23.7 RD+ ...)
  logic [9:0] words [6] = '{10'b101010_1010, 10'b010101_0101, 10'b100111_0100,
                            10'b011000_1011, 10'b110001_1011, 10'b101001_1001};
  logic [9:0] exp_q [$];

  always @(posedge clk) begin
    if (rst_n && realign) realigns++;
    if (rst_n && cv && checking) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL word %b delivered before alignment t=%0t", code, $time);
      end else begin
        logic [9:0] e;
        e = exp_q.pop_front();
        if (code !== e) begin
          failures++;
          $display("FAIL got %b exp %b", code, e);
        end
      end
    end
  end

  task automatic send_bit(logic v);
    @(negedge clk) b = v; bv = 1;
    @(negedge clk) bv = 0;
    @(negedge clk);
  endtask

  task automatic send_word(logic [9:0] w, bit expect_it);
    if (expect_it) exp_q.push_back(w);
    for (int i = 9; i >= 0; i--) send_bit(w[i]);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    en = 1;
    // junk of alternating bits: never a comma, nothing delivered
    for (int i = 0; i < 37; i++) send_bit(i[0]);
    checks++;
    if (aligned) begin failures++; $display("FAIL aligned without comma"); end
    // comma, then data words: all delivered (the comma itself is delivered first)
    exp_q.push_back(C28_5_N);
    for (int i = 9; i >= 0; i--) send_bit(C28_5_N[i]);
    for (int i = 0; i < 30; i++) send_word(words[$urandom_range(0, 5)], 1);
    checks++;
    if (!aligned) begin failures++; $display("FAIL not aligned"); end
    // slip by three bits and send a K28.1: must realign there
    // (the word closed on the old boundary inside the comma is not checked)
    checking = 0;
    send_bit(0); send_bit(1); send_bit(0);
    for (int i = 9; i >= 1; i--) send_bit(C28_1_P[i]);
    exp_q.delete();
    exp_q.push_back(C28_1_P);
    checking = 1;
    send_bit(C28_1_P[0]);
    for (int i = 0; i < 10; i++) send_word(words[$urandom_range(0, 5)], 1);
    checks++;
    if (realigns != 1) begin failures++; $display("FAIL realign count %0d", realigns); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
    // enable low clears the alignment
    en = 0;
    @(negedge clk);
    checks++;
    if (aligned) begin failures++; $display("FAIL alignment kept without bit lock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

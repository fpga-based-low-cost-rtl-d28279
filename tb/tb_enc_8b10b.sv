// tb_enc_8b10b -- self-checking test of the 8b/10b encoder.
//
// Checks (1) code words of well-known characters against the published code table
// (K.28.5, K.28.1, K.28.0, K.27.7, K.29.7, D.21.5, D.0.0, D.17.7, D.11.7) in both
// disparities, and (2) the code's properties over long random and exhaustive data
// sequences: every word has 4, 5 or 6 ones, an unbalanced word always has the sign
// opposite to the running disparity, the running disparity tracks the words, and no
// run of equal bits exceeds five in the serial stream.
module tb_enc_8b10b;
  import fiber_pkg::*;

  logic clk = 0, rst_n = 0, load = 0;
  sym_t sym;
  logic [9:0] code;
  logic rd, kerr;
  int checks = 0, failures = 0;

  enc_8b10b dut (.clk, .rst_n, .load, .sym_i(sym), .code_o(code), .rd_o(rd), .kerr_o(kerr));

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ones(logic [9:0] c);
    int n = 0;
    for (int i = 0; i < 10; i++) n += c[i];
    return n;
  endfunction

  // expect: code for the current rd; then load it
  task automatic expect_code(sym_t s, logic [9:0] exp);
    sym = s;
    #0.1;
    checks++;
    if (code !== exp) begin
      failures++;
      $display("FAIL %s%0d.%0d rd=%0b code=%b exp=%b", s.k ? "K" : "D", s.d[4:0], s.d[7:5], rd, code, exp);
    end
    load = 1;
    @(posedge clk);
    #0.1 load = 0;
  endtask

  int run_len;
  logic last_bit;
  logic exp_rd;

  task automatic send_and_check(sym_t s);
    int n;
    sym = s;
    #0.1;
    n = ones(code);
    checks++;
    if (!(n == 4 || n == 5 || n == 6) || (n == 6 && exp_rd) || (n == 4 && !exp_rd) || rd !== exp_rd) begin
      failures++;
      $display("FAIL property d=%h k=%0b code=%b rd=%0b exp_rd=%0b", s.d, s.k, code, rd, exp_rd);
    end
    if (n != 5) exp_rd = ~exp_rd;
    // sub-block disparity balance: the 6-bit block alone has 2, 3 or 4 ones
    for (int i = 9; i >= 0; i--) begin
      if (code[i] == last_bit) run_len++;
      else run_len = 1;
      last_bit = code[i];
      if (run_len > 5) begin
        failures++;
        $display("FAIL run length > 5 at d=%h", s.d);
      end
    end
    load = 1;
    @(posedge clk);
    #0.1 load = 0;
  endtask

  initial begin
    sym = SYM_IDLE_RDY;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    // known code words (abcdei fghj), starting at RD-
    expect_code(SYM_IDLE_RDY,  10'b001111_1010);   // K28.5 RD-  -> RD+
    expect_code(SYM_IDLE_RDY,  10'b110000_0101);   // K28.5 RD+  -> RD-
    expect_code(SYM_IDLE_BUSY, 10'b001111_1001);   // K28.1 RD-
    expect_code(SYM_IDLE_BUSY, 10'b110000_0110);   // K28.1 RD+
    expect_code(SYM_TRIG,      10'b001111_0100);   // K28.0 RD- -> RD-
    expect_code(SYM_TRIG,      10'b001111_0100);   // still RD-
    expect_code(SYM_SOP,       10'b110110_1000);   // K27.7 RD- -> RD-
    expect_code(SYM_EOP,       10'b101110_1000);   // K29.7 RD-
    expect_code('{k:0, d:8'hB5}, 10'b101010_1010); // D21.5 neutral
    expect_code('{k:0, d:8'h00}, 10'b100111_0100); // D0.0 RD- -> RD-
    expect_code('{k:0, d:8'hF1}, 10'b100011_0111); // D17.7 RD-, A7 -> RD+
    expect_code('{k:0, d:8'hEB}, 10'b110100_1000); // D11.7 RD+, A7 -> RD-
    expect_code(SYM_IDLE_RDY,  10'b001111_1010);   // -> RD+
    expect_code('{k:0, d:8'h00}, 10'b011000_1011); // D0.0 RD+ -> RD+
    expect_code('{k:0, d:8'h03}, 10'b110001_0100); // D3.0 RD+
    // properties over every data byte and random streams
    exp_rd = rd;
    run_len = 0;
    last_bit = 1'b0;
    for (int i = 0; i < 256; i++) send_and_check('{k:0, d:8'(i)});
    for (int i = 0; i < 3000; i++) begin
      int r = $urandom_range(0, 15);
      if (r == 0)      send_and_check(SYM_IDLE_RDY);
      else if (r == 1) send_and_check(SYM_SOP);
      else if (r == 2) send_and_check(SYM_EOP);
      else if (r == 3) send_and_check(SYM_TRIG);
      else             send_and_check('{k:0, d:8'($urandom)});
    end
    // undefined control character is flagged
    sym = '{k:1, d:8'h00};
    #0.1;
    checks++;
    if (!kerr) begin failures++; $display("FAIL kerr not set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

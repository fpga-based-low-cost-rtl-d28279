// tb_dec_8b10b -- self-checking test of the 8b/10b decoder.
//
// Decodes published code words (both disparities) of data and control characters,
// every data byte produced in both disparity columns by the encoder, and code words
// that are not part of the code (which must raise err_o).
module tb_dec_8b10b;
  import fiber_pkg::*;

  logic clk = 0, rst_n = 0, load = 0;
  sym_t esym, dsym;
  logic [9:0] ecode, dcode;
  logic erd, ekerr, derr;
  int checks = 0, failures = 0;

  enc_8b10b u_enc (.clk, .rst_n, .load, .sym_i(esym), .code_o(ecode), .rd_o(erd), .kerr_o(ekerr));
  dec_8b10b dut (.code_i(dcode), .sym_o(dsym), .err_o(derr));

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [9:0] c, sym_t exp, logic exp_err);
    dcode = c;
    #0.1;
    checks++;
    if (derr !== exp_err || (!exp_err && dsym !== exp)) begin
      failures++;
      $display("FAIL code=%b got k=%0b d=%h err=%0b exp k=%0b d=%h err=%0b",
               c, dsym.k, dsym.d, derr, exp.k, exp.d, exp_err);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1;
    // published code words
    chk(10'b001111_1010, SYM_IDLE_RDY, 0);
    chk(10'b110000_0101, SYM_IDLE_RDY, 0);
    chk(10'b001111_1001, SYM_IDLE_BUSY, 0);
    chk(10'b110000_0110, SYM_IDLE_BUSY, 0);
    chk(10'b001111_0110, '{k:1, d:8'hDC}, 0);  // K28.6 RD-
    chk(10'b001111_0100, SYM_TRIG, 0);
    chk(10'b110000_1011, SYM_TRIG, 0);
    chk(10'b110110_1000, SYM_SOP, 0);
    chk(10'b001001_0111, SYM_SOP, 0);
    chk(10'b101110_1000, SYM_EOP, 0);
    chk(10'b010001_0111, SYM_EOP, 0);
    chk(10'b101010_1010, '{k:0, d:8'hB5}, 0);
    chk(10'b100111_0100, '{k:0, d:8'h00}, 0);
    chk(10'b011000_1011, '{k:0, d:8'h00}, 0);
    chk(10'b100011_0111, '{k:0, d:8'hF1}, 0);
    chk(10'b110100_1000, '{k:0, d:8'hEB}, 0);
    chk(10'b000101_1110, '{k:0, d:8'hF7}, 0);  // D23.7 RD+
    // invalid words
    chk(10'b000000_0000, '0, 1);
    chk(10'b111111_1111, '0, 1);
    chk(10'b111100_1010, '0, 1);
    chk(10'b101010_1111, '0, 1);
    // every data byte in both disparities, via the encoder
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < 256; i++) begin
        esym = '{k:0, d:8'(i)};
        // force the wanted disparity with a K28.5 (flips RD) when needed
        #0.1;
        if (erd != pass[0]) begin
          esym = SYM_IDLE_RDY;
          #0.1 load = 1;
          @(posedge clk);
          #0.1 load = 0;
          esym = '{k:0, d:8'(i)};
          #0.1;
        end
        chk(ecode, esym, 0);
        load = 1;
        @(posedge clk);
        #0.1 load = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rxf_oversampler -- checks the oversampling NRZ receiver of a master port.
//
// NRZ bits of three cycles each are driven with every possible phase offset against
// the receiver clock (the line changes at 0.1, 0.5 or 0.9 of a cycle after an edge,
// after a random number of idle cycles).  After a short start-up the delivered bits
// must equal the sent ones, one per three cycles.
module tb_rxf_oversampler;
  logic clk = 0, rst_n = 0, line = 0;
  logic bit_o, bit_valid;
  int checks = 0, failures = 0;

  rxf_oversampler dut (.clk, .rst_n, .line_i(line), .bit_o, .bit_valid_o(bit_valid));

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rx [$];
  always @(posedge clk) if (bit_valid) rx.push_back(bit_o);

  initial begin
    logic tx [$];
    real off;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      off = (trial % 3 == 0) ? 0.2 : (trial % 3 == 1) ? 1.0 : 1.8;
      line = 0;
      repeat ($urandom_range(1, 5)) @(posedge clk);
      #(off);
      // preamble 1,0,1,0 lets the receiver find the bit phase, then random bits
      tx.delete();
      rx.delete();
      for (int i = 0; i < 200; i++) begin
        logic b;
        b = (i < 4) ? ~i[0] : 1'($urandom);
        tx.push_back(b);
        line = b;
        #6;
      end
      repeat (8) @(posedge clk);
      // align: find the preamble end and compare the rest
      begin
        int found = -1;
        for (int s = 0; s + 190 <= rx.size(); s++) begin
          bit match;
          match = 1;
          for (int i = 4; i < 190; i++) if (rx[s + i - 4 + 0] !== tx[i]) begin match = 0; break; end
          if (match) begin found = s; break; end
        end
        checks++;
        if (found < 0) begin
          failures++;
          $display("FAIL trial %0d: sent bits not recovered (got %0d bits)", trial, rx.size());
        end
        checks++;
        if (rx.size() < 195 || rx.size() > 210) begin
          failures++;
          $display("FAIL trial %0d: %0d bits delivered for 200 sent", trial, rx.size());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_trigger_unit -- checks the endpoint trigger unit.
//
// Ten lines get random delays (including 0) and some are disabled.  After a trigger
// pulse each enabled line must rise exactly delay + 1 cycles later and stay high for
// the programmed width; disabled lines must stay low.  A zero width gives a one
// cycle pulse.
module tb_trigger_unit;
  localparam int L = 10;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [L-1:0] en, lines;
  logic [15:0] delay [L];
  logic [7:0] width;
  int checks = 0, failures = 0;

  trigger_unit #(.N_LINES(L), .DELAY_W(16), .WIDTH_W(8)) dut (.clk, .rst_n, .trig_i(trig),
    .en_i(en), .delay_i(delay), .width_i(width), .trig_o(lines));

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int l = 0; l < L; l++) delay[l] = 16'($urandom_range(0, 60));
      if (round == 0) delay[0] = 0;
      en = L'($urandom) | 10'b1;
      width = (round == 1) ? 8'd0 : 8'($urandom_range(1, 9));
      w = (width == 0) ? 1 : int'(width);
      @(negedge clk) trig = 1;
      @(negedge clk) trig = 0;
      // cycle k after the trigger edge: line l high iff delay+1 <= k < delay+1+w
      for (int k = 1; k < 80; k++) begin
        for (int l = 0; l < L; l++) begin
          logic e;
          e = en[l] && (k >= int'(delay[l]) + 1) && (k < int'(delay[l]) + 1 + w);
          checks++;
          if (lines[l] !== e) begin
            failures++;
            $display("FAIL round %0d line %0d cycle %0d: %0b exp %0b (delay %0d)", round, l, k, lines[l], e, delay[l]);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

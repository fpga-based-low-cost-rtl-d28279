// tb_txf_serializer -- checks the Tx fiber bit format of a master port.
//
// Every bit cell must be exactly three cycles "1, data, 0"; ten cells make one code
// word, taken every 30 cycles (load period), MSB first; resync restarts the framing.
module tb_txf_serializer;
  logic clk = 0, rst_n = 0, resync = 0;
  logic [9:0] code;
  logic load, line;
  int checks = 0, failures = 0;

  txf_serializer dut (.clk, .rst_n, .resync_i(resync), .code_i(code), .load_o(load), .line_o(line));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus: a new random code at each load; remember the sequence
  logic [9:0] sent [$];
  always @(posedge clk) if (rst_n && load) begin
    sent.push_back(code);
    code <= 10'($urandom);
  end

  int last_load = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && load && !resync) begin
      if (last_load >= 0) begin
        checks++;
        if (cyc - last_load != 30) begin
          failures++;
          $display("FAIL load period %0d", cyc - last_load);
        end
      end
      last_load = cyc;
    end
    if (resync) last_load = cyc;
  end

  // line checker: capture 30 samples after each load (line lags load by 2 cycles)
  initial begin
    logic [9:0] exp;
    code = 10'b1010011100;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      @(posedge clk iff load);
      #0.1;
      exp = sent[$];  // the code word taken at this load
      for (int b = 0; b < 10; b++) begin
        for (int p = 0; p < 3; p++) begin
          @(posedge clk);
          #0.1;
          checks++;
          if (line !== (p == 0 ? 1'b1 : p == 1 ? exp[9-b] : 1'b0)) begin
            failures++;
            $display("FAIL sym %0d bit %0d phase %0d line=%0b", s, b, p, line);
          end
        end
      end
      if (s == 20) begin
        // resync in the middle of a symbol: the next load happens at once
        repeat (7) @(posedge clk);
        #0.1 resync = 1;
        #0.1;
        checks++;
        if (!load) begin failures++; $display("FAIL resync does not load"); end
        @(posedge clk);
        #0.1 resync = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

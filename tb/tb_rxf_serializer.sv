// tb_rxf_serializer -- checks the NRZ Rx fiber transmitter of a slave port.
//
// Each bit of a code word must stay on the line for exactly three cycles, MSB
// first, with a new code word taken every 30 cycles.
module tb_rxf_serializer;
  logic clk = 0, rst_n = 0;
  logic [9:0] code;
  logic load, line;
  int checks = 0, failures = 0;

  rxf_serializer dut (.clk, .rst_n, .code_i(code), .load_o(load), .line_o(line));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [9:0] sent [$];
  int cyc = 0, last_load = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && load) begin
      sent.push_back(code);
      code <= 10'($urandom);
      if (last_load >= 0) begin
        checks++;
        if (cyc - last_load != 30) begin failures++; $display("FAIL period %0d", cyc - last_load); end
      end
      last_load = cyc;
    end
  end

  initial begin
    logic [9:0] exp;
    code = 10'b1100101001;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      @(posedge clk iff load);
      #0.1;
      exp = sent[$];
      // line shows bit 9 right after the load edge, for three cycles each
      for (int b = 0; b < 10; b++)
        for (int p = 0; p < 3; p++) begin
          checks++;
          if (line !== exp[9-b]) begin
            failures++;
            $display("FAIL sym %0d bit %0d phase %0d", s, b, p);
          end
          if (!(b == 9 && p == 2)) begin
            @(posedge clk);
            #0.1;
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

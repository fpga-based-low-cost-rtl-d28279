// tb_txf_sampler -- checks the slave-side Tx fiber bit receiver.
//
// The line is driven with the 1/data/0 cell format of random bits; the receiver
// must lock after its lock count of good edges, deliver exactly the sent bits (one
// every three cycles; bit_valid_o is seen on the fifth rising clock edge after the
// line rose half a cycle before an edge), and drop lock
// when the cell timing is violated.
module tb_txf_sampler;
  logic clk = 0, rst_n = 0, line = 0;
  logic bit_o, bit_valid, locked;
  int checks = 0, failures = 0;

  txf_sampler #(.LOCK_EDGES(8)) dut (.clk, .rst_n, .line_i(line), .bit_o, .bit_valid_o(bit_valid), .locked_o(locked));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic sent [$];
  int   rise_cyc [$];
  int   cyc = 0;
  always @(posedge clk) cyc++;

  // receiver side: compare delivered bits (only once locked) with the sent ones
  int got = 0;
  always @(posedge clk) if (rst_n && bit_valid) begin
    logic e;
    int   rc;
    e  = sent.pop_front();
    rc = rise_cyc.pop_front();
    if (locked) begin
      checks++;
      got++;
      if (bit_o !== e || cyc - rc != 5) begin
        failures++;
        $display("FAIL bit %0b exp %0b latency %0d", bit_o, e, cyc - rc);
      end
    end
  end

  task automatic send_cell(logic d);
    @(negedge clk) line = 1;
    sent.push_back(d);
    rise_cyc.push_back(cyc);
    @(negedge clk) line = d;
    @(negedge clk) line = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 7; i++) send_cell(1'($urandom));
    checks++;
    if (locked) begin failures++; $display("FAIL locked too early"); end
    for (int i = 0; i < 300; i++) send_cell(1'($urandom));
    checks++;
    if (!locked) begin failures++; $display("FAIL not locked"); end
    // a cell of four cycles breaks the lock
    @(negedge clk) line = 1;
    sent.push_back(1'b1);
    rise_cyc.push_back(cyc);
    @(negedge clk) line = 1;
    @(negedge clk) line = 0;
    @(negedge clk) line = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (locked) begin failures++; $display("FAIL lock not lost"); end
    checks++;
    if (got < 290) begin failures++; $display("FAIL only %0d bits", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

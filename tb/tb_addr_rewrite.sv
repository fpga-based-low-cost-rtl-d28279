// tb_addr_rewrite -- checks the header rewrite of a router input.
//
// Random packets (random 4-nibble destination and source, random payload length,
// including empty payloads) go through the stage with random stalls on both sides.
// The expected output is computed here from the packet-format rules: destination
// shifted right by a nibble with 0 entering at Dst[3], source shifted left with the
// port number P at Src[0], payload unchanged, and out_dest_o = the old Dst[0].
// A stray data byte between packets must be dropped.
module tb_addr_rewrite;
  import fiber_pkg::*;

  localparam logic [3:0] P = 4'd5;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  sym_t in_sym, out_sym;
  logic [3:0] out_dest;
  int checks = 0, failures = 0;

  addr_rewrite #(.PORT_ID(P)) dut (.clk, .rst_n, .in_valid_i(in_valid), .in_sym_i(in_sym),
    .in_ready_o(in_ready), .out_valid_o(out_valid), .out_sym_o(out_sym), .out_dest_o(out_dest),
    .out_ready_i(out_ready));

  always #1 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sym_t in_q [$];
  sym_t exp_q [$];
  logic [3:0] dest_q [$];
  logic [3:0] cur_dest;
  int pkts_out = 0;

  function automatic sym_t D(logic [7:0] v);
    return '{k: 1'b0, d: v};
  endfunction

  task automatic make_packet();
    logic [3:0] dst [4], src [4];
    int len;
    for (int i = 0; i < 4; i++) begin dst[i] = 4'($urandom); src[i] = 4'($urandom); end
    len = $urandom_range(0, 12);
    in_q.push_back(SYM_SOP);
    in_q.push_back(D({dst[1], dst[0]}));
    in_q.push_back(D({dst[3], dst[2]}));
    in_q.push_back(D({src[1], src[0]}));
    in_q.push_back(D({src[3], src[2]}));
    exp_q.push_back(SYM_SOP);
    exp_q.push_back(D({dst[2], dst[1]}));
    exp_q.push_back(D({4'h0, dst[3]}));
    exp_q.push_back(D({src[0], P}));
    exp_q.push_back(D({src[2], src[1]}));
    dest_q.push_back(dst[0]);
    for (int i = 0; i < len; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      in_q.push_back(D(v));
      exp_q.push_back(D(v));
    end
    in_q.push_back(SYM_EOP);
    exp_q.push_back(SYM_EOP);
  endtask

  // driver
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) void'(in_q.pop_front());
  end
  always @(negedge clk) begin
    in_valid  <= (in_q.size() > 0) && ($urandom_range(0, 3) != 0);
    in_sym    <= (in_q.size() > 0) ? in_q[0] : SYM_IDLE_RDY;
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  // monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    sym_t e;
    checks++;
    e = exp_q.pop_front();
    if (is_sop(out_sym)) begin
      cur_dest = dest_q.pop_front();
      pkts_out++;
    end
    if (out_sym !== e || out_dest !== cur_dest) begin
      failures++;
      $display("FAIL got %0b:%h dest %h exp %0b:%h dest %h", out_sym.k, out_sym.d, out_dest, e.k, e.d, cur_dest);
    end
  end

  initial begin
    in_valid = 0;
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      make_packet();
      if (n % 17 == 3) in_q.push_back(D(8'hAA));  // stray byte outside a packet
    end
    wait (exp_q.size() == 0);
    repeat (10) @(posedge clk);
    checks++;
    if (pkts_out != 200) begin failures++; $display("FAIL %0d packets out", pkts_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

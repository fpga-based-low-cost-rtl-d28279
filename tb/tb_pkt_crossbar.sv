// tb_pkt_crossbar -- checks the packet crossbar.
//
// Three inputs send random packets to random outputs (and some to "no output",
// which must be dropped) while the outputs stall at random.  Each packet carries its
// input number, a sequence number and a length byte, so the checker can verify that
// packets arrive whole, in order per input/output pair, never interleaved.  A second
// phase has all inputs send to output 0 at once and checks that the grants rotate
// round robin.
module tb_pkt_crossbar;
  import fiber_pkg::*;

  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid [N], in_ready [N], in_drop [N], in_wait [N];
  sym_t in_sym [N];
  logic [1:0] in_sel [N];
  logic out_valid [N], out_ready [N];
  sym_t out_sym [N];
  int checks = 0, failures = 0;

  pkt_crossbar #(.N_IN(N), .N_OUT(N)) dut (.clk, .rst_n, .in_valid_i(in_valid), .in_sym_i(in_sym),
    .in_sel_i(in_sel), .in_drop_i(in_drop), .in_ready_o(in_ready), .in_wait_o(in_wait),
    .out_valid_o(out_valid), .out_sym_o(out_sym), .out_ready_i(out_ready));

  always #1 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { sym_t s; int sel; bit drop; } item_t;
  item_t q [N][$];
  int exp_cnt [N][N];      // packets expected per input/output
  int got_cnt [N][N];
  int next_seq [N][N];
  int seq [N];
  bit hold [N];
  bit steady = 0;

  task automatic make_packet(int i, int o, bit drop);
    int len;
    len = $urandom_range(0, 6);
    q[i].push_back('{SYM_SOP, o, drop});
    q[i].push_back('{'{k:0, d:8'(i)}, o, drop});
    q[i].push_back('{'{k:0, d:8'(seq[i])}, o, drop});
    q[i].push_back('{'{k:0, d:8'(len)}, o, drop});
    for (int n = 0; n < len; n++) q[i].push_back('{'{k:0, d:8'(n + 17 * i)}, o, drop});
    q[i].push_back('{SYM_EOP, o, drop});
    if (!drop) exp_cnt[i][o]++;
    seq[i]++;
  endtask

  always @(negedge clk) for (int i = 0; i < N; i++) begin
    in_valid[i] = (q[i].size() > 0) && !hold[i] && (steady || $urandom_range(0, 4) != 0);
    in_sym[i]   = (q[i].size() > 0) ? q[i][0].s : SYM_IDLE_RDY;
    in_sel[i]   = (q[i].size() > 0) ? 2'(q[i][0].sel) : 2'd0;
    in_drop[i]  = (q[i].size() > 0) ? q[i][0].drop : 1'b0;
  end
  always @(posedge clk) for (int i = 0; i < N; i++)
    if (rst_n && in_valid[i] && in_ready[i]) void'(q[i].pop_front());

  // per-output packet reassembly and checking
  int st [N], src [N], pseq [N], plen [N], pidx [N];
  int order [$];
  always @(posedge clk) if (rst_n) for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
    sym_t s;
    s = out_sym[o];
    checks++;
    case (st[o])
      0: if (!is_sop(s)) begin failures++; $display("FAIL out %0d: no SOP", o); end else st[o] = 1;
      1: begin src[o] = int'(s.d); st[o] = 2; end
      2: begin pseq[o] = int'(s.d); st[o] = 3; end
      3: begin plen[o] = int'(s.d); pidx[o] = 0; st[o] = (plen[o] == 0) ? 5 : 4; end
      4: begin
        if (s.k || s.d !== 8'(pidx[o] + 17 * src[o])) begin
          failures++; $display("FAIL out %0d: payload from %0d mixed up", o, src[o]);
        end
        pidx[o]++;
        if (pidx[o] == plen[o]) st[o] = 5;
      end
      default: begin
        if (!is_eop(s)) begin failures++; $display("FAIL out %0d: no EOP", o); end
        if (8'(next_seq[src[o]][o]) > 8'(pseq[o])) begin
          failures++; $display("FAIL out %0d: packet order from %0d", o, src[o]);
        end
        next_seq[src[o]][o] = pseq[o] + 1;
        got_cnt[src[o]][o]++;
        if (o == 0) order.push_back(src[o]);
        st[o] = 0;
      end
    endcase
  end

  initial begin
    for (int o = 0; o < N; o++) out_ready[o] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever @(negedge clk) for (int o = 0; o < N; o++) out_ready[o] = ($urandom_range(0, 3) != 0);
    join_none
    for (int n = 0; n < 300; n++) begin
      int i;
      i = $urandom_range(0, N - 1);
      make_packet(i, $urandom_range(0, N - 1), ($urandom_range(0, 9) == 0));
    end
    wait (q[0].size() == 0 && q[1].size() == 0 && q[2].size() == 0);
    repeat (20) @(posedge clk);
    for (int i = 0; i < N; i++) for (int o = 0; o < N; o++) begin
      checks++;
      if (got_cnt[i][o] != exp_cnt[i][o]) begin
        failures++; $display("FAIL %0d->%0d: %0d of %0d packets", i, o, got_cnt[i][o], exp_cnt[i][o]);
      end
    end
    // round robin: all three inputs queue 4 packets each for output 0, released together
    order.delete();
    steady = 1;
    for (int i = 0; i < N; i++) begin
      hold[i] = 1;
      for (int n = 0; n < 4; n++) make_packet(i, 0, 0);
    end
    @(negedge clk);
    for (int i = 0; i < N; i++) hold[i] = 0;
    wait (q[0].size() == 0 && q[1].size() == 0 && q[2].size() == 0);
    repeat (20) @(posedge clk);
    checks++;
    if (order.size() != 12) begin failures++; $display("FAIL rr: %0d packets", order.size()); end
    else for (int n = 1; n < 12; n++) begin
      checks++;
      if (order[n] == order[n-1]) begin failures++; $display("FAIL rr: input %0d granted twice in a row", order[n]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

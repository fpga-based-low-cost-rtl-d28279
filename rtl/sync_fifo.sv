// sync_fifo -- small first-word-fall-through FIFO used for the receive buffers and
// the switch's output queues.
//
// Storage is a register array of DEPTH entries of WIDTH bits; the head entry is
// visible on dout_o while empty_o is low.  count_o gives the fill level, from which
// the fiber port derives its flow-control hysteresis.  Writing while full is a
// protocol error of the user and is checked by an assertion.
module sync_fifo #(
  parameter int unsigned WIDTH = 9,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         din_i,
  input  logic                     pop_i,
  output logic [WIDTH-1:0]         dout_o,
  output logic                     empty_o,
  output logic                     full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [AW-1:0]    wr_q, rd_q;
  logic             do_push, do_pop;

  assign empty_o = (count_o == '0);
  assign full_o  = (count_o == DEPTH[$bits(count_o)-1:0]);
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;
  assign dout_o  = mem_q[rd_q];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q    <= '0;
      rd_q    <= '0;
      count_o <= '0;
    end else begin
      if (do_push) wr_q <= inc(wr_q);
      if (do_pop)  rd_q <= inc(rd_q);
      if (do_push && !do_pop)      count_o <= count_o + 1'b1;
      else if (do_pop && !do_push) count_o <= count_o - 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (do_push) mem_q[wr_q] <= din_i;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push_i |-> !full_o)
    else $error("sync_fifo: push while full");

endmodule

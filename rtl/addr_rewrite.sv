// addr_rewrite -- packet identification and address rewriting at the input of a
// router (host, switch or endpoint).
//
// Packet format on the wire (paper, Fig. 3): SOP, then the destination address
// bytes {Dst[1],Dst[0]} and {Dst[3],Dst[2]}, the source address bytes
// {Src[1],Src[0]} and {Src[3],Src[2]} (high nibble first in each byte), the
// payload, and EOP.  Each nibble is a port number along the path.
//
// The module holds back SOP and the two destination bytes (the 2-byte buffer the
// paper mentions), takes the output port from Dst[0], and re-emits the header with
// the destination shifted right by one nibble (Dst[3] becomes 0) and the source
// shifted left by one nibble with this input's port number PORT_ID inserted as
// Src[0] (paper, Fig. 4).  Everything after the header is passed through unchanged
// until EOP, with no further buffering.
//
// Interface: in_* and out_* are valid/ready symbol streams; out_dest_o is the output
// port address, valid from the SOP on out_* until the EOP.  A stray symbol outside a
// packet and a packet that ends before both destination bytes arrived are dropped
// (this design's choice; the paper does not treat malformed packets).
// Timing: SOP leaves two symbols after it came in; then one symbol per cycle at most.
module addr_rewrite
  import fiber_pkg::*;
#(
  parameter logic [3:0] PORT_ID = 4'd0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid_i,
  input  sym_t       in_sym_i,
  output logic       in_ready_o,
  output logic       out_valid_o,
  output sym_t       out_sym_o,
  output logic [3:0] out_dest_o,
  input  logic       out_ready_i
);

  typedef enum logic [3:0] {
    S_IDLE, S_D0, S_D1, S_OSOP, S_OD0, S_OD1, S_S0, S_S1, S_PAY
  } state_e;

  state_e     st_q;
  logic [7:0] dst0_q, dst1_q;
  logic [3:0] src1_q;

  always_comb begin
    in_ready_o  = 1'b0;
    out_valid_o = 1'b0;
    out_sym_o   = in_sym_i;
    unique case (st_q)
      S_IDLE, S_D0, S_D1: in_ready_o = 1'b1;
      S_OSOP: begin
        out_valid_o = 1'b1;
        out_sym_o   = SYM_SOP;
      end
      S_OD0: begin
        out_valid_o = 1'b1;
        out_sym_o   = '{k: 1'b0, d: {dst1_q[3:0], dst0_q[7:4]}};
      end
      S_OD1: begin
        out_valid_o = 1'b1;
        out_sym_o   = '{k: 1'b0, d: {4'h0, dst1_q[7:4]}};
      end
      S_S0: begin
        out_valid_o = in_valid_i;
        in_ready_o  = out_ready_i;
        if (!in_sym_i.k) out_sym_o = '{k: 1'b0, d: {in_sym_i.d[3:0], PORT_ID}};
      end
      S_S1: begin
        out_valid_o = in_valid_i;
        in_ready_o  = out_ready_i;
        if (!in_sym_i.k) out_sym_o = '{k: 1'b0, d: {in_sym_i.d[3:0], src1_q}};
      end
      default: begin  // S_PAY
        out_valid_o = in_valid_i;
        in_ready_o  = out_ready_i;
      end
    endcase
  end

  assign out_dest_o = dst0_q[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      dst0_q <= '0;
      dst1_q <= '0;
      src1_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (in_valid_i && is_sop(in_sym_i)) st_q <= S_D0;
        S_D0: if (in_valid_i) begin
          if (in_sym_i.k) st_q <= is_sop(in_sym_i) ? S_D0 : S_IDLE;
          else begin
            dst0_q <= in_sym_i.d;
            st_q   <= S_D1;
          end
        end
        S_D1: if (in_valid_i) begin
          if (in_sym_i.k) st_q <= is_sop(in_sym_i) ? S_D0 : S_IDLE;
          else begin
            dst1_q <= in_sym_i.d;
            st_q   <= S_OSOP;
          end
        end
        S_OSOP: if (out_ready_i) st_q <= S_OD0;
        S_OD0:  if (out_ready_i) st_q <= S_OD1;
        S_OD1:  if (out_ready_i) st_q <= S_S0;
        S_S0: if (in_valid_i && out_ready_i) begin
          src1_q <= in_sym_i.d[7:4];
          st_q   <= is_eop(in_sym_i) ? S_IDLE : S_S1;
        end
        S_S1: if (in_valid_i && out_ready_i) st_q <= is_eop(in_sym_i) ? S_IDLE : S_PAY;
        default: if (in_valid_i && out_ready_i && is_eop(in_sym_i)) st_q <= S_IDLE;
      endcase
    end
  end

endmodule

// fiber_pkg -- shared types and constants of the synchronized plastic fiber network.
//
// A symbol on the network is an 8b/10b character: either a data byte (k = 0) or a
// control character (k = 1).  The symbol struct sym_t carries that flag next to the
// byte and is the unit that flows through the receive buffers, the address rewrite
// stage, the crossbar and the transmit queues.
//
// The 8b/10b code and the use of K.28.1 / K.28.5 as comma characters follow the
// paper.  The paper names five control characters (start of packet, end of packet,
// trigger, "ready" idle, "not ready" idle) but does not say which 8b/10b control
// codes they are; the assignment below is this design's own choice:
//   idle, ready to receive      K.28.5  (comma, also used for symbol alignment)
//   idle, not ready to receive  K.28.1  (comma)
//   start of packet             K.27.7
//   end of packet               K.29.7
//   trigger                     K.28.0
// Timing constants: a bit takes three base clock cycles on the Tx fiber (1, data, 0)
// and one bit per three base cycles on the Rx fiber; a symbol is ten bits, so one
// symbol every 30 base clock cycles (150 MHz base clock -> 40 Mbit/s of user data).
package fiber_pkg;

  typedef struct packed {
    logic       k;   // 1: control character, 0: data byte
    logic [7:0] d;   // byte value (for k = 1 the K.x.y code value)
  } sym_t;

  localparam int unsigned SYM_W        = 9;
  localparam int unsigned CYC_PER_BIT  = 3;
  localparam int unsigned BITS_PER_SYM = 10;
  localparam int unsigned CYC_PER_SYM  = CYC_PER_BIT * BITS_PER_SYM;

  // K.x.y byte values: y in bits 7:5, x in bits 4:0
  localparam logic [7:0] K28_0 = 8'h1C;
  localparam logic [7:0] K28_1 = 8'h3C;
  localparam logic [7:0] K28_5 = 8'hBC;
  localparam logic [7:0] K27_7 = 8'hFB;
  localparam logic [7:0] K29_7 = 8'hFD;

  localparam sym_t SYM_IDLE_RDY  = '{k: 1'b1, d: K28_5};
  localparam sym_t SYM_IDLE_BUSY = '{k: 1'b1, d: K28_1};
  localparam sym_t SYM_SOP       = '{k: 1'b1, d: K27_7};
  localparam sym_t SYM_EOP       = '{k: 1'b1, d: K29_7};
  localparam sym_t SYM_TRIG      = '{k: 1'b1, d: K28_0};

  // Ten-bit comma codes, bit 9 = 'a' (sent first) ... bit 0 = 'j'
  localparam logic [9:0] C28_1_N = 10'b001111_1001;
  localparam logic [9:0] C28_1_P = 10'b110000_0110;
  localparam logic [9:0] C28_5_N = 10'b001111_1010;
  localparam logic [9:0] C28_5_P = 10'b110000_0101;

  // Port address of the upstream (slave) port of a switch or endpoint.  Address 0 is
  // the local device; the paper reserves one address for the port towards the master
  // but does not say which one.
  localparam logic [3:0] UP_ADDR = 4'hF;

  function automatic logic is_sop(sym_t s);
    return s.k && s.d == K27_7;
  endfunction

  function automatic logic is_eop(sym_t s);
    return s.k && s.d == K29_7;
  endfunction

endpackage

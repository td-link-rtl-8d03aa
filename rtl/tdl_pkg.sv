// tdl_pkg: types and constants shared by the TD-Link concentrator and FERS node logic.
//
// The link is modelled at the fabric side of the transceiver: one 16-bit line symbol per
// 156.25 MHz cycle plus a flag telling control words (sent with 8b/10b K codes) from data
// words. The train header 0x8000 and trailer 0xC000 are the paper's values; every other
// code point below (idle, dual comma, LAST COMMA, control-packet and sub-packet markers) and
// the CRC polynomial are choices of this design, since the paper gives none of them.
package tdl_pkg;

  typedef struct packed {
    logic        k;   // 1: control word (K code on the line), 0: data word
    logic [15:0] d;
  } sym_t;

  localparam int SYM_W = $bits(sym_t);

  // Train framing (paper values for header and trailer)
  localparam logic [15:0] HEADER     = 16'h8000;
  localparam logic [15:0] TRAILER    = 16'hC000;
  // K28.7 + K28.5: end-of-train marker
  localparam logic [15:0] LAST_COMMA = 16'hFCBC;
  // K28.5 + D16.2: idle filler
  localparam logic [15:0] IDLE       = 16'hBC50;
  // K28.5 + K28.5: dual comma used for word alignment and keep-alive
  localparam logic [15:0] DUAL_COMMA = 16'hBCBC;

  // Control packet start word: {4'hA, type, board}; board 8'hFF is broadcast
  typedef enum logic [3:0] {
    CP_REG_WR = 4'h1,   // addr[31:16], addr[15:0], data[31:16], data[15:0], CRC
    CP_REG_RD = 4'h2,   // addr[31:16], addr[15:0], CRC
    CP_CMD    = 4'h3,   // code, ts[47:32], ts[31:16], ts[15:0], CRC
    CP_T0     = 4'h4,   // CRC
    CP_PING   = 4'h5    // CRC
  } cp_type_e;

  localparam logic [3:0] CP_MARK   = 4'hA;
  // Upstream sub-packet start words: {mark, board[3:0], nsym[7:0]}
  localparam logic [3:0] SP_DATA   = 4'h9;
  localparam logic [3:0] SP_RDRESP = 4'hB;
  localparam logic [7:0] BCAST     = 8'hFF;

  // A downstream control request as handed to the concentrator transmitter
  typedef struct packed {
    cp_type_e    typ;
    logic [7:0]  board;
    logic [31:0] addr;
    logic [31:0] data;
    logic [15:0] code;
    logic [47:0] ts;
  } cp_req_t;

  // CRC-16/CCITT (x^16+x^12+x^5+1), one 16-bit symbol per step, MSB first, init 16'hFFFF
  localparam logic [15:0] CRC_INIT = 16'hFFFF;

  function automatic logic [15:0] crc16_step(input logic [15:0] crc, input logic [15:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 15; i >= 0; i--) begin
      logic fb;
      fb = c[15] ^ d[i];
      c  = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  function automatic sym_t mk_k(input logic [15:0] d);
    return '{k: 1'b1, d: d};
  endfunction

  function automatic sym_t mk_d(input logic [15:0] d);
    return '{k: 1'b0, d: d};
  endfunction

  function automatic logic is_idle(input sym_t s);
    return s.k && (s.d == IDLE || s.d == DUAL_COMMA);
  endfunction

  // Number of payload symbols that follow a control-packet start word, CRC excluded
  function automatic int unsigned cp_len(input logic [3:0] typ);
    case (typ)
      CP_REG_WR: return 4;
      CP_REG_RD: return 2;
      CP_CMD:    return 4;
      default:   return 0;
    endcase
  endfunction

endpackage

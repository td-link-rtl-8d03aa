// tdl_tb_funcs.svh: reference helpers shared by the TD-Link testbenches, included inside
// a testbench module that imports tdl_pkg.
//
// ref_crc computes CRC-16/CCITT (polynomial 0x1021, initial value 0xFFFF) byte by byte,
// high byte of each 16-bit word first, written independently of the RTL's per-word
// function. The builders produce the symbol sequences of control packets and board
// sub-packets as the link format defines them, for driving and for comparison.
  typedef logic [15:0] w16_q [$];
  typedef sym_t sym_q [$];

  function automatic logic [15:0] ref_crc(w16_q words);
    logic [15:0] c = 16'hFFFF;
    foreach (words[i]) begin
      for (int b = 1; b >= 0; b--) begin
        c ^= {words[i][8*b +: 8], 8'h00};
        repeat (8) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
      end
    end
    return c;
  endfunction

  function automatic sym_q ctrl_packet(logic [3:0] typ, logic [7:0] board,
                                       logic [31:0] addr, logic [31:0] data,
                                       logic [15:0] code, logic [47:0] ts);
    sym_q q;
    w16_q w;
    w.push_back({4'hA, typ, board});
    case (typ)
      4'h1: begin w.push_back(addr[31:16]); w.push_back(addr[15:0]);
                  w.push_back(data[31:16]); w.push_back(data[15:0]); end
      4'h2: begin w.push_back(addr[31:16]); w.push_back(addr[15:0]); end
      4'h3: begin w.push_back(code); w.push_back(ts[47:32]); w.push_back(ts[31:16]);
                  w.push_back(ts[15:0]); end
      default: ;
    endcase
    foreach (w[i]) q.push_back('{k: (i == 0), d: w[i]});
    q.push_back('{k: 1'b1, d: ref_crc(w)});
    return q;
  endfunction

  // data sub-packet of a board carrying 32-bit words
  function automatic sym_q data_subpacket(logic [3:0] board, logic [31:0] words [$]);
    sym_q q;
    w16_q w;
    w.push_back({4'h9, board, 8'(2 * words.size())});
    foreach (words[i]) begin w.push_back(words[i][31:16]); w.push_back(words[i][15:0]); end
    foreach (w[i]) q.push_back('{k: (i == 0), d: w[i]});
    q.push_back('{k: 1'b1, d: ref_crc(w)});
    return q;
  endfunction

  function automatic sym_q rdresp_subpacket(logic [3:0] board, logic [31:0] addr, logic [31:0] data);
    sym_q q;
    w16_q w;
    w.push_back({4'hB, board, 8'd4});
    w.push_back(addr[31:16]); w.push_back(addr[15:0]);
    w.push_back(data[31:16]); w.push_back(data[15:0]);
    foreach (w[i]) q.push_back('{k: (i == 0), d: w[i]});
    q.push_back('{k: 1'b1, d: ref_crc(w)});
    return q;
  endfunction

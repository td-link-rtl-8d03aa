// fers_train_node: streaming train forwarder and payload appender of one FERS board.
//
// The node sits in the ring datapath. Every symbol from the upstream neighbour is
// retransmitted to the downstream one after exactly one register stage, so the per-hop
// transit time does not depend on what the train carries. After a train HEADER has passed,
// the node watches for the TRAILER; instead of forwarding it, the node emits its own
// sub-packets in its place and then releases the trailer:
//   read response (only if a register read is pending):
//       {B, board, 4}  addr_hi addr_lo data_hi data_lo  CRC
//   data (always, possibly empty):
//       {9, board, 2n}  w0_hi w0_lo ... w(n-1)_hi w(n-1)_lo  CRC
// where n = min(frag_words, words available), each 32-bit word is two 16-bit symbols
// (high half first), and CRC is a CRC-16 control word over the sub-packet's own start and
// payload words. Upstream sub-packets are forwarded verbatim, so their CRCs stay valid end
// to end. Words beyond the fragment size wait for the next train.
// Symbols arriving while the node inserts go to a small holdback FIFO (HOLD_DEPTH); idles
// are dropped while it is not empty, which is how the inserted length is absorbed by the
// idle gap that follows every train. When the FIFO is empty (fixed_lat = 1) the node is
// on its fixed-latency path, as required for T0. The append-before-trailer rule, the
// per-board CRC, the word split and fragmentation follow the paper; the sub-packet start
// words, the always-present data sub-packet and the holdback FIFO are this design's choices.
module fers_train_node
  import tdl_pkg::*;
#(
  parameter int unsigned HOLD_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [3:0]  board_id,
  input  logic [7:0]  frag_words,      // per-train fragment size in 32-bit words, <= 127
  input  sym_t        sym_in,
  output sym_t        sym_out,
  // detector data stream (from the board's event buffer)
  input  logic [31:0] data_word,
  input  logic        data_valid,
  input  logic [15:0] data_count,      // words available behind data_word
  output logic        data_ready,
  // pending register read response
  input  logic        rd_pending,
  input  logic [31:0] rd_addr,
  input  logic [31:0] rd_data,
  output logic        rd_ack,
  // status
  output logic        fixed_lat,
  output logic        inserting,
  output logic [15:0] trains_filled,
  output logic        hold_overflow
);
  localparam int unsigned HW = $clog2(HOLD_DEPTH);

  // ---------------- holdback FIFO ----------------
  sym_t            hold [HOLD_DEPTH];
  logic [HW-1:0]   hrd, hwr;
  logic [HW:0]     hcnt;
  logic            push, pop;
  sym_t            push_sym;

  // ---------------- insertion sequencer ----------------
  typedef enum logic [2:0] {Q_OFF, Q_RDH, Q_RDP, Q_RDC, Q_DH, Q_DP, Q_DC} seq_e;
  seq_e        seq;
  logic [1:0]  ridx;
  logic [7:0]  nleft;       // words still to send in this sub-packet
  logic        lo_half;
  logic [15:0] crc;
  logic        pend_ins;    // a header has gone by, its trailer not yet

  sym_t cand;
  logic cand_fifo, in_idle, cand_trailer;
  assign cand_fifo    = (hcnt != 0);
  assign cand         = cand_fifo ? hold[hrd] : sym_in;
  assign in_idle      = is_idle(sym_in);
  assign cand_trailer = cand.k && (cand.d == TRAILER) && pend_ins;
  assign inserting    = (seq != Q_OFF);
  assign fixed_lat    = (hcnt == 0) && (seq == Q_OFF);

  logic [7:0] n_words;
  always_comb begin
    n_words = frag_words;
    if ({8'h00, frag_words} > data_count) n_words = data_count[7:0];
    if (n_words > 8'd127) n_words = 8'd127;
  end

  // symbol the sequencer emits this cycle
  sym_t ins_sym;
  always_comb begin
    ins_sym = mk_k(IDLE);
    unique case (seq)
      Q_RDH: ins_sym = mk_k({SP_RDRESP, board_id, 8'd4});
      Q_RDP: begin
        unique case (ridx)
          2'd0: ins_sym = mk_d(rd_addr[31:16]);
          2'd1: ins_sym = mk_d(rd_addr[15:0]);
          2'd2: ins_sym = mk_d(rd_data[31:16]);
          default: ins_sym = mk_d(rd_data[15:0]);
        endcase
      end
      Q_RDC, Q_DC: ins_sym = mk_k(crc);
      Q_DH: ins_sym = mk_k({SP_DATA, board_id, nleft[6:0], 1'b0});
      Q_DP: ins_sym = mk_d(lo_half ? data_word[15:0] : data_word[31:16]);
      default: ;
    endcase
  end

  assign data_ready = (seq == Q_DP) && lo_half;
  assign rd_ack     = (seq == Q_RDC);

  // FIFO control
  always_comb begin
    push     = 1'b0;
    pop      = 1'b0;
    push_sym = sym_in;
    if (seq != Q_OFF) begin
      push = !in_idle;
    end else if (cand_trailer) begin
      push = !cand_fifo;                 // keep the trailer for after the insertion
      if (cand_fifo) push = !in_idle;
    end else if (cand_fifo) begin
      pop  = 1'b1;
      push = !in_idle;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hrd           <= '0;
      hwr           <= '0;
      hcnt          <= '0;
      seq           <= Q_OFF;
      ridx          <= '0;
      nleft         <= '0;
      lo_half       <= 1'b0;
      crc           <= CRC_INIT;
      pend_ins      <= 1'b0;
      sym_out       <= mk_k(IDLE);
      trains_filled <= '0;
      hold_overflow <= 1'b0;
    end else begin
      // FIFO bookkeeping
      if (push) begin
        if (hcnt - (pop ? (HW+1)'(1) : (HW+1)'(0)) >= (HW+1)'(HOLD_DEPTH)) hold_overflow <= 1'b1;
        else begin
          hold[hwr] <= push_sym;
          hwr       <= hwr + 1'b1;
        end
      end
      if (pop) hrd <= hrd + 1'b1;
      hcnt <= hcnt + ((push && !(hcnt - (pop ? (HW+1)'(1) : (HW+1)'(0)) >= (HW+1)'(HOLD_DEPTH))) ? (HW+1)'(1) : (HW+1)'(0))
                   - (pop ? (HW+1)'(1) : (HW+1)'(0));

      if (seq != Q_OFF) begin
        sym_out <= ins_sym;
        if (seq != Q_RDC && seq != Q_DC) crc <= crc16_step(crc, ins_sym.d);
        unique case (seq)
          Q_RDH: begin seq <= Q_RDP; ridx <= '0; end
          Q_RDP: if (ridx == 2'd3) seq <= Q_RDC; else ridx <= ridx + 1'b1;
          Q_RDC: begin seq <= Q_DH; crc <= CRC_INIT; nleft <= n_words; end
          Q_DH:  begin seq <= (nleft == 0) ? Q_DC : Q_DP; lo_half <= 1'b0; end
          Q_DP: begin
            lo_half <= !lo_half;
            if (lo_half) begin
              nleft <= nleft - 1'b1;
              if (nleft == 8'd1) seq <= Q_DC;
            end
          end
          Q_DC: begin
            seq           <= Q_OFF;
            trains_filled <= trains_filled + 1'b1;
          end
          default: seq <= Q_OFF;
        endcase
      end else if (cand_trailer) begin
        // first inserted symbol goes out in place of the trailer
        pend_ins <= 1'b0;
        crc      <= CRC_INIT;
        nleft    <= n_words;
        if (rd_pending) begin
          sym_out <= mk_k({SP_RDRESP, board_id, 8'd4});
          crc     <= crc16_step(CRC_INIT, {SP_RDRESP, board_id, 8'd4});
          seq     <= Q_RDP;
          ridx    <= '0;
        end else begin
          sym_out <= mk_k({SP_DATA, board_id, n_words[6:0], 1'b0});
          crc     <= crc16_step(CRC_INIT, {SP_DATA, board_id, n_words[6:0], 1'b0});
          seq     <= (n_words == 0) ? Q_DC : Q_DP;
          lo_half <= 1'b0;
        end
      end else begin
        sym_out <= cand;
        if (cand.k && cand.d == HEADER) pend_ins <= 1'b1;
      end
    end
  end

  a_data_avail: assert property (@(posedge clk) disable iff (rst) data_ready |-> data_valid);
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) !hold_overflow);
endmodule

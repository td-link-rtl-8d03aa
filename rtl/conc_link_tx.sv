// conc_link_tx: concentrator downstream transmitter for one TD-Link ring.
//
// Every line cycle it emits one 16-bit symbol (sym_t) towards the first board of the ring.
// Sources, in priority order at each free slot:
//   1. keep-alive: a dual comma when ka_req has been seen;
//   2. the empty train, started every train_period cycles: HEADER (0x8000), TRAILER
//      (0xC000), LAST COMMA. The boards fill it on its way round the ring;
//   3. a queued control packet (cp_req_t): start word {A, type, board}, its payload
//      words (32-bit fields split high half first), then a CRC-16 word over start and
//      payload; one idle follows each packet;
//   4. IDLE.
// After a train the line is kept idle for TRAIN_GAP cycles. Each board inserts its
// sub-packet in front of the trailer and absorbs the delay by dropping idles that follow,
// so the gap must exceed the total a full ring can insert; the default covers 16 boards
// of the largest fragment. A control packet only goes out in a free slot, so train_period
// must exceed the train plus TRAIN_GAP, or the trains take every slot. Because control
// packets never follow a train closely, a T0
// packet always crosses the boards on their fixed-latency path.
// The train layout and the packet fields follow the paper; code points, the CRC, the
// priorities and the gap rule are this design's choices. Pulses train_sent, t0_sent and
// ping_sent mark the cycle the corresponding start word is on sym_out.
module conc_link_tx
  import tdl_pkg::*;
#(
  parameter int unsigned TRAIN_GAP = 16 * (2 * 127 + 8) + 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        train_en,
  input  logic [31:0] train_period,
  input  logic        ka_req,
  input  logic        cp_valid,
  output logic        cp_ready,
  input  cp_req_t     cp_req,
  output sym_t        sym_out,
  output logic        train_sent,
  output logic        t0_sent,
  output logic        ping_sent
);
  typedef enum logic [1:0] {T_IDLE, T_TRAIN, T_PKT, T_GAP} tstate_e;
  tstate_e state;

  logic [31:0] ptimer;
  logic        train_due, ka_pend;
  logic [1:0]  tidx;
  logic [2:0]  pidx, plen;          // plen: index of the CRC word
  sym_t        pkt [6];
  logic [15:0] crc;
  logic [$clog2(TRAIN_GAP+1)-1:0] gap;

  // Packet image of the request at the input
  sym_t        nxt [6];
  logic [2:0]  nxt_len;
  always_comb begin
    for (int i = 0; i < 6; i++) nxt[i] = mk_d(16'h0000);
    nxt[0] = mk_k({CP_MARK, cp_req.typ, cp_req.board});
    unique case (cp_req.typ)
      CP_REG_WR: begin
        nxt[1] = mk_d(cp_req.addr[31:16]); nxt[2] = mk_d(cp_req.addr[15:0]);
        nxt[3] = mk_d(cp_req.data[31:16]); nxt[4] = mk_d(cp_req.data[15:0]);
      end
      CP_REG_RD: begin
        nxt[1] = mk_d(cp_req.addr[31:16]); nxt[2] = mk_d(cp_req.addr[15:0]);
      end
      CP_CMD: begin
        nxt[1] = mk_d(cp_req.code);
        nxt[2] = mk_d(cp_req.ts[47:32]); nxt[3] = mk_d(cp_req.ts[31:16]);
        nxt[4] = mk_d(cp_req.ts[15:0]);
      end
      default: ;
    endcase
    nxt_len = 3'(cp_len(cp_req.typ) + 1);
  end

  // CRC over start word and payload of the packet being sent
  always_comb begin
    crc = CRC_INIT;
    for (int i = 0; i < 5; i++)
      if (3'(i) < plen) crc = crc16_step(crc, pkt[i].d);
  end

  assign cp_ready = (state == T_IDLE) && !ka_pend && !train_due;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= T_IDLE;
      ptimer     <= '0;
      train_due  <= 1'b0;
      ka_pend    <= 1'b0;
      tidx       <= '0;
      pidx       <= '0;
      plen       <= '0;
      gap        <= '0;
      sym_out    <= mk_k(IDLE);
      train_sent <= 1'b0;
      t0_sent    <= 1'b0;
      ping_sent  <= 1'b0;
      for (int i = 0; i < 6; i++) pkt[i] <= mk_d(16'h0000);
    end else begin
      train_sent <= 1'b0;
      t0_sent    <= 1'b0;
      ping_sent  <= 1'b0;
      if (ka_req) ka_pend <= 1'b1;

      if (train_en) begin
        if (ptimer >= train_period - 1) begin
          ptimer    <= '0;
          train_due <= 1'b1;
        end else begin
          ptimer <= ptimer + 1'b1;
        end
      end else begin
        ptimer <= '0;
      end

      unique case (state)
        T_IDLE: begin
          if (ka_pend) begin
            sym_out <= mk_k(DUAL_COMMA);
            ka_pend <= ka_req;
          end else if (train_due) begin
            sym_out    <= mk_k(HEADER);
            train_due  <= 1'b0;
            train_sent <= 1'b1;
            tidx       <= 2'd1;
            state      <= T_TRAIN;
          end else if (cp_valid) begin
            sym_out   <= nxt[0];
            pkt       <= nxt;
            plen      <= nxt_len;
            pidx      <= 3'd1;
            t0_sent   <= (cp_req.typ == CP_T0);
            ping_sent <= (cp_req.typ == CP_PING);
            state     <= T_PKT;
          end else begin
            sym_out <= mk_k(IDLE);
          end
        end
        T_TRAIN: begin
          if (tidx == 2'd1) begin
            sym_out <= mk_k(TRAILER);
            tidx    <= 2'd2;
          end else begin
            sym_out <= mk_k(LAST_COMMA);
            gap     <= ($bits(gap))'(TRAIN_GAP);
            state   <= T_GAP;
          end
        end
        T_PKT: begin
          if (pidx == plen) begin
            sym_out <= mk_k(crc);
            gap     <= ($bits(gap))'(1);
            state   <= T_GAP;
          end else begin
            sym_out <= pkt[pidx];
            pidx    <= pidx + 1'b1;
          end
        end
        T_GAP: begin
          sym_out <= mk_k(IDLE);
          if (gap <= 1) state <= T_IDLE;
          else gap <= gap - 1'b1;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule

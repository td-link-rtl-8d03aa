// fers_ctrl_rx: control-packet decoder of one FERS board.
//
// It watches the symbol stream entering the board (the packets themselves keep travelling
// round the ring) and decodes the downstream control packets:
//   register write  {A,1,board} addr_hi addr_lo data_hi data_lo CRC
//   register read   {A,2,board} addr_hi addr_lo CRC
//   timed command   {A,3,board} code ts[47:32] ts[31:16] ts[15:0] CRC
//   T0              {A,4,board} CRC
//   ping            {A,5,board} CRC       (ignored by boards; used for round-trip timing)
// A packet is acted upon only if its CRC-16 matches and it is addressed to this board or
// to the broadcast address FF. Outputs are one-cycle strobes issued the cycle after the
// CRC word, i.e. a fixed number of cycles after the start word, so a T0 strobe keeps the
// fixed latency of the link. A control word in place of a payload word aborts the packet.
// 32-bit address and data split over two symbols, the CRC and the 48-bit timestamp follow
// the paper; the code points, the broadcast address and the ping are this design's.
module fers_ctrl_rx
  import tdl_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [3:0]  board_id,
  input  sym_t        sym_in,
  output logic        reg_wr,
  output logic        reg_rd,
  output logic [31:0] reg_addr,
  output logic [31:0] reg_wdata,
  output logic        cmd_valid,
  output logic [15:0] cmd_code,
  output logic [47:0] cmd_ts,
  output logic        t0,
  output logic [15:0] crc_errors
);
  typedef enum logic [1:0] {P_IDLE, P_BODY, P_CRC} pstate_e;
  pstate_e      state;
  logic [3:0]   typ;
  logic [7:0]   dst;
  logic [2:0]   idx, len;
  logic [15:0]  w [4];
  logic [15:0]  crc;
  logic         is_start;

  assign is_start = sym_in.k && (sym_in.d[15:12] == CP_MARK);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= P_IDLE;
      typ        <= '0;
      dst        <= '0;
      idx        <= '0;
      len        <= '0;
      crc        <= CRC_INIT;
      reg_wr     <= 1'b0;
      reg_rd     <= 1'b0;
      cmd_valid  <= 1'b0;
      t0         <= 1'b0;
      reg_addr   <= '0;
      reg_wdata  <= '0;
      cmd_code   <= '0;
      cmd_ts     <= '0;
      crc_errors <= '0;
      for (int i = 0; i < 4; i++) w[i] <= '0;
    end else begin
      reg_wr    <= 1'b0;
      reg_rd    <= 1'b0;
      cmd_valid <= 1'b0;
      t0        <= 1'b0;
      unique case (state)
        P_IDLE: if (is_start) begin
          typ   <= sym_in.d[11:8];
          dst   <= sym_in.d[7:0];
          len   <= 3'(cp_len(sym_in.d[11:8]));
          idx   <= '0;
          crc   <= crc16_step(CRC_INIT, sym_in.d);
          state <= (cp_len(sym_in.d[11:8]) == 0) ? P_CRC : P_BODY;
        end
        P_BODY: begin
          if (sym_in.k) begin
            state <= P_IDLE;                       // malformed: abort
          end else begin
            w[idx[1:0]] <= sym_in.d;
            crc         <= crc16_step(crc, sym_in.d);
            idx         <= idx + 1'b1;
            if (idx + 1'b1 == len) state <= P_CRC;
          end
        end
        P_CRC: begin
          state <= P_IDLE;
          if (!sym_in.k || sym_in.d != crc) begin
            crc_errors <= crc_errors + 1'b1;
          end else if (dst == BCAST || dst == {4'h0, board_id}) begin
            unique case (typ)
              CP_REG_WR: begin
                reg_wr    <= 1'b1;
                reg_addr  <= {w[0], w[1]};
                reg_wdata <= {w[2], w[3]};
              end
              CP_REG_RD: begin
                reg_rd   <= 1'b1;
                reg_addr <= {w[0], w[1]};
              end
              CP_CMD: begin
                cmd_valid <= 1'b1;
                cmd_code  <= w[0];
                cmd_ts    <= {w[1], w[2], w[3]};
              end
              CP_T0: t0 <= 1'b1;
              default: ;
            endcase
          end
        end
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule

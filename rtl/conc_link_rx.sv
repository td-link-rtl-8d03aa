// conc_link_rx: concentrator upstream receiver for one TD-Link ring.
//
// It parses the symbol stream coming back from the last board of the ring. A train is
// HEADER, then one sub-packet per board and kind ({9,board,n} data or {B,board,4} read
// response, n payload words, CRC word), then TRAILER and LAST COMMA. For every data
// sub-packet the 32-bit words (two symbols, high half first) are written out with the
// board number (wr_valid/wr_board/wr_data) towards the link's event buffer as they arrive;
// at the CRC word sp_done reports the board and whether its CRC matched. A CRC mismatch
// is counted for that board (board_err), so a corrupted contribution is attributed to the
// board that produced it. Read responses are delivered (rd_resp_*) only with a good CRC.
// Control packets that return after a full ring turn are skipped; a returning ping
// raises ping_seen, used for round-trip timing. Anything out of place counts frame_errors.
// The train and sub-packet structure follows the paper; the word formats and the error
// counters are this design's.
module conc_link_rx
  import tdl_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  sym_t              sym_in,
  input  logic              sym_valid,
  output logic              wr_valid,
  output logic [3:0]        wr_board,
  output logic [31:0]       wr_data,
  output logic              sp_done,
  output logic [3:0]        sp_board,
  output logic              sp_crc_ok,
  output logic              rd_resp_valid,
  output logic [3:0]        rd_resp_board,
  output logic [31:0]       rd_resp_addr,
  output logic [31:0]       rd_resp_data,
  output logic              train_done,
  output logic              ping_seen,
  output logic [15:0]       trains_rx,
  output logic [15:0]       frame_errors,
  output logic [15:0][7:0]  board_err
);
  typedef enum logic [2:0] {R_IDLE, R_TRAIN, R_SBODY, R_SCRC, R_LAST, R_CPSKIP} rstate_e;
  rstate_e     state;
  logic        is_rd;
  logic [3:0]  board;
  logic [7:0]  nleft;
  logic [15:0] crc, hi;
  logic        lo_half;
  logic [1:0]  ridx;
  logic [15:0] rw [4];
  logic [2:0]  skip;

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= R_IDLE;
      is_rd         <= 1'b0;
      board         <= '0;
      nleft         <= '0;
      crc           <= CRC_INIT;
      hi            <= '0;
      lo_half       <= 1'b0;
      ridx          <= '0;
      skip          <= '0;
      wr_valid      <= 1'b0;
      wr_board      <= '0;
      wr_data       <= '0;
      sp_done       <= 1'b0;
      sp_board      <= '0;
      sp_crc_ok     <= 1'b0;
      rd_resp_valid <= 1'b0;
      rd_resp_board <= '0;
      rd_resp_addr  <= '0;
      rd_resp_data  <= '0;
      train_done    <= 1'b0;
      ping_seen     <= 1'b0;
      trains_rx     <= '0;
      frame_errors  <= '0;
      board_err     <= '0;
      for (int i = 0; i < 4; i++) rw[i] <= '0;
    end else begin
      wr_valid      <= 1'b0;
      sp_done       <= 1'b0;
      rd_resp_valid <= 1'b0;
      train_done    <= 1'b0;
      ping_seen     <= 1'b0;
      if (sym_valid) begin
        unique case (state)
          R_IDLE: begin
            if (sym_in.k && sym_in.d == HEADER) begin
              state <= R_TRAIN;
            end else if (sym_in.k && sym_in.d[15:12] == CP_MARK) begin
              ping_seen <= (sym_in.d[11:8] == CP_PING);
              skip      <= 3'(cp_len(sym_in.d[11:8]));
              state     <= R_CPSKIP;
            end else if (!is_idle(sym_in)) begin
              frame_errors <= frame_errors + 1'b1;
            end
          end
          R_CPSKIP: begin
            if (skip == 0) state <= R_IDLE;   // this was the packet's CRC word
            else skip <= skip - 1'b1;
          end
          R_TRAIN: begin
            if (sym_in.k && sym_in.d == TRAILER) begin
              state <= R_LAST;
            end else if (sym_in.k && (sym_in.d[15:12] == SP_DATA || sym_in.d[15:12] == SP_RDRESP)) begin
              is_rd   <= (sym_in.d[15:12] == SP_RDRESP);
              board   <= sym_in.d[11:8];
              nleft   <= sym_in.d[7:0];
              crc     <= crc16_step(CRC_INIT, sym_in.d);
              lo_half <= 1'b0;
              ridx    <= '0;
              state   <= (sym_in.d[7:0] == 0) ? R_SCRC : R_SBODY;
            end else begin
              frame_errors <= frame_errors + 1'b1;
              state        <= R_IDLE;
            end
          end
          R_SBODY: begin
            if (sym_in.k) begin
              frame_errors <= frame_errors + 1'b1;
              state        <= R_IDLE;
            end else begin
              crc   <= crc16_step(crc, sym_in.d);
              nleft <= nleft - 1'b1;
              if (nleft == 8'd1) state <= R_SCRC;
              if (is_rd) begin
                rw[ridx] <= sym_in.d;
                ridx     <= ridx + 1'b1;
              end else begin
                lo_half <= !lo_half;
                if (!lo_half) begin
                  hi <= sym_in.d;
                end else begin
                  wr_valid <= 1'b1;
                  wr_board <= board;
                  wr_data  <= {hi, sym_in.d};
                end
              end
            end
          end
          R_SCRC: begin
            state     <= R_TRAIN;
            sp_done   <= 1'b1;
            sp_board  <= board;
            sp_crc_ok <= sym_in.k && (sym_in.d == crc);
            if (!(sym_in.k && sym_in.d == crc)) begin
              if (board_err[board] != 8'hFF) board_err[board] <= board_err[board] + 1'b1;
            end else if (is_rd) begin
              rd_resp_valid <= 1'b1;
              rd_resp_board <= board;
              rd_resp_addr  <= {rw[0], rw[1]};
              rd_resp_data  <= {rw[2], rw[3]};
            end
          end
          R_LAST: begin
            state <= R_IDLE;
            if (sym_in.k && sym_in.d == LAST_COMMA) begin
              train_done <= 1'b1;
              trains_rx  <= trains_rx + 1'b1;
            end else begin
              frame_errors <= frame_errors + 1'b1;
            end
          end
          default: state <= R_IDLE;
        endcase
      end
    end
  end
endmodule

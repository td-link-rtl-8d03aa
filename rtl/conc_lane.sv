// conc_lane: one TD-Link port of the Data Concentrator.
//
// Fabric side (clk, the 156.25 MHz fabric clock):
//   conc_link_tx   builds the downstream stream: empty trains, control packets, keep-alive;
//   conc_link_rx   parses the trains coming back and checks every board's CRC;
//   occupancy_irq  addresses the link's event buffer and raises the occupancy interrupt;
//   comma_align40 + link_keepalive  align the raw receive words on the dual comma and
//                  declare the link lost when no comma arrives in the keep-alive window;
//   txbuf_align_fsm  aligns the lane's transmit phase at start-up (below);
//   a round-trip counter: cycles from sending a ping to seeing it return (rtt_cycles).
// Serializer side (xclk, the lane's transmit clock after the phase interpolator):
//   the TX elastic buffer (tx_elastic_buffer) carries symbols from clk to xclk; its
//   half-full flag is the one-bit phase detector of the alignment FSM, whose PI steps
//   leave the lane on pi_step/pi_dir and move xclk. A second instance is the receive
//   elastic buffer from the ring (clocked by xclk here, since every board retransmits
//   on a clock locked to the one it receives) back to clk.
// The partition follows the paper's concentrator description; the ring-return clock,
// the round-trip counter and the status signals are this design's choices.
// Lint reports some sub-block status signals as unused here (RX buffer half-full and
// error, train_done, dropped-word count, the aligned raw word and its offset, train_sent,
// t0_sent, the alignment FSM's busy flag): they are probe points, not needed by the lane.
module conc_lane
  import tdl_pkg::*;
#(
  parameter int unsigned TRAIN_GAP = 16 * (2 * 127 + 8) + 16,
  parameter int unsigned KA_PERIOD = 1500000,
  parameter int unsigned BUF_WORDS = 64 * 1024 * 1024,
  parameter int unsigned SETTLE    = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        xclk,
  // ring
  output sym_t        ring_out,         // xclk domain, to the first board
  input  sym_t        ring_in,          // xclk domain, from the last board
  output logic        xrst,             // reset for the ring side, xclk domain
  input  logic [19:0] raw_rx,           // raw receive words from the transceiver
  // control
  input  logic        train_en,
  input  logic [31:0] train_period,
  input  logic        cp_valid,
  output logic        cp_ready,
  input  cp_req_t     cp_req,
  input  logic        align_start,
  // transmit phase interpolator
  output logic        pi_step,
  output logic        pi_dir,
  output logic [11:0] pi_pos,
  output logic        align_locked,
  output logic        align_fail,
  output logic        txbufstatus0,
  // event buffer
  output logic        buf_wr,
  output logic [$clog2(BUF_WORDS)-1:0] buf_addr,
  output logic [35:0] buf_data,         // {board, word}
  input  logic        buf_rd_valid,
  input  logic [15:0] buf_rd_words,
  input  logic [$clog2(BUF_WORDS):0] buf_threshold,
  output logic [$clog2(BUF_WORDS):0] buf_occupancy,
  output logic        irq,
  // status
  output logic        rd_resp_valid,
  output logic [3:0]  rd_resp_board,
  output logic [31:0] rd_resp_addr,
  output logic [31:0] rd_resp_data,
  output logic        sp_done,
  output logic [3:0]  sp_board,
  output logic        sp_crc_ok,
  output logic [15:0] trains_rx,
  output logic [15:0] frame_errors,
  output logic [15:0][7:0] board_err,
  output logic [31:0] rtt_cycles,
  output logic        rtt_valid,
  output logic        rx_aligned,
  output logic        link_lost,
  output logic        cdr_reset,
  output logic        txbuf_err
);
  // ---------------- transmit ----------------
  logic ka_req, train_sent, t0_sent, ping_sent;
  sym_t tx_sym;
  conc_link_tx #(.TRAIN_GAP(TRAIN_GAP)) u_tx (
    .clk, .rst, .train_en, .train_period, .ka_req,
    .cp_valid, .cp_ready, .cp_req, .sym_out(tx_sym),
    .train_sent, .t0_sent, .ping_sent);

  reset_sync u_xrst (.clk(xclk), .rst_in(rst), .rst_out(xrst));

  logic txb_valid;
  logic [SYM_W-1:0] txb_data;
  tx_elastic_buffer #(.W(SYM_W)) u_txbuf (
    .wclk(clk), .wrst(rst), .wdata(tx_sym), .half_full(txbufstatus0), .err(txbuf_err),
    .rclk(xclk), .rrst(xrst), .rdata(txb_data), .rvalid(txb_valid));
  assign ring_out = txb_valid ? sym_t'(txb_data) : mk_k(IDLE);

  logic signed [11:0] pi_pos_s;
  logic align_busy;
  txbuf_align_fsm #(.SETTLE(SETTLE), .POS_W(12)) u_align (
    .clk, .rst, .start(align_start), .txbufstatus0,
    .pi_step, .pi_dir, .pi_pos(pi_pos_s), .locked(align_locked), .fail(align_fail),
    .busy(align_busy));
  assign pi_pos = pi_pos_s;

  // ---------------- receive ----------------
  logic rxb_valid, rxb_half, rxb_err;
  logic [SYM_W-1:0] rxb_data;
  tx_elastic_buffer #(.W(SYM_W)) u_rxbuf (
    .wclk(xclk), .wrst(xrst), .wdata(ring_in), .half_full(rxb_half), .err(rxb_err),
    .rclk(clk), .rrst(rst), .rdata(rxb_data), .rvalid(rxb_valid));

  logic        wr_valid, train_done, ping_seen;
  logic [3:0]  wr_board;
  logic [31:0] wr_data;
  conc_link_rx u_rx (
    .clk, .rst, .sym_in(sym_t'(rxb_data)), .sym_valid(rxb_valid),
    .wr_valid, .wr_board, .wr_data, .sp_done, .sp_board, .sp_crc_ok,
    .rd_resp_valid, .rd_resp_board, .rd_resp_addr, .rd_resp_data,
    .train_done, .ping_seen, .trains_rx, .frame_errors, .board_err);

  // ---------------- event buffer ----------------
  logic        wr_accept;
  logic [31:0] dropped;
  occupancy_irq #(.BUF_WORDS(BUF_WORDS)) u_occ (
    .clk, .rst, .wr(wr_valid), .wr_accept, .wr_addr(buf_addr),
    .rd_valid(buf_rd_valid), .rd_words(buf_rd_words), .threshold(buf_threshold),
    .occupancy(buf_occupancy), .irq, .dropped);
  assign buf_wr   = wr_accept;
  assign buf_data = {wr_board, wr_data};

  // ---------------- raw word alignment and keep-alive ----------------
  logic [19:0] rx_word;
  logic        comma_seen;
  logic [4:0]  rx_offset;
  comma_align40 u_comma (
    .clk, .rst, .raw_in(raw_rx), .data_out(rx_word), .aligned(rx_aligned),
    .comma_seen, .offset(rx_offset));
  link_keepalive #(.PERIOD(KA_PERIOD)) u_ka (
    .clk, .rst, .ka_req, .comma_seen, .link_lost, .cdr_reset);

  // ---------------- ring round trip ----------------
  logic        rtt_run;
  logic [31:0] rtt_cnt;
  always_ff @(posedge clk) begin
    if (rst) begin
      rtt_run    <= 1'b0;
      rtt_cnt    <= '0;
      rtt_cycles <= '0;
      rtt_valid  <= 1'b0;
    end else begin
      rtt_valid <= 1'b0;
      if (ping_sent) begin
        rtt_run <= 1'b1;
        rtt_cnt <= '0;
      end else if (rtt_run) begin
        rtt_cnt <= rtt_cnt + 1'b1;
        if (ping_seen) begin
          rtt_run    <= 1'b0;
          rtt_cycles <= rtt_cnt + 1'b1;
          rtt_valid  <= 1'b1;
        end
      end
    end
  end
endmodule

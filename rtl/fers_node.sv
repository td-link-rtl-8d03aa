// fers_node: link logic of one FERS-5200 front-end board on a TD-Link ring.
//
// It joins the board's ring-side blocks in one clock domain, the 156.25 MHz clock
// recovered from the upstream link and cleaned by the board's external zero-delay PLL
// (so the receive and retransmit sides are phase-locked and no clock crossing is needed):
//   fers_train_node   fixed-latency forwarding and payload appending,
//   fers_ctrl_rx      control-packet decoding,
//   fers_timebase     48-bit timestamp, T0 and timed commands,
//   link_keepalive    loss-of-link watchdog on the dual comma,
//   an event FIFO     (sync_fifo) buffering the detector data words,
//   a register file   reachable through register write/read packets.
// Registers (byte addresses; this design's map, the paper only names register access):
//   0x00 FRAG_WORDS (fragment size, 32-bit words, default 32, max 127)
//   0x04/0x08 T0_CORR low/high   0x0C/0x10 CMD_CORR low/high   0x14 SCRATCH
//   0x18/0x1C TIMESTAMP low/high (read only)
//   0x20 STATUS (read only) {link_lost, t0_done, hold_overflow, cmd_overflow[4:0], late[7:0],
//        crc_errors[15:0]}
// Status outputs of the train node (inserting, trains_filled) are left for debug probes and
// are not read here.
// A register read is answered in this board's read-response sub-packet on the next train.
module fers_node
  import tdl_pkg::*;
#(
  parameter int unsigned EVT_DEPTH = 256,
  parameter int unsigned KA_PERIOD = 1500000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [3:0]  board_id,
  input  sym_t        sym_in,
  output sym_t        sym_out,
  // detector data from the front-end acquisition logic
  input  logic [31:0] evt_word,
  input  logic        evt_valid,
  output logic        evt_ready,
  // board outputs
  output logic [47:0] timestamp,
  output logic        cmd_fire,
  output logic [15:0] cmd_code,
  output logic        link_lost,
  output logic        cdr_reset,
  output logic        fixed_lat
);
  // ---------------- event FIFO ----------------
  logic [31:0]              q_word;
  logic                     q_valid, q_ready;
  logic [$clog2(EVT_DEPTH):0] q_count;
  sync_fifo #(.W(32), .DEPTH(EVT_DEPTH)) u_evt (
    .clk, .rst, .din(evt_word), .din_valid(evt_valid), .din_ready(evt_ready),
    .dout(q_word), .valid(q_valid), .ready(q_ready), .count(q_count));

  // ---------------- control decoding ----------------
  logic        reg_wr, reg_rd, c_valid, t0;
  logic [31:0] reg_addr, reg_wdata;
  logic [15:0] c_code, crc_errors;
  logic [47:0] c_ts;
  fers_ctrl_rx u_ctrl (
    .clk, .rst, .board_id, .sym_in,
    .reg_wr, .reg_rd, .reg_addr, .reg_wdata,
    .cmd_valid(c_valid), .cmd_code(c_code), .cmd_ts(c_ts), .t0, .crc_errors);

  // ---------------- registers ----------------
  logic [7:0]  frag_words;
  logic [47:0] t0_corr, cmd_corr;
  logic [31:0] scratch, rdata;
  logic        rd_pending, rd_ack, hold_overflow, t0_done;
  logic [31:0] rd_addr, rd_data;
  logic [7:0]  late_cnt, ovf_cnt;

  always_comb begin
    unique case (reg_addr[7:0])
      8'h00:   rdata = {24'h0, frag_words};
      8'h04:   rdata = t0_corr[31:0];
      8'h08:   rdata = {16'h0, t0_corr[47:32]};
      8'h0C:   rdata = cmd_corr[31:0];
      8'h10:   rdata = {16'h0, cmd_corr[47:32]};
      8'h14:   rdata = scratch;
      8'h18:   rdata = timestamp[31:0];
      8'h1C:   rdata = {16'h0, timestamp[47:32]};
      8'h20:   rdata = {link_lost, t0_done, hold_overflow, ovf_cnt[4:0], late_cnt, crc_errors};
      default: rdata = {16'hDEAD, reg_addr[15:0]};
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      frag_words <= 8'd32;
      t0_corr    <= '0;
      cmd_corr   <= '0;
      scratch    <= '0;
      rd_pending <= 1'b0;
      rd_addr    <= '0;
      rd_data    <= '0;
    end else begin
      if (reg_wr) begin
        unique case (reg_addr[7:0])
          8'h00: frag_words       <= (reg_wdata[7:0] > 8'd127) ? 8'd127 : reg_wdata[7:0];
          8'h04: t0_corr[31:0]    <= reg_wdata;
          8'h08: t0_corr[47:32]   <= reg_wdata[15:0];
          8'h0C: cmd_corr[31:0]   <= reg_wdata;
          8'h10: cmd_corr[47:32]  <= reg_wdata[15:0];
          8'h14: scratch          <= reg_wdata;
          default: ;
        endcase
      end
      if (rd_ack) rd_pending <= 1'b0;
      if (reg_rd) begin
        rd_pending <= 1'b1;
        rd_addr    <= reg_addr;
        rd_data    <= rdata;
      end
    end
  end

  // ---------------- timebase ----------------
  fers_timebase u_tb (
    .clk, .rst, .t0, .t0_corr, .cmd_corr,
    .cmd_valid(c_valid), .cmd_code(c_code), .cmd_ts(c_ts),
    .timestamp, .t0_done, .fire(cmd_fire), .fire_code(cmd_code),
    .late_cnt, .overflow_cnt(ovf_cnt));

  // ---------------- ring datapath ----------------
  logic        inserting;
  logic [15:0] trains_filled;
  fers_train_node u_train (
    .clk, .rst, .board_id, .frag_words, .sym_in, .sym_out,
    .data_word(q_word), .data_valid(q_valid), .data_count(16'(q_count)), .data_ready(q_ready),
    .rd_pending(rd_pending && !reg_rd), .rd_addr, .rd_data, .rd_ack,
    .fixed_lat, .inserting, .trains_filled, .hold_overflow);

  // ---------------- keep-alive watchdog ----------------
  logic ka_unused;
  link_keepalive #(.PERIOD(KA_PERIOD)) u_ka (
    .clk, .rst, .ka_req(ka_unused),
    .comma_seen(sym_in.k && sym_in.d == DUAL_COMMA),
    .link_lost, .cdr_reset);
endmodule

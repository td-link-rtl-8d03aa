// tdlink_system: a TD-Link Data Concentrator with its rings of FERS boards.
//
// The concentrator has N_LINKS ports (8), grouped in quads of four lanes served by one
// transmit PLL each (lanes 0-3 and 4-7). Each port is a conc_lane that sends trains,
// control packets and keep-alives round a ring of N_NODES fers_node boards (16) and
// collects the filled trains when they come back. The ring is modelled as direct symbol
// connections: lane -> board 0 -> board 1 -> ... -> board N_NODES-1 -> lane.
// Every board of ring l runs on xclk[l], the lane's serializer clock, standing for the
// clock each board recovers and cleans before retransmitting; the fabric of the
// concentrator runs on clk. Per lane the TX alignment FSM moves xclk through the lane's
// phase interpolator (pi_step/pi_dir leave this module, because the interpolator and the
// transceiver are outside the RTL).
// Phase measurement: one ddmtd per quad compares the quad's first lane clock with the
// fabric clock (monitoring of the lane alignment); one more ddmtd compares the master
// reference clk_master_ref with clk on a slave concentrator, and ddmtd_servo turns its
// readings into delay steps for the external input PLL (pll_delay_step/dir).
// All DDMTDs sample with clk_dmtd, which the service PLL makes slightly off f_in.
// The structure follows the paper's concentrator, ring and FERS descriptions; the way the
// ring is closed in one module and the port list are this design's choices.
// Lint reports some per-lane and per-board status signals as unused (PI position, lane
// CDR reset, TX buffer error, sub-packet board number, read address, occupancy, per-board
// CRC error counts, board fixed-latency flags and CDR resets, the external DDMTD period
// and servo error). They are kept on the instances as probe points for debugging and for
// a control processor; the top does not bring all of them out to keep its port list short.
module tdlink_system
  import tdl_pkg::*;
#(
  parameter int unsigned N_LINKS   = 8,
  parameter int unsigned N_NODES   = 16,
  parameter int unsigned LANES_PER_QUAD = 4,
  parameter int unsigned TRAIN_GAP = 16 * (2 * 127 + 8) + 16,
  parameter int unsigned KA_PERIOD = 1500000,
  parameter int unsigned BUF_WORDS = 64 * 1024 * 1024,
  parameter int unsigned SETTLE    = 16,
  parameter int unsigned EVT_DEPTH = 256,
  parameter int unsigned DMTD_W    = 16
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [N_LINKS-1:0]        xclk,
  input  logic                      clk_dmtd,
  input  logic                      clk_master_ref,
  // concentrator control
  input  logic                      train_en,
  input  logic [31:0]               train_period,
  input  logic                      align_start,
  input  logic [N_LINKS-1:0]        cp_valid,
  output logic [N_LINKS-1:0]        cp_ready,
  input  cp_req_t [N_LINKS-1:0]     cp_req,
  input  logic [N_LINKS-1:0][19:0]  raw_rx,
  // phase interpolators
  output logic [N_LINKS-1:0]        pi_step,
  output logic [N_LINKS-1:0]        pi_dir,
  output logic [N_LINKS-1:0]        align_locked,
  output logic [N_LINKS-1:0]        align_fail,
  // event buffers
  output logic [N_LINKS-1:0]        buf_wr,
  output logic [N_LINKS-1:0][$clog2(BUF_WORDS)-1:0] buf_addr,
  output logic [N_LINKS-1:0][35:0]  buf_data,
  input  logic [N_LINKS-1:0]        buf_rd_valid,
  input  logic [N_LINKS-1:0][15:0]  buf_rd_words,
  input  logic [$clog2(BUF_WORDS):0] buf_threshold,
  output logic [N_LINKS-1:0]        irq,
  // link status
  output logic [N_LINKS-1:0]        rd_resp_valid,
  output logic [N_LINKS-1:0][3:0]   rd_resp_board,
  output logic [N_LINKS-1:0][31:0]  rd_resp_data,
  output logic [N_LINKS-1:0]        sp_done,
  output logic [N_LINKS-1:0]        sp_crc_ok,
  output logic [N_LINKS-1:0][15:0]  trains_rx,
  output logic [N_LINKS-1:0][15:0]  frame_errors,
  output logic [N_LINKS-1:0][31:0]  rtt_cycles,
  output logic [N_LINKS-1:0]        rx_aligned,
  output logic [N_LINKS-1:0]        link_lost,
  // front-end side of every board
  input  logic [N_LINKS-1:0][N_NODES-1:0][31:0] evt_word,
  input  logic [N_LINKS-1:0][N_NODES-1:0]       evt_valid,
  output logic [N_LINKS-1:0][N_NODES-1:0]       evt_ready,
  output logic [N_LINKS-1:0][N_NODES-1:0][47:0] node_timestamp,
  output logic [N_LINKS-1:0][N_NODES-1:0]       node_fire,
  output logic [N_LINKS-1:0][N_NODES-1:0][15:0] node_fire_code,
  output logic [N_LINKS-1:0][N_NODES-1:0]       node_link_lost,
  // phase measurement and inter-concentrator loop
  output logic [N_LINKS/LANES_PER_QUAD-1:0]             quad_phase_valid,
  output logic [N_LINKS/LANES_PER_QUAD-1:0][DMTD_W-1:0] quad_phase,
  output logic [N_LINKS/LANES_PER_QUAD-1:0][DMTD_W-1:0] quad_period,
  input  logic                      servo_en,
  input  logic [DMTD_W-1:0]         servo_setpoint,
  output logic [DMTD_W-1:0]         ext_phase,
  output logic                      pll_delay_step,
  output logic                      pll_delay_dir,
  output logic                      servo_lock
);
  localparam int unsigned N_QUADS = N_LINKS / LANES_PER_QUAD;

  for (genvar l = 0; l < N_LINKS; l++) begin : g_link
    sym_t        ring [N_NODES+1];
    logic        xrst;
    logic [11:0] pi_pos;
    logic        txbufstatus0, cdr_reset, txbuf_err, rtt_valid;
    logic [3:0]  sp_board;
    logic [31:0] rd_addr;
    logic [$clog2(BUF_WORDS):0] occ;
    logic [15:0][7:0] board_err;

    conc_lane #(.TRAIN_GAP(TRAIN_GAP), .KA_PERIOD(KA_PERIOD), .BUF_WORDS(BUF_WORDS),
                .SETTLE(SETTLE)) u_lane (
      .clk, .rst, .xclk(xclk[l]),
      .ring_out(ring[0]), .ring_in(ring[N_NODES]), .xrst, .raw_rx(raw_rx[l]),
      .train_en, .train_period, .cp_valid(cp_valid[l]), .cp_ready(cp_ready[l]),
      .cp_req(cp_req[l]), .align_start,
      .pi_step(pi_step[l]), .pi_dir(pi_dir[l]), .pi_pos, .align_locked(align_locked[l]),
      .align_fail(align_fail[l]), .txbufstatus0,
      .buf_wr(buf_wr[l]), .buf_addr(buf_addr[l]), .buf_data(buf_data[l]),
      .buf_rd_valid(buf_rd_valid[l]), .buf_rd_words(buf_rd_words[l]),
      .buf_threshold, .buf_occupancy(occ), .irq(irq[l]),
      .rd_resp_valid(rd_resp_valid[l]), .rd_resp_board(rd_resp_board[l]),
      .rd_resp_addr(rd_addr), .rd_resp_data(rd_resp_data[l]),
      .sp_done(sp_done[l]), .sp_board, .sp_crc_ok(sp_crc_ok[l]),
      .trains_rx(trains_rx[l]), .frame_errors(frame_errors[l]), .board_err,
      .rtt_cycles(rtt_cycles[l]), .rtt_valid, .rx_aligned(rx_aligned[l]),
      .link_lost(link_lost[l]), .cdr_reset, .txbuf_err);

    for (genvar n = 0; n < N_NODES; n++) begin : g_node
      logic cdr_rst_n, fixed_lat;
      fers_node #(.EVT_DEPTH(EVT_DEPTH), .KA_PERIOD(KA_PERIOD)) u_node (
        .clk(xclk[l]), .rst(xrst), .board_id(4'(n)),
        .sym_in(ring[n]), .sym_out(ring[n+1]),
        .evt_word(evt_word[l][n]), .evt_valid(evt_valid[l][n]), .evt_ready(evt_ready[l][n]),
        .timestamp(node_timestamp[l][n]), .cmd_fire(node_fire[l][n]),
        .cmd_code(node_fire_code[l][n]), .link_lost(node_link_lost[l][n]),
        .cdr_reset(cdr_rst_n), .fixed_lat);
    end
  end

  // ---------------- DDMTD phase measurement ----------------
  logic rst_dmtd;
  reset_sync u_rst_dmtd (.clk(clk_dmtd), .rst_in(rst), .rst_out(rst_dmtd));

  for (genvar q = 0; q < N_QUADS; q++) begin : g_quad
    logic pv_unused;
    ddmtd #(.CNT_W(DMTD_W)) u_dmtd (
      .clk_a(xclk[q*LANES_PER_QUAD]), .clk_b(clk), .clk_dmtd, .rst(rst_dmtd),
      .phase_valid(quad_phase_valid[q]), .phase(quad_phase[q]),
      .period_valid(pv_unused), .period(quad_period[q]));
  end

  logic              ext_valid, ext_pvalid;
  logic [DMTD_W-1:0] ext_period;
  logic signed [DMTD_W+4:0] servo_err;
  ddmtd #(.CNT_W(DMTD_W)) u_dmtd_ext (
    .clk_a(clk_master_ref), .clk_b(clk), .clk_dmtd, .rst(rst_dmtd),
    .phase_valid(ext_valid), .phase(ext_phase),
    .period_valid(ext_pvalid), .period(ext_period));
  ddmtd_servo #(.CNT_W(DMTD_W)) u_servo (
    .clk(clk_dmtd), .rst(rst_dmtd), .enable(servo_en), .setpoint(servo_setpoint),
    .phase_valid(ext_valid), .phase(ext_phase), .period(ext_period),
    .delay_step(pll_delay_step), .delay_dir(pll_delay_dir), .last_err(servo_err),
    .in_lock(servo_lock));
endmodule

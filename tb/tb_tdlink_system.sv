// tb_tdlink_system: end-to-end test of a reduced TD-Link system.
//
// Four concentrator lanes (two quads of two lanes), each driving a ring of three boards,
// with short train gap, keep-alive period and buffer. The testbench models the physical
// parts that are not logic: each lane's transmit clock is the system clock shifted by a
// phase that moves 200 ps per phase-interpolator step; the raw receive words carry the
// dual comma for the keep-alive watchdog; the master reference clock of the
// inter-concentrator loop is the system clock shifted so that each PLL delay step delays
// the local clock by 100 ps relative to it; the DDMTD offset clock runs at 6.45 ns. Boards are fed numbered event words.
//
// Sequence and checks: start-up alignment of all transmit buffers; trains running with
// fragmented sub-packets (fragment size set to 4 words by a broadcast register write);
// every event word delivered once, in order, tagged with its board; sub-packet CRCs good;
// a register read answered by the addressed board; a ping's round trip measured; T0 with
// per-board corrections making all time stamps equal; a broadcast timed command firing on
// all twelve boards within one clock period; the occupancy interrupt raised and cleared by
// reads; the keep-alive loss detected on the lane whose commas stop; DDMTD quad phase
// readings; and the inter-concentrator servo stepping the PLL delay until in lock.
// Each of these mechanisms is counted, and the test fails if any count stays zero.
module tb_tdlink_system;
  import tdl_pkg::*;
  localparam int NL = 4, NN = 3, LPQ = 2, NQ = NL / LPQ, BW = 1024, KA = 3000;
  localparam int NWORDS = 40;
  localparam realtime HALF = 3.2;

  logic clk = 0, rst = 1, clk_dmtd = 0, clk_master_ref = 0;
  logic [NL-1:0] xclk = '0;
  logic train_en = 0, align_start = 0, servo_en = 0;
  logic [31:0] train_period = 32'd400;
  logic [NL-1:0] cp_valid = '0, cp_ready;
  cp_req_t [NL-1:0] cp_req;
  logic [NL-1:0][19:0] raw_rx;
  logic [NL-1:0] pi_step, pi_dir, align_locked, align_fail, buf_wr, irq;
  logic [NL-1:0][9:0] buf_addr;
  logic [NL-1:0][35:0] buf_data;
  logic [NL-1:0] buf_rd_valid = '0;
  logic [NL-1:0][15:0] buf_rd_words = '0;
  logic [10:0] buf_threshold = 11'd24;
  logic [NL-1:0] rd_resp_valid, sp_done, sp_crc_ok, rx_aligned, link_lost;
  logic [NL-1:0][3:0] rd_resp_board;
  logic [NL-1:0][31:0] rd_resp_data, rtt_cycles;
  logic [NL-1:0][15:0] trains_rx, frame_errors;
  logic [NL-1:0][NN-1:0][31:0] evt_word;
  logic [NL-1:0][NN-1:0] evt_valid = '0, evt_ready, node_fire, node_link_lost;
  logic [NL-1:0][NN-1:0][47:0] node_timestamp;
  logic [NL-1:0][NN-1:0][15:0] node_fire_code;
  logic [NQ-1:0] quad_phase_valid;
  logic [NQ-1:0][15:0] quad_phase, quad_period;
  logic [15:0] servo_setpoint = 16'd40, ext_phase;
  logic pll_delay_step, pll_delay_dir, servo_lock;
  int checks = 0, failures = 0;

  tdlink_system #(.N_LINKS(NL), .N_NODES(NN), .LANES_PER_QUAD(LPQ), .TRAIN_GAP(120),
                  .KA_PERIOD(KA), .BUF_WORDS(BW), .EVT_DEPTH(64)) dut (.*);

  // ---------------- clocks ----------------
  always #(HALF) clk = ~clk;
  initial forever #3.225 clk_dmtd = ~clk_dmtd;
  realtime adj [NL];
  int pi_net [NL], pi_steps [NL];
  for (genvar l = 0; l < NL; l++) begin : g_x
    initial begin
      automatic realtime d;
      adj[l] = 0.0;
      #(0.4 + 0.9 * l);
      forever begin
        d = HALF + adj[l];
        adj[l] = 0.0;
        #(d) xclk[l] = ~xclk[l];
      end
    end
    always @(posedge clk) if (pi_step[l]) begin
      adj[l] = adj[l] + (pi_dir[l] ? 0.2 : -0.2);
      pi_net[l] += pi_dir[l] ? 1 : -1;
      pi_steps[l]++;
    end
  end
  realtime ref_adj = 0.0;
  int servo_steps = 0, ref_net = 0;
  initial begin
    automatic realtime d;
    #(2.1);
    forever begin
      d = HALF + ref_adj;
      ref_adj = 0.0;
      #(d) clk_master_ref = ~clk_master_ref;
    end
  end
  always @(posedge clk_dmtd) if (pll_delay_step) begin
    ref_adj = ref_adj + (pll_delay_dir ? -0.1 : 0.1);   // delay of the local clock = master ref earlier
    ref_net += pll_delay_dir ? 1 : -1;
    servo_steps++;
  end

  // ---------------- raw receive words: dual comma every KA/3 cycles ----------------
  localparam string K_RDP = "1100000101";
  localparam string K_RDN = "0011111010";
  logic [19:0] dual;
  initial for (int i = 0; i < 10; i++) begin
    dual[i] = (K_RDP[i] == "1");
    dual[10 + i] = (K_RDN[i] == "1");
  end
  logic [NL-1:0] comma_on = '1;
  int kcnt = 0;
  always @(posedge clk) begin
    kcnt <= (kcnt == KA / 3) ? 0 : kcnt + 1;
    for (int l = 0; l < NL; l++)
      raw_rx[l] <= (kcnt == 0 && comma_on[l]) ? dual : 20'h5A5A5;
  end

  // ---------------- event sources ----------------
  int sent [NL][NN];
  bit evt_on = 0;
  for (genvar l = 0; l < NL; l++) begin : g_src
    for (genvar n = 0; n < NN; n++) begin : g_n
      initial sent[l][n] = 0;
      always @(posedge xclk[l]) begin
        if (evt_on && evt_valid[l][n] && evt_ready[l][n]) sent[l][n] = sent[l][n] + 1;
        evt_valid[l][n] <= evt_on && sent[l][n] < NWORDS;
        evt_word[l][n]  <= {4'(l), 4'(n), 24'(sent[l][n])};
      end
    end
  end

  // ---------------- scoreboard ----------------
  int got [NL][NN];
  int n_bad_word = 0, n_sp = 0, n_sp_bad = 0, n_rd = 0, n_irq_rise = 0;
  logic [31:0] rd_data_seen;
  logic [NL-1:0] irq_q = '0;
  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < NL; l++) begin
      if (buf_wr[l]) begin
        int b, s;
        b = int'(buf_data[l][35:32]);
        s = int'(buf_data[l][23:0]);
        if (b >= NN || buf_data[l][31:28] != 4'(l) || buf_data[l][27:24] != 4'(b) || s != got[l][b])
          n_bad_word++;
        else got[l][b]++;
      end
      if (sp_done[l]) begin n_sp++; if (!sp_crc_ok[l]) n_sp_bad++; end
      if (rd_resp_valid[l]) begin n_rd++; rd_data_seen = rd_resp_data[l]; end
      if (irq[l] && !irq_q[l]) n_irq_rise++;
    end
    irq_q <= irq;
  end
  int n_quad_valid [NQ];
  always @(posedge clk_dmtd) for (int q = 0; q < NQ; q++) if (quad_phase_valid[q]) n_quad_valid[q]++;
  realtime fire_t [NL][NN];
  int n_fire = 0;
  for (genvar l = 0; l < NL; l++) begin : g_f
    for (genvar n = 0; n < NN; n++) begin : g_n
      always @(posedge xclk[l]) if (node_fire[l][n] && evt_on) begin
        fire_t[l][n] = $realtime;
        n_fire++;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_cp(input int l, input cp_type_e typ, input logic [7:0] board,
                         input logic [31:0] addr, input logic [31:0] data,
                         input logic [15:0] code, input logic [47:0] ts);
    @(negedge clk);
    cp_req[l] = '0;
    cp_req[l].typ = typ; cp_req[l].board = board; cp_req[l].addr = addr;
    cp_req[l].data = data; cp_req[l].code = code; cp_req[l].ts = ts;
    cp_valid[l] = 1'b1;
    do @(posedge clk); while (!cp_ready[l]);
    @(negedge clk) cp_valid[l] = 1'b0;
  endtask

  // the same packet on every lane, offered in the same cycle (lanes run in lockstep)
  task automatic all_cp(input cp_type_e typ, input logic [7:0] board,
                        input logic [31:0] addr, input logic [31:0] data,
                        input logic [15:0] code = 0, input logic [47:0] ts = 0);
    logic [NL-1:0] done;
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      cp_req[l] = '0;
      cp_req[l].typ = typ; cp_req[l].board = board; cp_req[l].addr = addr;
      cp_req[l].data = data; cp_req[l].code = code; cp_req[l].ts = ts;
    end
    cp_valid = '1;
    done = '0;
    do begin
      @(posedge clk);
      done = done | cp_ready;
      #0.1 cp_valid = ~done;
    end while (done != '1);
    @(negedge clk) cp_valid = '0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total, dmin, dmax, hop;
    realtime tmin, tmax;
    longint ts0;
    cp_req = '0;
    for (int l = 0; l < NL; l++) for (int n = 0; n < NN; n++) got[l][n] = 0;
    repeat (10) @(negedge clk);
    rst = 0;
    repeat (40) @(negedge clk);
    // 1. start-up alignment of the transmit elastic buffers
    align_start = 1;
    @(negedge clk) align_start = 0;
    wait (&align_locked || |align_fail);
    repeat (20) @(negedge clk);
    for (int l = 0; l < NL; l++)
      check(align_locked[l] && !align_fail[l] && pi_steps[l] > 0,
            $sformatf("lane %0d aligned after %0d PI steps", l, pi_steps[l]));
    // 2. trains, fragment size 4, events
    train_en = 1;
    all_cp(CP_REG_WR, BCAST, 32'h00, 32'd4);
    repeat (50) @(negedge clk);
    evt_on = 1;
    // 3. register read and ping
    send_cp(2, CP_REG_WR, 8'd1, 32'h14, 32'hCAFE_0042, 0, 0);
    send_cp(2, CP_REG_RD, 8'd1, 32'h14, 0, 0, 0);
    send_cp(1, CP_PING, BCAST, 0, 0, 0, 0);
    // 4. drain: read the buffer in blocks whenever the interrupt is up
    for (int c = 0; c < 40; c++) begin
      repeat (200) @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        buf_rd_valid[l] = irq[l];
        buf_rd_words[l] = 16'd16;
      end
      @(negedge clk) buf_rd_valid = '0;
    end
    total = 0;
    for (int l = 0; l < NL; l++) for (int n = 0; n < NN; n++) begin
      check(got[l][n] == NWORDS, $sformatf("lane %0d board %0d: %0d of %0d words", l, n, got[l][n], NWORDS));
      total += got[l][n];
    end
    check(n_bad_word == 0, $sformatf("%0d misordered or mis-tagged words", n_bad_word));
    check(n_sp > total / 4, $sformatf("fragmentation: %0d sub-packets for %0d words", n_sp, total));
    check(n_sp_bad == 0 && frame_errors == '0, "no CRC or framing errors");
    check(n_rd == 1 && rd_data_seen == 32'hCAFE_0042 && rd_resp_board[2] == 4'd1, "register read answered");
    check(rtt_cycles[1] > 0, $sformatf("round trip measured: %0d cycles", rtt_cycles[1]));
    check(n_irq_rise > 0, "occupancy interrupt raised");
    // 5. T0 without correction: hop latency is constant along each ring
    all_cp(CP_T0, BCAST, 0, 0);
    repeat (600) @(negedge clk);
    hop = int'(node_timestamp[0][0] - node_timestamp[0][1]);
    for (int l = 0; l < NL; l++) for (int n = 0; n + 1 < NN; n++)
      check(int'(node_timestamp[l][n] - node_timestamp[l][n+1]) inside {[hop - 1 : hop + 1]},
            $sformatf("fixed hop latency lane %0d board %0d", l, n));
    check(hop > 0, $sformatf("hop latency %0d cycles", hop));
    // per-board correction = position on the ring times the hop latency
    for (int n = 0; n < NN; n++) all_cp(CP_REG_WR, 8'(n), 32'h04, 32'(n * hop));
    all_cp(CP_T0, BCAST, 0, 0);
    repeat (600) @(negedge clk);
    ts0 = longint'(node_timestamp[0][0]);
    dmin = 0; dmax = 0;
    for (int l = 0; l < NL; l++) for (int n = 0; n < NN; n++) begin
      int d;
      d = int'(longint'(node_timestamp[l][n]) - ts0);
      if (d < dmin) dmin = d;
      if (d > dmax) dmax = d;
      check(node_timestamp[l][n] == node_timestamp[l][0], $sformatf("lane %0d board %0d time stamp equals board 0", l, n));
    end
    // across lanes the transmit clocks differ in phase, so one count of spread is allowed
    check(dmax - dmin <= 1, $sformatf("T0-aligned time stamps spread %0d..%0d", dmin, dmax));
    // 6. broadcast timed command
    all_cp(CP_CMD, BCAST, 0, 0, 16'h00C5, 48'(ts0 + 2000));
    repeat (2500) @(negedge clk);
    check(n_fire == NL * NN, $sformatf("%0d boards fired", n_fire));
    tmin = fire_t[0][0]; tmax = fire_t[0][0];
    for (int l = 0; l < NL; l++) for (int n = 0; n < NN; n++) begin
      if (fire_t[l][n] < tmin) tmin = fire_t[l][n];
      if (fire_t[l][n] > tmax) tmax = fire_t[l][n];
      check(node_fire_code[l][n] == 16'h00C5, "command code");
    end
    check(tmax - tmin < 2 * HALF, $sformatf("command fired within %0t", tmax - tmin));
    // 7. keep-alive: nodes kept alive, lane 3 loses its commas
    check(node_link_lost == '0, "boards see the keep-alive commas");
    check(rx_aligned == '1 && link_lost == '0, "receive words aligned, links up");
    comma_on[3] = 0;
    repeat (KA * 2) @(negedge clk);
    check(link_lost == 4'b1000, $sformatf("link loss detected on lane 3 only (%b)", link_lost));
    // 8. DDMTD and inter-concentrator servo
    for (int q = 0; q < NQ; q++) check(n_quad_valid[q] > 0, $sformatf("quad %0d phase readings", q));
    servo_en = 1;
    $display("servo start ext_phase %0d", ext_phase);
    fork
      wait (servo_lock);
      forever begin #50000; $display("%0t servo steps %0d net %0d ext_phase %0d", $realtime, servo_steps, ref_net, ext_phase); end
    join_any
    disable fork;
    repeat (100) @(negedge clk);
    check(servo_steps > 0 && servo_lock, $sformatf("servo locked after %0d steps", servo_steps));
    $display("mechanisms: pi_steps=%0d/%0d/%0d/%0d sub-packets=%0d rd=%0d irq=%0d hop=%0d fires=%0d servo_steps=%0d rtt=%0d",
             pi_steps[0], pi_steps[1], pi_steps[2], pi_steps[3], n_sp, n_rd, n_irq_rise, hop,
             n_fire, servo_steps, rtt_cycles[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

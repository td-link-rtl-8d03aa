// tb_conc_link_tx: self-checking test of the concentrator downstream transmitter.
//
// The test queues one control packet of every type, enables trains every 300 cycles with a
// 40-cycle post-train gap, and raises two keep-alive requests. It records the output
// stream and checks against the reference builders: every packet appears in order with
// the reference CRC and is followed by an idle; every train is HEADER, TRAILER, LAST COMMA
// followed by at least 40 idles; trains start exactly 300 cycles apart when nothing
// delays them; each keep-alive request yields one dual comma within 10 cycles; the
// t0_sent and ping_sent strobes coincide with their start words.
module tb_conc_link_tx;
  import tdl_pkg::*;
  `include "tdl_tb_funcs.svh"


  logic clk = 0, rst = 1, train_en = 0, ka_req = 0, cp_valid = 0, cp_ready;
  logic [31:0] train_period = 300;
  cp_req_t cp_req;
  sym_t sym_out;
  logic train_sent, t0_sent, ping_sent;
  int checks = 0, failures = 0;
  int cyc = 0;
  sym_t trace [$];
  int   t0_at [$], ping_at [$], train_at [$];

  always #3.2 clk = ~clk;
  conc_link_tx #(.TRAIN_GAP(40)) dut (
    .clk, .rst, .train_en, .train_period, .ka_req, .cp_valid, .cp_ready, .cp_req,
    .sym_out, .train_sent, .t0_sent, .ping_sent);

  always @(posedge clk) if (!rst) begin
    trace.push_back(sym_out);
    if (t0_sent) t0_at.push_back(trace.size() - 1);
    if (ping_sent) ping_at.push_back(trace.size() - 1);
    if (train_sent) train_at.push_back(trace.size() - 1);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cp_req_t reqs [5];
  initial begin
    sym_q exp_pk [5];
    int ka_at [2];
    reqs[0] = '{typ: CP_REG_WR, board: 8'h03, addr: 32'h0000_0014, data: 32'hCAFE_F00D, code: '0, ts: '0};
    reqs[1] = '{typ: CP_REG_RD, board: 8'h05, addr: 32'h0000_0018, data: '0, code: '0, ts: '0};
    reqs[2] = '{typ: CP_CMD,    board: 8'hFF, addr: '0, data: '0, code: 16'h0001, ts: 48'h1234_5678_9ABC};
    reqs[3] = '{typ: CP_T0,     board: 8'hFF, addr: '0, data: '0, code: '0, ts: '0};
    reqs[4] = '{typ: CP_PING,   board: 8'hFF, addr: '0, data: '0, code: '0, ts: '0};
    foreach (reqs[i]) exp_pk[i] = ctrl_packet(reqs[i].typ, reqs[i].board, reqs[i].addr,
                                              reqs[i].data, reqs[i].code, reqs[i].ts);
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk) train_en = 1;
    foreach (reqs[i]) begin
      @(negedge clk);
      cp_req = reqs[i]; cp_valid = 1;
      do @(posedge clk); while (!cp_ready);
      #0.1 cp_valid = 0;
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    @(negedge clk) ka_req = 1; ka_at[0] = trace.size();
    @(negedge clk) ka_req = 0;
    repeat (500) @(negedge clk);
    ka_req = 1; ka_at[1] = trace.size();
    @(negedge clk) ka_req = 0;
    repeat (1200) @(negedge clk);

    // ---- packets, in order, each followed by an idle ----
    begin
      int pos; pos = 0;
      foreach (exp_pk[p]) begin
        int found; found = -1;
        for (int i = pos; i + exp_pk[p].size() < trace.size(); i++) begin
          bit m; m = 1;
          for (int j = 0; j < exp_pk[p].size(); j++) if (trace[i+j] != exp_pk[p][j]) m = 0;
          if (m) begin found = i; break; end
        end
        check(found >= 0, $sformatf("packet %0d found with reference CRC", p));
        if (found >= 0) begin
          check(trace[found + exp_pk[p].size()] == mk_k(IDLE), $sformatf("idle after packet %0d", p));
          if (p == 3) check(t0_at.size() == 1 && t0_at[0] == found, "t0_sent on T0 start word");
          if (p == 4) check(ping_at.size() == 1 && ping_at[0] == found, "ping_sent on ping start word");
          pos = found + 1;
        end
      end
    end
    // ---- trains ----
    begin
      int nt, spaced; nt = 0; spaced = 0;
      for (int i = 0; i + 45 < trace.size(); i++) begin
        if (trace[i] == mk_k(HEADER)) begin
          bit gap_ok; gap_ok = 1;
          nt++;
          check(trace[i+1] == mk_k(TRAILER) && trace[i+2] == mk_k(LAST_COMMA), "train framing");
          for (int g = 3; g < 43; g++) if (trace[i+g] != mk_k(IDLE) && trace[i+g] != mk_k(DUAL_COMMA)) gap_ok = 0;
          check(gap_ok, "idle gap after train");
        end
      end
      check(nt >= 5 && nt == train_at.size(), $sformatf("%0d trains sent", nt));
      for (int i = 1; i < train_at.size(); i++) if (train_at[i] - train_at[i-1] == 300) spaced++;
      check(spaced >= train_at.size() - 3, $sformatf("%0d of %0d train intervals exactly 300", spaced, train_at.size() - 1));
    end
    // ---- keep-alive ----
    foreach (ka_at[k]) begin
      int d; d = -1;
      for (int i = ka_at[k]; i < ka_at[k] + 10 && i < trace.size(); i++)
        if (trace[i] == mk_k(DUAL_COMMA)) begin d = i; break; end
      check(d >= 0, $sformatf("dual comma %0d sent", k));
    end
    begin
      int nd; nd = 0;
      foreach (trace[i]) if (trace[i] == mk_k(DUAL_COMMA)) nd++;
      check(nd == 2, $sformatf("exactly two dual commas (%0d)", nd));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

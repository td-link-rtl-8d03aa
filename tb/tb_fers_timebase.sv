// tb_fers_timebase: self-checking test of the board time base and timed-command queue.
//
// Checks that T0 loads the correction value (the time stamp reads t0_corr+k, k cycles
// after the T0 strobe); that each queued command fires exactly once, with its code, in
// the cycle after the time stamp equals cmd_ts + cmd_corr; that a command whose time has
// passed counts as late; and that a fifth pending command counts as an overflow. 200
// random commands with distinct future times are then checked against a reference list.
module tb_fers_timebase;
  logic clk = 0, rst = 1, t0 = 0, cmd_valid = 0;
  logic [47:0] t0_corr = 0, cmd_corr = 0, cmd_ts = 0, timestamp;
  logic [15:0] cmd_code = 0, fire_code;
  logic t0_done, fire;
  logic [7:0] late_cnt, overflow_cnt;
  int checks = 0, failures = 0;

  always #3.2 clk = ~clk;
  fers_timebase dut (.clk, .rst, .t0, .t0_corr, .cmd_corr, .cmd_valid, .cmd_code, .cmd_ts,
    .timestamp, .t0_done, .fire, .fire_code, .late_cnt, .overflow_cnt);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected fire list: {target, code}
  logic [63:0] pend [$];
  int n_fired = 0, n_bad = 0;
  always @(posedge clk) if (!rst && fire) begin
    int hit;
    hit = -1;
    foreach (pend[i]) if (pend[i][63:16] + 48'd1 == timestamp && pend[i][15:0] == fire_code) hit = i;
    if (hit < 0) begin n_bad++; $display("unexpected fire code %h at %0d", fire_code, timestamp); end
    else pend.delete(hit);
    n_fired++;
  end

  task automatic issue(input logic [47:0] ts, input logic [15:0] code);
    @(negedge clk) begin cmd_valid = 1; cmd_ts = ts; cmd_code = code; end
    @(negedge clk) cmd_valid = 0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [47:0] base, t;
    int nf;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (10) @(negedge clk);
    check(!t0_done, "no T0 yet");
    t0_corr = 48'd1000;
    cmd_corr = 48'd7;
    t0 = 1;
    @(negedge clk) t0 = 0;
    check(t0_done && timestamp == 48'd1000, $sformatf("T0 loads correction (%0d)", timestamp));
    repeat (5) @(negedge clk);
    check(timestamp == 48'd1005, "time stamp counts");
    // one command
    pend.push_back({48'd1050 + 48'd7, 16'h0011});
    issue(48'd1050, 16'h0011);
    // late command
    issue(48'd900, 16'h0022);
    check(late_cnt == 1, "late command counted");
    repeat (70) @(negedge clk);
    check(n_fired == 1 && pend.size() == 0 && n_bad == 0, "command fired at its time");
    // overflow: five pending
    base = timestamp + 48'd200;
    for (int i = 0; i < 5; i++) begin
      if (i < 4) pend.push_back({base + 48'(i) + 48'd7, 16'(16'h100 + i)});
      issue(base + 48'(i), 16'(16'h100 + i));
    end
    check(overflow_cnt == 1, "fifth command overflows");
    repeat (250) @(negedge clk);
    check(n_fired == 5 && pend.size() == 0 && n_bad == 0, "four queued commands fired in order");
    // random
    nf = n_fired;
    for (int i = 0; i < 200; i++) begin
      t = timestamp + 48'd20 + 48'($urandom_range(0, 60));
      if (pend.size() < 3) begin
        bit clash;
        clash = 0;
        foreach (pend[j]) if (pend[j][63:16] == t + 48'd7) clash = 1;
        if (!clash) begin
          pend.push_back({t + 48'd7, 16'(i)});
          issue(t, 16'(i));
          nf++;
        end
      end
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    check(pend.size() == 0, $sformatf("all random commands fired (%0d left)", pend.size()));
    check(n_fired == nf && n_bad == 0, "no spurious fires");
    check(late_cnt == 1 && overflow_cnt == 1, "no further late or overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

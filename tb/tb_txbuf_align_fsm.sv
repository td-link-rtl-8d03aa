// tb_txbuf_align_fsm: self-checking test of the TX-buffer phase alignment FSM.
//
// A behavioural lane stands in for the transceiver: the PI position plus a random start
// offset gives a phase code modulo PERIOD_STEPS, and the half-full flag is 1 on the upper
// half of the period, seen by the FSM two cycles late (synchronizer). For many random start
// offsets the expected lock position is computed directly from the flow chart (decrement
// while the flag is 1, then increment until it turns 1) and compared with the FSM, together
// with the number of steps and the cycles the alignment took, and the absence of any PI
// movement after lock.
module tb_txbuf_align_fsm;
  localparam int SETTLE = 6;
  localparam int PERIOD_STEPS = 40;

  logic clk = 0, rst = 1, start = 0;
  logic flag, pi_step, pi_dir, locked, fail, busy;
  logic signed [11:0] pi_pos;
  int checks = 0, failures = 0;
  int offset, pos_model;
  logic f_d1, f_d2;

  always #3.2 clk = ~clk;

  txbuf_align_fsm #(.SETTLE(SETTLE), .MAX_STEPS(200), .POS_W(12)) dut (
    .clk, .rst, .start, .txbufstatus0(flag), .pi_step, .pi_dir, .pi_pos,
    .locked, .fail, .busy);

  function automatic logic flag_at(int p);
    int m;
    m = ((p % PERIOD_STEPS) + PERIOD_STEPS) % PERIOD_STEPS;
    return m >= PERIOD_STEPS / 2;
  endfunction

  // lane model: tracks PI steps independently of the FSM's own counter
  always_ff @(posedge clk) begin
    if (rst) pos_model <= 0;
    else if (pi_step) pos_model <= pos_model + (pi_dir ? 1 : -1);
    f_d1 <= flag_at(offset + pos_model);
    f_d2 <= f_d1;
  end
  assign flag = f_d2;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 30; t++) begin
      int exp_pos, nsteps, cyc, k;
      offset = (t < 2) ? t * (PERIOD_STEPS / 2) : int'($urandom_range(0, PERIOD_STEPS - 1));
      rst = 1;
      repeat (4) @(posedge clk);
      rst = 0;
      repeat (4) @(posedge clk);
      // expected result from the flow chart
      exp_pos = 0;
      nsteps  = 0;
      if (flag_at(offset)) begin
        while (flag_at(offset + exp_pos)) begin exp_pos--; nsteps++; end
      end
      while (!flag_at(offset + exp_pos)) begin exp_pos++; nsteps++; end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 0;
      while (!locked && !fail && cyc < 5000) begin @(posedge clk); cyc++; end
      check(locked, $sformatf("offset %0d: locked", offset));
      check(pos_model == exp_pos, $sformatf("offset %0d: pi position %0d expected %0d", offset, pos_model, exp_pos));
      check(int'(pi_pos) == exp_pos, "reported pi_pos");
      // each step costs SETTLE+1 cycles plus the decision cycles
      check(cyc <= nsteps * (SETTLE + 1) + 8 && cyc >= nsteps * (SETTLE + 1),
            $sformatf("offset %0d: %0d cycles for %0d steps", offset, cyc, nsteps));
      // locked on the rising edge of the flag: one step lower it must read 0
      check(flag_at(offset + pos_model) && !flag_at(offset + pos_model - 1), "lock on 0->1 edge");
      k = pos_model;
      repeat (100) @(posedge clk);
      check(pos_model == k && locked, "PI frozen after lock");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ddmtd_servo: closed-loop test of the inter-concentrator phase servo.
//
// A behavioural plant stands in for the slave's input PLL and DDMTD: the reading is
// (start phase + net delay steps * STEP) modulo the beat period, plus +-1 count of noise.
// For several start phases and setpoints, including ones where the short way round
// crosses the period boundary, the servo must reach lock, end within the dead band of the
// setpoint, and use no more steps than the short-way distance needs (plus two, for a
// reading taken just before a step lands).
module tb_ddmtd_servo;
  localparam int PERIOD = 1000;
  localparam int STEP   = 5;
  logic clk = 0, rst = 1, enable = 0;
  logic [15:0] setpoint, phase, period;
  logic phase_valid = 0, delay_step, delay_dir, in_lock;
  logic signed [20:0] last_err;
  int checks = 0, failures = 0;
  int net = 0, nsteps = 0, start_ph;

  always #3.2 clk = ~clk;

  ddmtd_servo #(.CNT_W(16), .AVG_LOG2(2), .DEADBAND(3), .HOLDOFF(1), .LOCK_CNT(3)) dut (
    .clk, .rst, .enable, .setpoint, .phase_valid, .phase, .period,
    .delay_step, .delay_dir, .last_err, .in_lock);

  assign period = 16'(PERIOD);

  function automatic int wrap(int v);
    return ((v % PERIOD) + PERIOD) % PERIOD;
  endfunction

  always_ff @(posedge clk) if (delay_step) begin
    net    <= net + (delay_dir ? 1 : -1);
    nsteps <= nsteps + 1;
  end

  // one reading every 8 cycles
  initial forever begin
    repeat (7) @(posedge clk);
    phase       <= 16'(wrap(start_ph + net * STEP + int'($urandom_range(0, 2)) - 1));
    phase_valid <= 1'b1;
    @(posedge clk);
    phase_valid <= 1'b0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sp [4] = '{500, 100, 950, 20};
    int st [4] = '{300, 900, 50, 20};
    for (int t = 0; t < 4; t++) begin
      int d, need, cyc;
      rst = 1; enable = 0;
      start_ph = st[t];
      setpoint = 16'(sp[t]);
      @(posedge clk);
      net = 0; nsteps = 0;
      rst = 0; enable = 1;
      cyc = 0;
      while (!in_lock && cyc < 200000) begin @(posedge clk); cyc++; end
      d = wrap(start_ph + net * STEP - sp[t]);
      if (d > PERIOD / 2) d = d - PERIOD;
      need = wrap(st[t] - sp[t]);
      if (need > PERIOD / 2) need = PERIOD - need;
      check(in_lock, $sformatf("case %0d: lock", t));
      check(d >= -(3 + STEP) && d <= 3 + STEP, $sformatf("case %0d: residual error %0d", t, d));
      check(nsteps <= need / STEP + 2, $sformatf("case %0d: %0d steps for distance %0d", t, nsteps, need));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

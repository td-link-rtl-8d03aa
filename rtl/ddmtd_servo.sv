// ddmtd_servo: inter-concentrator phase loop controller.
//
// On a slave concentrator a DDMTD compares the recovered clock with the master reference.
// This controller averages AVG consecutive phase readings, expresses the mean as a signed
// error against a setpoint (wrapped to +-half a beat period so the loop takes the short
// way round), and when the error exceeds DEADBAND issues one delay step towards zero on
// the programmable input delay of the external input PLL (delay_step pulse, delay_dir 1 =
// add delay). It then waits HOLDOFF readings so the step is seen before deciding again,
// which keeps the loop bandwidth far below the measurement rate. The paper states only
// that the DDMTD reading drives a slow closed-loop correction of that delay; the
// averaging, dead band, hold-off and step interface are this design's choices.
// in_lock is raised after LOCK_CNT consecutive averaged errors within the dead band.
module ddmtd_servo #(
  parameter int unsigned CNT_W    = 16,
  parameter int unsigned AVG_LOG2 = 4,
  parameter int unsigned DEADBAND = 2,
  parameter int unsigned HOLDOFF  = 2,
  parameter int unsigned LOCK_CNT = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             enable,
  input  logic [CNT_W-1:0] setpoint,
  input  logic             phase_valid,
  input  logic [CNT_W-1:0] phase,
  input  logic [CNT_W-1:0] period,
  output logic             delay_step,
  output logic             delay_dir,
  output logic signed [CNT_W+AVG_LOG2:0] last_err,
  output logic             in_lock
);
  localparam int unsigned AVG = 1 << AVG_LOG2;
  localparam int unsigned AW  = CNT_W + AVG_LOG2 + 1;

  logic signed [AW-1:0] acc, err_now;
  logic signed [CNT_W:0] e, half;
  logic [AVG_LOG2:0]     n;
  logic [$clog2(HOLDOFF+1)-1:0] hold;
  logic [$clog2(LOCK_CNT+1)-1:0] good;

  // wrapped single-sample error
  always_comb begin
    half = $signed({1'b0, period}) >>> 1;
    e    = $signed({1'b0, phase}) - $signed({1'b0, setpoint});
    if (e > half)       e = e - $signed({1'b0, period});
    else if (e < -half) e = e + $signed({1'b0, period});
    err_now = AW'(e);
  end

  always_ff @(posedge clk) begin
    if (rst || !enable) begin
      acc        <= '0;
      n          <= '0;
      hold       <= '0;
      good       <= '0;
      delay_step <= 1'b0;
      delay_dir  <= 1'b0;
      last_err   <= '0;
      in_lock    <= 1'b0;
    end else begin
      delay_step <= 1'b0;
      if (phase_valid) begin
        if (hold != 0) begin
          hold <= hold - 1'b1;          // discard readings taken around a step
        end else if (n == (AVG_LOG2+1)'(AVG - 1)) begin
          last_err <= (acc + err_now) >>> AVG_LOG2;
          acc      <= '0;
          n        <= '0;
          if ((acc + err_now) >>> AVG_LOG2 > $signed(AW'(DEADBAND))) begin
            delay_step <= 1'b1;
            delay_dir  <= 1'b0;         // phase late w.r.t. setpoint: remove delay
            hold       <= HOLDOFF[$bits(hold)-1:0];
            good       <= '0;
            in_lock    <= 1'b0;
          end else if ((acc + err_now) >>> AVG_LOG2 < -$signed(AW'(DEADBAND))) begin
            delay_step <= 1'b1;
            delay_dir  <= 1'b1;
            hold       <= HOLDOFF[$bits(hold)-1:0];
            good       <= '0;
            in_lock    <= 1'b0;
          end else if (good == LOCK_CNT[$bits(good)-1:0]) begin
            in_lock <= 1'b1;
          end else begin
            good <= good + 1'b1;
          end
        end else begin
          acc <= acc + err_now;
          n   <= n + 1'b1;
        end
      end
    end
  end
endmodule

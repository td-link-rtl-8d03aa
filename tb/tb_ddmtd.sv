// tb_ddmtd: self-checking test of the DDMTD phase detector.
//
// clk_a runs at 6.4 ns (156.25 MHz); clk_b is the same clock delayed by phi; clk_dmtd runs
// at 6.45 ns, so the sampling instant slides by 50 ps per cycle along the input period and
// the beat period is 128 clk_dmtd cycles (magnification 128 here; the paper's 1e4 only
// changes the constant). Expected readings follow from that alone:
// phase = phi / 50 ps and period = 128, within +-2 counts. clk_a and clk_b get +-40 ps of
// random jitter on every edge, which makes the raw samples chatter around each beat
// transition; the deglitcher must still give one clean edge per beat, which the period
// check verifies.
module tb_ddmtd;
  localparam realtime TIN  = 6.4;
  localparam realtime TDM  = 6.45;
  localparam realtime SLIP = TDM - TIN;

  logic clk_a = 0, clk_b = 0, clk_dmtd = 0, rst = 1;
  logic phase_valid, period_valid;
  logic [15:0] phase, period;
  realtime phi = 1.6;
  int checks = 0, failures = 0;

  function automatic realtime jit();
    return (real'($urandom_range(0, 80)) - 40.0) / 1000.0;
  endfunction

  initial forever begin
    automatic realtime j = jit();
    #(TIN / 2 + j) clk_a = 1;
    #(TIN / 2 - j) clk_a = 0;
  end
  always @(posedge clk_a) begin
    automatic realtime j = jit() / 2.0;
    fork begin #(phi + j) clk_b = 1; #(TIN / 2) clk_b = 0; end join_none
  end
  initial begin
    #0.013;
    forever #(TDM / 2) clk_dmtd = ~clk_dmtd;
  end

  ddmtd #(.CNT_W(16), .DEGLITCH(8)) dut (
    .clk_a, .clk_b, .clk_dmtd, .rst, .phase_valid, .phase, .period_valid, .period);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime phis [5] = '{0.8, 1.6, 3.2, 4.8, 6.0};
    repeat (4) @(posedge clk_dmtd);
    rst = 0;
    foreach (phis[i]) begin
      int expv, nper, nph, okper, okph;
      phi = phis[i];
      expv = int'(phi / SLIP);
      // let two beats pass after the change, then look at the next four
      nph = 0; nper = 0; okper = 0; okph = 0;
      repeat (2) @(posedge phase_valid);
      while (nph < 4) begin
        @(posedge clk_dmtd);
        if (period_valid) begin
          nper++;
          if (period >= 126 && period <= 130) okper++; else $display("period %0d", period);
        end
        if (phase_valid) begin
          nph++;
          if (int'(phase) >= expv - 2 && int'(phase) <= expv + 2) okph++;
          else $display("phi=%0.2f ns: phase %0d expected %0d", phi, phase, expv);
        end
      end
      check(okph == 4, $sformatf("phi=%0.2f ns: 4 phase readings near %0d", phi, expv));
      check(nper >= 3 && okper == nper, $sformatf("phi=%0.2f ns: beat period 128 (%0d of %0d)", phi, okper, nper));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tx_elastic_buffer: self-checking test of the mesochronous elastic buffer.
//
// The read clock is the write clock delayed by a variable amount, as the transmit phase
// interpolator does to the serializer clock. The test writes an incrementing count and
// checks that the read side returns it in order with no gap, before and while the delay
// is swept. Delaying the read clock can only make the buffer fuller, so during an upward
// sweep of two clock periods the half-full flag may rise but never fall, and during the
// downward sweep it may fall but never rise (the test sweeps down first, then up); each direction must show its
// transition at least once (the flag is a phase detector). The error flag must stay 0.
module tb_tx_elastic_buffer;
  localparam realtime HALF = 3.2;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic [16:0] wdata, rdata;
  logic half_full, err, rvalid;
  realtime dly = 0.3;
  int checks = 0, failures = 0;
  int rises = 0, falls = 0, bad_dir = 0, seq_err = 0, nread = 0;
  logic [16:0] expect_next;
  logic started = 0;

  always #HALF wclk = ~wclk;
  // read clock: same period, phase moved by 'adj' once each time the test sets it
  realtime adj = 0.0;
  initial begin
    #(dly);
    forever begin
      automatic realtime d = HALF + adj;
      adj = 0.0;
      #(d);
      rclk = ~rclk;
    end
  end

  tx_elastic_buffer #(.W(17), .DEPTH(16), .START_GAP(4)) dut (
    .wclk, .wrst, .wdata, .half_full, .err, .rclk, .rrst, .rdata, .rvalid);

  always_ff @(posedge wclk) wdata <= wrst ? 17'd0 : wdata + 1'b1;

  always_ff @(posedge rclk) begin
    if (rvalid) begin
      if (started && rdata != expect_next) seq_err <= seq_err + 1;
      expect_next <= rdata + 1'b1;
      started     <= 1'b1;
      nread       <= nread + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev;
    repeat (5) @(posedge wclk);
    wrst = 0; rrst = 0;
    repeat (100) @(posedge wclk);
    check(nread > 80, "reads started");
    check(seq_err == 0, "data in order at fixed phase");
    prev = half_full;
    // sweep the read phase earlier by two periods in 0.2 ns steps, then back
    for (int i = 0; i < 64; i++) begin
      adj = -0.2;
      repeat (12) @(posedge wclk);
      if (half_full && !prev) begin rises++; bad_dir++; end
      if (!half_full && prev) falls++;
      prev = half_full;
    end
    check(bad_dir == 0, "flag never rises while the read clock is advanced");
    check(falls >= 1, $sformatf("flag fell during downward sweep (%0d)", falls));
    bad_dir = 0;
    for (int i = 0; i < 64; i++) begin
      adj = 0.2;
      repeat (12) @(posedge wclk);
      if (half_full && !prev) rises++;
      if (!half_full && prev) begin falls++; bad_dir++; end
      prev = half_full;
    end
    check(bad_dir == 0, "flag never falls while the read clock is delayed");
    check(rises >= 1, $sformatf("flag rose during upward sweep (%0d)", rises));
    check(seq_err == 0, $sformatf("data in order during sweeps (%0d errors)", seq_err));
    check(!err, "no overflow/underflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

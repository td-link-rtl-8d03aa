// tb_link_keepalive: self-checking test of the keep-alive generator and link watchdog.
//
// With PERIOD = 100 (the window is then 112), ka_req must pulse exactly every 100 cycles.
// Feeding each request back as a received comma must never declare the link lost. When
// the commas stop, link_lost must rise exactly 112 cycles after the last comma, cdr_reset
// must stay high for RESET_LEN (16) cycles, and the next comma must clear link_lost.
module tb_link_keepalive;
  logic clk = 0, rst = 1, ka_req, comma_seen = 0, link_lost, cdr_reset;
  int checks = 0, failures = 0;
  bit loop_back = 1;

  always #3.2 clk = ~clk;
  link_keepalive #(.PERIOD(100), .RESET_LEN(16)) dut (
    .clk, .rst, .ka_req, .comma_seen, .link_lost, .cdr_reset);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // the transmitter's request comes back as a received comma some cycles later
  always @(posedge clk) begin
    comma_seen <= 1'b0;
    if (ka_req && loop_back) fork begin repeat (5) @(posedge clk); comma_seen <= 1'b1; end join_none
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last, n, lost_seen, t_last_comma, t_lost, rst_len;
    repeat (3) @(posedge clk);
    rst = 0;
    // request spacing
    n = 0; last = -1; lost_seen = 0;
    for (int c = 0; c < 1000; c++) begin
      @(posedge clk);
      if (ka_req) begin
        if (last >= 0) check(c - last == 100, $sformatf("ka_req spacing %0d", c - last));
        last = c; n++;
      end
      if (link_lost) lost_seen++;
    end
    check(n >= 9, "keep-alive requests issued");
    check(lost_seen == 0, "no loss while commas arrive (after start-up)");
    // now stop the commas
    loop_back = 0;
    t_last_comma = -1;
    for (int c = 0; c < 400; c++) begin
      @(posedge clk);
      if (comma_seen) t_last_comma = c;
    end
    check(link_lost, "link declared lost");
    // measure: restart a comma and time the loss precisely
    @(negedge clk) comma_seen = 1'b1;
    @(negedge clk) comma_seen = 1'b0;
    check(!link_lost, "comma clears link_lost");
    t_lost = 0;
    while (!link_lost && t_lost < 1000) begin @(negedge clk); t_lost++; end
    check(t_lost == 112, $sformatf("loss %0d cycles after the last comma (expected 112)", t_lost));
    rst_len = 0;
    while (cdr_reset && rst_len < 100) begin @(negedge clk); rst_len++; end
    check(rst_len == 16, $sformatf("cdr_reset held %0d cycles", rst_len));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_occupancy_irq: self-checking test of the buffer occupancy counter and interrupt.
//
// Uses a 64-word buffer. Random writes and random block reads (of 1 to 20 words) run for
// 5000 cycles against a reference model of occupancy, write address, dropped-word count
// and the interrupt (occupancy >= threshold, registered). The threshold is changed during
// the run, and a write burst without reads fills the buffer to force drops.
module tb_occupancy_irq;
  localparam int BW = 64;
  logic clk = 0, rst = 1, wr = 0, rd_valid = 0;
  logic [15:0] rd_words = 0;
  logic [6:0] threshold = 7'd32, occupancy;
  logic [5:0] wr_addr;
  logic wr_accept, irq;
  logic [31:0] dropped;
  int checks = 0, failures = 0;

  always #3.2 clk = ~clk;
  occupancy_irq #(.BUF_WORDS(BW)) dut (.clk, .rst, .wr, .wr_accept, .wr_addr, .rd_valid,
    .rd_words, .threshold, .occupancy, .irq, .dropped);

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
    int occ, addr, drop, rd, n_irq, n_drop_ev;
    bit acc;
    occ = 0; addr = 0; drop = 0; n_irq = 0; n_drop_ev = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      check(occupancy == 7'(occ) && wr_addr == 6'(addr) && dropped == 32'(drop),
            $sformatf("cycle %0d occ %0d/%0d addr %0d/%0d drop %0d/%0d", c, occupancy, occ,
                      wr_addr, addr, dropped, drop));
      check(irq == (occ >= int'(threshold)), $sformatf("cycle %0d irq", c));
      if (irq) n_irq++;
      if (c % 1000 == 500) threshold = 7'($urandom_range(1, 64));
      wr = (c >= 2000 && c < 2200) ? 1'b1 : ($urandom_range(0, 1) == 1);
      rd_valid = (c >= 2000 && c < 2200) ? 1'b0 : ($urandom_range(0, 9) == 0);
      rd_words = 16'($urandom_range(1, 20));
      #0;
      check(wr_accept == (wr && occ < BW), "wr_accept");
      // model update (read first, then write), as sampled at the next edge
      rd = rd_valid ? int'(rd_words) : 0;
      if (rd > occ) rd = occ;
      acc = wr && (occ < BW);
      if (wr && !acc) begin drop++; n_drop_ev++; end
      occ = occ - rd + (acc ? 1 : 0);
      if (acc) addr = (addr + 1) % BW;
    end
    check(n_irq > 0, "interrupt raised");
    check(n_drop_ev > 0, "buffer full: writes dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_comma_align40: self-checking test of the 40-bit dual-comma aligner.
//
// A serial line is built bit by bit: random data characters, then the dual comma
// (K28.5 with RD+ then K28.5 with RD-, written here from their 6b/4b code groups
// independently of the RTL constants), then numbered 20-bit payload words. The line is
// cut into 20-bit raw words at a random bit slip. After the comma the aligner must
// report the slip as its offset, pulse comma_seen, and deliver the payload words exactly
// as they were sent. A single K28.5 alone must not cause alignment.
module tb_comma_align40;
  logic clk = 0, rst = 1;
  logic [19:0] raw_in, data_out;
  logic aligned, comma_seen;
  logic [4:0] offset;
  int checks = 0, failures = 0;

  always #3.2 clk = ~clk;
  comma_align40 dut (.clk, .rst, .raw_in, .data_out, .aligned, .comma_seen, .offset);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // code groups in transmission order a..j
  localparam string K_RDP = "1100000101";
  localparam string K_RDN = "0011111010";

  bit line [$];
  task automatic put_str(string s);
    for (int i = 0; i < s.len(); i++) line.push_back(s[i] == "1");
  endtask
  task automatic put_word(logic [19:0] w);      // bit 0 first
    for (int i = 0; i < 20; i++) line.push_back(w[i]);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 12; t++) begin
      int slip, nw, got, pay_start;
      logic [19:0] exp_words [$];
      logic [19:0] w;
      line.delete();
      exp_words.delete();
      slip = $urandom_range(0, 19);
      for (int i = 0; i < slip + 40; i++) line.push_back(1'b0);   // filler with slip
      put_str(K_RDN);                                              // lone comma: no lock
      for (int i = 0; i < 30; i++) line.push_back(i % 3 == 0);
      // pad so the dual comma starts 'slip' bits into a raw word
      while ((line.size() % 20) != slip) line.push_back(1'b0);
      put_str(K_RDP);
      put_str(K_RDN);
      for (int i = 0; i < 8; i++) begin
        w = 20'h5A000 | 20'(i * 37 + t);
        exp_words.push_back(w);
        put_word(w);
      end
      for (int i = 0; i < 40; i++) line.push_back(1'b0);
      rst = 1;
      @(negedge clk); @(negedge clk);
      rst = 0;
      nw = line.size() / 20;
      got = 0;
      pay_start = -1;
      for (int k = 0; k < nw; k++) begin
        for (int b = 0; b < 20; b++) raw_in[b] = line[k*20 + b];
        @(negedge clk);
        if (pay_start < 0) begin
          if (comma_seen) begin
            pay_start = k + 1;
            check(offset == 5'(slip), $sformatf("slip %0d: offset %0d", slip, offset));
          end else if (aligned) begin
            check(0, "aligned before the dual comma");
          end
        end else if (k >= pay_start && got < 8) begin
          // data_out now shows the word completed by the previous raw word
          check(data_out == exp_words[got], $sformatf("slip %0d word %0d: %h vs %h", slip, got, data_out, exp_words[got]));
          got++;
        end
      end
      check(pay_start >= 0, $sformatf("slip %0d: dual comma found", slip));
      check(got == 8, "all payload words seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

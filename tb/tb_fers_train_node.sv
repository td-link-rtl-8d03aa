// tb_fers_train_node: self-checking test of the FERS train forwarder / appender.
//
// Board 5 with a fragment size of 3 words holds 7 data words. Four trains are sent, each
// already carrying a sub-packet of an upstream board, separated by idles and a control
// packet. Expected output, built with the reference builders: the upstream content
// verbatim, then (second train only) a read-response sub-packet, then board 5's data
// sub-packet with 3, 3, 1 and 0 words, then TRAILER and LAST COMMA. Symbols outside the
// insertion (header, upstream words, the control packet) must leave exactly one cycle
// after they enter, and the node must be back on its fixed-latency path before the
// control packet arrives.
module tb_fers_train_node;
  import tdl_pkg::*;
  `include "tdl_tb_funcs.svh"

  logic clk = 0, rst = 1;
  sym_t sym_in, sym_out;
  logic [31:0] data_word;
  logic data_valid, data_ready, rd_pending = 0, rd_ack;
  logic [15:0] data_count;
  logic fixed_lat, inserting, hold_overflow;
  logic [15:0] trains_filled;
  int checks = 0, failures = 0;

  always #3.2 clk = ~clk;
  fers_train_node dut (
    .clk, .rst, .board_id(4'd5), .frag_words(8'd3), .sym_in, .sym_out,
    .data_word, .data_valid, .data_count, .data_ready,
    .rd_pending, .rd_addr(32'h0000_0014), .rd_data(32'h1234_ABCD), .rd_ack,
    .fixed_lat, .inserting, .trains_filled, .hold_overflow);

  // data source: 7 words
  logic [31:0] src [$];
  initial for (int i = 0; i < 7; i++) src.push_back(32'hD000_0000 + i * 32'h0101);
  int rdp = 0;
  assign data_word  = (rdp < 7) ? src[rdp] : 32'h0;
  assign data_valid = (rdp < 7);
  assign data_count = 16'(7 - rdp);
  always_ff @(posedge clk) if (data_ready) rdp <= rdp + 1;
  always_ff @(posedge clk) if (rd_ack) rd_pending <= 1'b0;

  sym_t in_tr [$], out_tr [$];
  always @(posedge clk) if (!rst) begin
    in_tr.push_back(sym_in);
    out_tr.push_back(sym_out);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(sym_t s);
    @(negedge clk) sym_in = s;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sym_q expect_q, up, cp, nonidle;
    logic [31:0] w [$];
    int nwords [4] = '{3, 3, 1, 0};
    int hdr_in [$], cp_in [$];
    sym_in = mk_k(IDLE);
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (5) send(mk_k(IDLE));
    for (int t = 0; t < 4; t++) begin
      logic [31:0] uw [$];
      uw.delete();
      uw.push_back(32'hAAAA_0000 + t);
      up = data_subpacket(4'd2, uw);
      cp = ctrl_packet(4'h1, 8'h05, 32'h0, 32'(t), 16'h0, 48'h0);
      if (t == 1) rd_pending = 1;
      // expected non-idle output for this train and the control packet after it
      expect_q.push_back(mk_k(HEADER));
      foreach (up[i]) expect_q.push_back(up[i]);
      if (t == 1) begin
        sym_q r;
        r = rdresp_subpacket(4'd5, 32'h0000_0014, 32'h1234_ABCD);
        foreach (r[i]) expect_q.push_back(r[i]);
      end
      w.delete();
      for (int i = 0; i < nwords[t]; i++) w.push_back(src[(t == 0) ? i : (t == 1 ? 3 + i : 6 + i)]);
      begin
        sym_q d;
        d = data_subpacket(4'd5, w);
        foreach (d[i]) expect_q.push_back(d[i]);
      end
      expect_q.push_back(mk_k(TRAILER));
      expect_q.push_back(mk_k(LAST_COMMA));
      foreach (cp[i]) expect_q.push_back(cp[i]);
      // drive it
      hdr_in.push_back(in_tr.size() + 1);
      send(mk_k(HEADER));
      foreach (up[i]) send(up[i]);
      send(mk_k(TRAILER));
      send(mk_k(LAST_COMMA));
      repeat (30) send(mk_k(IDLE));
      check(fixed_lat, $sformatf("train %0d: back on the fixed-latency path", t));
      cp_in.push_back(in_tr.size() + 1);
      foreach (cp[i]) send(cp[i]);
      repeat (10) send(mk_k(IDLE));
    end
    repeat (5) @(posedge clk);
    foreach (out_tr[i]) if (!is_idle(out_tr[i])) nonidle.push_back(out_tr[i]);
    check(nonidle.size() == expect_q.size(), $sformatf("output length %0d expected %0d", nonidle.size(), expect_q.size()));
    for (int i = 0; i < expect_q.size() && i < nonidle.size(); i++)
      if (nonidle[i] != expect_q[i]) begin
        check(0, $sformatf("symbol %0d: %b_%h expected %b_%h", i, nonidle[i].k, nonidle[i].d, expect_q[i].k, expect_q[i].d));
        break;
      end
    check(1, "stream compared");
    foreach (hdr_in[t]) check(out_tr[hdr_in[t] + 1] == mk_k(HEADER), $sformatf("train %0d header one cycle later", t));
    foreach (cp_in[t]) begin
      bit ok;
      ok = 1;
      for (int j = 0; j < 6; j++) if (out_tr[cp_in[t] + 1 + j] != in_tr[cp_in[t] + j]) ok = 0;
      check(ok, $sformatf("control packet %0d forwarded with one cycle latency", t));
    end
    check(trains_filled == 4, "four trains filled");
    check(!hold_overflow, "no holdback overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

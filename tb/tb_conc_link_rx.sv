// tb_conc_link_rx: self-checking test of the concentrator upstream receiver.
//
// A returning train is built with the reference builders: board 0 data (2 words), board 1
// read response, board 1 data (1 word) with a corrupted CRC, board 2 empty data, trailer
// and LAST COMMA; then a ping and a register-write packet that have gone round the ring,
// then a train whose LAST COMMA is missing. Symbols are offered with random invalid cycles
// in between. Checks: the data words with their board numbers, the four sub-packet CRC
// verdicts, the error attributed to board 1 only, the read response, one completed train,
// one ping, and exactly one framing error.
module tb_conc_link_rx;
  import tdl_pkg::*;
  `include "tdl_tb_funcs.svh"

  logic clk = 0, rst = 1, sym_valid = 0;
  sym_t sym_in;
  logic wr_valid, sp_done, sp_crc_ok, rd_resp_valid, train_done, ping_seen;
  logic [3:0] wr_board, sp_board, rd_resp_board;
  logic [31:0] wr_data, rd_resp_addr, rd_resp_data;
  logic [15:0] trains_rx, frame_errors;
  logic [15:0][7:0] board_err;
  int checks = 0, failures = 0;

  always #3.2 clk = ~clk;
  conc_link_rx dut (.clk, .rst, .sym_in, .sym_valid, .wr_valid, .wr_board, .wr_data,
    .sp_done, .sp_board, .sp_crc_ok, .rd_resp_valid, .rd_resp_board, .rd_resp_addr,
    .rd_resp_data, .train_done, .ping_seen, .trains_rx, .frame_errors, .board_err);

  logic [35:0] words [$];
  logic [4:0]  verdicts [$];
  int n_rd = 0, n_done = 0, n_ping = 0;
  logic [31:0] got_rd_data;
  always @(posedge clk) if (!rst) begin
    if (wr_valid) words.push_back({wr_board, wr_data});
    if (sp_done) verdicts.push_back({sp_board, sp_crc_ok});
    if (rd_resp_valid) begin n_rd++; got_rd_data = rd_resp_data; end
    if (train_done) n_done++;
    if (ping_seen) n_ping++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(sym_t s);
    while ($urandom_range(0, 3) == 0) begin
      @(negedge clk) begin sym_valid = 0; sym_in = mk_d(16'hFFFF); end
    end
    @(negedge clk) begin sym_valid = 1; sym_in = s; end
  endtask
  task automatic send_q(sym_q q);
    foreach (q[i]) send(q[i]);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w0 [$], w1 [$], w2 [$];
    sym_q bad;
    w0.push_back(32'h1111_2222); w0.push_back(32'h3333_4444);
    w1.push_back(32'h5555_6666);
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3) send(mk_k(IDLE));
    send(mk_k(HEADER));
    send_q(data_subpacket(4'd0, w0));
    send_q(rdresp_subpacket(4'd1, 32'h0000_0018, 32'hBEEF_0001));
    bad = data_subpacket(4'd1, w1);
    bad[bad.size()-1].d ^= 16'h0100;
    send_q(bad);
    send_q(data_subpacket(4'd2, w2));
    send(mk_k(TRAILER));
    send(mk_k(LAST_COMMA));
    repeat (5) send(mk_k(IDLE));
    send_q(ctrl_packet(4'h5, 8'hFF, 0, 0, 0, 0));
    send_q(ctrl_packet(4'h1, 8'h03, 32'h14, 32'h99, 0, 0));
    repeat (5) send(mk_k(IDLE));
    send(mk_k(HEADER));
    send(mk_k(TRAILER));
    send(mk_k(IDLE));                // LAST COMMA missing
    repeat (10) send(mk_k(IDLE));
    @(negedge clk) sym_valid = 0;
    repeat (5) @(posedge clk);

    check(words.size() == 3, $sformatf("%0d data words", words.size()));
    if (words.size() == 3) begin
      check(words[0] == {4'd0, 32'h1111_2222}, "word 0");
      check(words[1] == {4'd0, 32'h3333_4444}, "word 1");
      check(words[2] == {4'd1, 32'h5555_6666}, "word 2");
    end
    check(verdicts.size() == 4, "four sub-packets");
    if (verdicts.size() == 4) begin
      check(verdicts[0] == {4'd0, 1'b1}, "board 0 CRC ok");
      check(verdicts[1] == {4'd1, 1'b1}, "board 1 read response CRC ok");
      check(verdicts[2] == {4'd1, 1'b0}, "board 1 data CRC error detected");
      check(verdicts[3] == {4'd2, 1'b1}, "board 2 empty sub-packet CRC ok");
    end
    check(board_err[1] == 1 && board_err[0] == 0 && board_err[2] == 0, "error attributed to board 1");
    check(n_rd == 1 && got_rd_data == 32'hBEEF_0001 && rd_resp_board == 4'd1, "read response");
    check(n_done == 1 && trains_rx == 1, "one complete train");
    check(n_ping == 1, "ping seen");
    check(frame_errors == 1, $sformatf("one framing error (%0d)", frame_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

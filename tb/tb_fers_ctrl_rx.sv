// tb_fers_ctrl_rx: self-checking test of the board control-packet decoder.
//
// The decoder (board 3) is fed 300 random control packets separated by random idles:
// register writes and reads, timed commands, T0 and pings, addressed to board 3, to other
// boards or to the broadcast address, one in eight with a corrupted word. A reference model
// predicts, for the cycle after each CRC word, which strobe must fire and with which
// address, data, code and time stamp, and how many CRC errors have been counted.
module tb_fers_ctrl_rx;
  import tdl_pkg::*;
  `include "tdl_tb_funcs.svh"

  logic clk = 0, rst = 1;
  sym_t sym_in;
  logic reg_wr, reg_rd, cmd_valid, t0;
  logic [31:0] reg_addr, reg_wdata;
  logic [15:0] cmd_code, crc_errors;
  logic [47:0] cmd_ts;
  int checks = 0, failures = 0;

  always #3.2 clk = ~clk;
  fers_ctrl_rx dut (.clk, .rst, .board_id(4'd3), .sym_in, .reg_wr, .reg_rd, .reg_addr,
    .reg_wdata, .cmd_valid, .cmd_code, .cmd_ts, .t0, .crc_errors);

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
    sym_q q;
    logic [3:0] typ;
    logic [7:0] dst;
    logic [31:0] addr, data;
    logic [15:0] code;
    logic [47:0] ts;
    bit corrupt, mine;
    int exp_err, n_acted, ci;
    exp_err = 0;
    n_acted = 0;
    sym_in = mk_k(IDLE);
    repeat (3) @(negedge clk);
    rst = 0;
    for (int p = 0; p < 300; p++) begin
      typ  = 4'($urandom_range(1, 5));
      case ($urandom_range(0, 2))
        0: dst = 8'h03;
        1: dst = 8'hFF;
        default: dst = 8'($urandom_range(0, 15));
      endcase
      addr = $urandom; data = $urandom; code = 16'($urandom);
      ts = {16'($urandom), 32'($urandom)};
      q = ctrl_packet(typ, dst, addr, data, code, ts);
      corrupt = ($urandom_range(0, 7) == 0);
      if (corrupt) begin
        ci = $urandom_range(0, q.size() - 1);
        q[ci].d ^= 16'h0004;
      end
      mine = !corrupt && (dst == 8'h03 || dst == 8'hFF);
      if (corrupt) exp_err++;
      repeat ($urandom_range(0, 3)) @(negedge clk) sym_in = mk_k(IDLE);
      foreach (q[i]) @(negedge clk) sym_in = q[i];
      @(negedge clk) sym_in = mk_k(IDLE);
      check(crc_errors == 16'(exp_err), $sformatf("pkt %0d crc_errors %0d exp %0d", p, crc_errors, exp_err));
      check(reg_wr == (mine && typ == 1), $sformatf("pkt %0d reg_wr", p));
      check(reg_rd == (mine && typ == 2), $sformatf("pkt %0d reg_rd", p));
      check(cmd_valid == (mine && typ == 3), $sformatf("pkt %0d cmd_valid", p));
      check(t0 == (mine && typ == 4), $sformatf("pkt %0d t0", p));
      if (mine && typ == 1) check(reg_addr == addr && reg_wdata == data, "write addr/data");
      if (mine && typ == 2) check(reg_addr == addr, "read addr");
      if (mine && typ == 3) check(cmd_code == code && cmd_ts == ts, "command code/ts");
      if (mine && typ != 5) n_acted++;
    end
    check(n_acted > 50, "enough packets acted upon");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

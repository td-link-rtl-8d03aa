// fers_timebase: board timestamp counter, T0 alignment and deterministic command execution.
//
// A 48-bit counter advances once per clock. On a T0 strobe it is loaded with t0_corr,
// the board's correction (the T0 transit delay from the concentrator to this board, in
// clock cycles, as measured and distributed by the concentrator), so that every board on
// every ring reads the same value at the same instant. A timed command carries a 48-bit
// execution time; the board adds its own cmd_corr to it and keeps it in one of QDEPTH
// slots until the counter reaches that target, then pulses fire with the command code
// (one command per cycle: a second command for the same cycle fires one cycle later).
// Commands are therefore executed simultaneously on all boards no matter when each board
// received them. A command whose target is already in the past when it arrives is dropped
// and counted in late_cnt; a command arriving with all slots busy is counted in
// overflow_cnt. The T0 load, the 48-bit time and the per-board offset follow the paper; the
// queue depth, the two separate corrections and the late/overflow policy are this design's.
module fers_timebase #(
  parameter int unsigned QDEPTH = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        t0,
  input  logic [47:0] t0_corr,
  input  logic [47:0] cmd_corr,
  input  logic        cmd_valid,
  input  logic [15:0] cmd_code,
  input  logic [47:0] cmd_ts,
  output logic [47:0] timestamp,
  output logic        t0_done,
  output logic        fire,
  output logic [15:0] fire_code,
  output logic [7:0]  late_cnt,
  output logic [7:0]  overflow_cnt
);
  logic [47:0] tgt  [QDEPTH];
  logic [15:0] code [QDEPTH];
  logic        busy [QDEPTH];

  logic [47:0] new_tgt;
  assign new_tgt = cmd_ts + cmd_corr;

  // lowest free slot, and the slot (if any) due now
  int free_i, due_i;
  always_comb begin
    free_i = -1;
    due_i  = -1;
    for (int i = QDEPTH - 1; i >= 0; i--) begin
      if (!busy[i]) free_i = i;
      if (busy[i] && tgt[i] <= timestamp) due_i = i;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      timestamp    <= '0;
      t0_done      <= 1'b0;
      fire         <= 1'b0;
      fire_code    <= '0;
      late_cnt     <= '0;
      overflow_cnt <= '0;
      for (int i = 0; i < QDEPTH; i++) begin
        busy[i] <= 1'b0;
        tgt[i]  <= '0;
        code[i] <= '0;
      end
    end else begin
      fire <= 1'b0;
      if (t0) begin
        timestamp <= t0_corr;
        t0_done   <= 1'b1;
      end else begin
        timestamp <= timestamp + 1'b1;
      end
      if (due_i >= 0) begin
        fire          <= 1'b1;
        fire_code     <= code[due_i];
        busy[due_i]   <= 1'b0;
      end
      if (cmd_valid) begin
        if (new_tgt <= timestamp) begin
          late_cnt <= late_cnt + 1'b1;
        end else if (free_i < 0) begin
          overflow_cnt <= overflow_cnt + 1'b1;
        end else begin
          busy[free_i] <= 1'b1;
          tgt[free_i]  <= new_tgt;
          code[free_i] <= cmd_code;
        end
      end
    end
  end
endmodule

// txbuf_align_fsm: deterministic TX-buffer phase alignment for one transceiver lane.
//
// The transceiver's TX elastic buffer reports txbufstatus[0] = 1 when its write-to-read
// pointer distance is at least half the depth. Used as a one-bit phase detector, this flag
// steers the lane's TX phase interpolator (PI):
//   Phase 1 - if the flag is already 1 at start, step the PI down until it reads 0; then
//             step it up until the flag reads 1 again;
//   Phase 2 - freeze the PI on that 0->1 transition and hold it (LOCKED, no dithering).
// This sequence and its decisions follow the paper's flow chart. The PI is driven as
// one-cycle step pulses with a direction (the usual transceiver PI port); after each step
// the FSM waits SETTLE cycles so the flag, which crosses clock domains through Gray-coded
// pointers, reflects the new phase. If MAX_STEPS steps pass without a transition (PI out
// of range or no clock) the FSM stops in FAIL. The settle wait, the step limit and the
// restart input are this design's choices.
//
// Interface: start (pulse) begins an alignment, txbufstatus0 is the flag (already in clk's
// domain), pi_step/pi_dir are the PI commands (dir 1 = increment), pi_pos counts net steps.
module txbuf_align_fsm #(
  parameter int unsigned SETTLE    = 16,
  parameter int unsigned MAX_STEPS = 1024,
  parameter int unsigned POS_W     = 12
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic                    txbufstatus0,
  output logic                    pi_step,
  output logic                    pi_dir,
  output logic signed [POS_W-1:0] pi_pos,
  output logic                    locked,
  output logic                    fail,
  output logic                    busy
);

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_DEC, S_INC, S_LOCKED, S_FAIL} state_e;
  state_e state;

  logic [$clog2(SETTLE+1)-1:0]    wait_cnt;
  logic [$clog2(MAX_STEPS+1)-1:0] steps;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      wait_cnt <= '0;
      steps    <= '0;
      pi_step  <= 1'b0;
      pi_dir   <= 1'b0;
      pi_pos   <= '0;
    end else begin
      pi_step <= 1'b0;
      if (wait_cnt != 0) begin
        wait_cnt <= wait_cnt - 1'b1;
      end else begin
        unique case (state)
          S_IDLE: if (start) begin
            state <= S_CHECK;
            steps <= '0;
          end
          // "Buffer half full?" at start: yes -> decrement branch, no -> increment branch
          S_CHECK: state <= txbufstatus0 ? S_DEC : S_INC;
          S_DEC: begin
            if (!txbufstatus0) begin
              state <= S_INC;           // known starting point outside the half-full zone
            end else if (steps == MAX_STEPS[$bits(steps)-1:0]) begin
              state <= S_FAIL;
            end else begin
              pi_step  <= 1'b1;
              pi_dir   <= 1'b0;
              pi_pos   <= pi_pos - 1'b1;
              steps    <= steps + 1'b1;
              wait_cnt <= SETTLE[$bits(wait_cnt)-1:0];
            end
          end
          S_INC: begin
            if (txbufstatus0) begin
              state <= S_LOCKED;        // 0 -> 1 transition: freeze the PI here
            end else if (steps == MAX_STEPS[$bits(steps)-1:0]) begin
              state <= S_FAIL;
            end else begin
              pi_step  <= 1'b1;
              pi_dir   <= 1'b1;
              pi_pos   <= pi_pos + 1'b1;
              steps    <= steps + 1'b1;
              wait_cnt <= SETTLE[$bits(wait_cnt)-1:0];
            end
          end
          S_LOCKED, S_FAIL: if (start) begin
            state <= S_CHECK;
            steps <= '0;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  assign locked = (state == S_LOCKED);
  assign fail   = (state == S_FAIL);
  assign busy   = (state == S_CHECK) || (state == S_DEC) || (state == S_INC);

  // No PI movement once locked: the alignment loop must not add jitter
  a_no_step_when_locked: assert property (@(posedge clk) disable iff (rst)
    (state == S_LOCKED && $past(state) == S_LOCKED) |-> !pi_step);

endmodule

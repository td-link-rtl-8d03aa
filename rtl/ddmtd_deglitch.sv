// ddmtd_deglitch: hysteresis filter for a DDMTD beat signal.
//
// The output state changes only after N consecutive input samples disagree with it; rise
// pulses for one cycle when the state goes from 0 to 1. Both DDMTD channels use the same
// filter, so its fixed delay cancels in the phase difference.
module ddmtd_deglitch #(
  parameter int unsigned N = 8
) (
  input  logic clk,
  input  logic rst,
  input  logic din,
  output logic rise
);
  logic                       state;
  logic [$clog2(N+1)-1:0]     run;
  always_ff @(posedge clk) begin
    if (rst) begin
      state <= 1'b0;
      run   <= '0;
      rise  <= 1'b0;
    end else begin
      rise <= 1'b0;
      if (din == state) begin
        run <= '0;
      end else if (run == ($bits(run))'(N - 1)) begin
        run   <= '0;
        state <= din;
        rise  <= din;
      end else begin
        run <= run + 1'b1;
      end
    end
  end
endmodule

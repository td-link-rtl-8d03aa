// reset_sync: brings an active-high reset into another clock domain.
// Assertion is seen after up to two clock edges, release after exactly two.
module reset_sync (
  input  logic clk,
  input  logic rst_in,
  output logic rst_out
);
  // power-up value 1 (FPGA configuration), so the domain starts in reset
  logic r1 = 1'b1, r2 = 1'b1;
  always_ff @(posedge clk) begin
    r1 <= rst_in;
    r2 <= r1 | rst_in;
  end
  assign rst_out = r2;
endmodule

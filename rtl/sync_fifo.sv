// sync_fifo: single-clock first-word-fall-through FIFO with an occupancy count.
//
// Holds up to DEPTH words of W bits. dout/valid show the oldest word; ready pops it.
// Writes when full are refused (din_ready = 0). count is the number of stored words.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [W-1:0]             din,
  input  logic                     din_valid,
  output logic                     din_ready,
  output logic [W-1:0]             dout,
  output logic                     valid,
  input  logic                     ready,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic          do_wr, do_rd;

  assign din_ready = (count != (AW+1)'(DEPTH));
  assign valid     = (count != 0);
  assign dout      = mem[rp];
  assign do_wr     = din_valid && din_ready;
  assign do_rd     = ready && valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      rp    <= '0;
      wp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) begin
        mem[wp] <= din;
        wp      <= wp + 1'b1;
      end
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (do_wr ? (AW+1)'(1) : (AW+1)'(0)) - (do_rd ? (AW+1)'(1) : (AW+1)'(0));
    end
  end
endmodule

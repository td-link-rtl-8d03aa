// comma_align40: 40-bit dual-comma word aligner for the raw 20-bit transceiver output.
//
// The transmitter sends two K28.5 characters back to back with opposite running disparity
// (RD+ then RD-), a 20-bit pattern that, unlike a single K28.5, can only be found at one
// bit offset of the 20-bit word. The aligner keeps the previous raw word, searches the
// pattern at every offset 0..19 of the 40-bit window {current, previous}, and on a match
// stores that offset and starts delivering re-framed 20-bit words, so the two 10-bit
// characters always land in the same halves of the word (no 180-degree ambiguity).
// Bit 0 of a raw word is the first bit on the line and bit 0 of a 10-bit character is
// its 'a' bit (the usual transceiver convention). A match at the locked offset pulses
// comma_seen (used by the keep-alive monitor); a match at another offset re-locks there.
// The dual-comma search follows the paper; bit order and re-lock policy are this
// design's choices. Latency: data_out is the window slice one cycle after the word that
// completes it.
module comma_align40 (
  input  logic        clk,
  input  logic        rst,
  input  logic [19:0] raw_in,
  output logic [19:0] data_out,
  output logic        aligned,
  output logic        comma_seen,
  output logic [4:0]  offset
);
  // K28.5 written as bits {j,h,g,f,i,e,d,c,b,a}
  localparam logic [9:0]  K285_RDP = 10'b1010000011;  // 110000 0101
  localparam logic [9:0]  K285_RDN = 10'b0101111100;  // 001111 1010
  localparam logic [19:0] DUAL     = {K285_RDN, K285_RDP}; // RD+ character first on the line

  logic [19:0] prev;
  logic [39:0] win;
  logic        hit;
  logic [4:0]  hit_off;

  assign win = {raw_in, prev};

  always_comb begin
    hit     = 1'b0;
    hit_off = '0;
    for (int o = 19; o >= 0; o--) begin
      if (win[o +: 20] == DUAL) begin
        hit     = 1'b1;
        hit_off = 5'(o);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev       <= '0;
      offset     <= '0;
      aligned    <= 1'b0;
      comma_seen <= 1'b0;
      data_out   <= '0;
    end else begin
      prev       <= raw_in;
      comma_seen <= hit;
      if (hit) begin
        offset  <= hit_off;
        aligned <= 1'b1;
      end
      data_out <= win[6'(hit ? hit_off : offset) +: 20];
    end
  end
endmodule

// tx_elastic_buffer: mesochronous elastic FIFO with a half-full phase flag.
//
// This is the structure of the transceiver TX buffer the alignment loop relies on: a FIFO
// of DEPTH words between the write clock (the fabric user clock) and the read clock (the
// serializer clock, moved by the TX phase interpolator). Write and read addresses cross
// domains as Gray codes through two-flop synchronizers. In the write domain the distance
// WA - RA(synchronized) is compared with DEPTH/2 and gives half_full (txbufstatus[0]):
// 1 when WA - RA >= DEPTH/2. Because the synchronized read address jumps by one when the
// read clock edge moves across the write clock edge, the flag toggles at a fixed phase
// relation between the two clocks, which is what makes it a one-bit phase detector.
// Both sides move one word per cycle once running. The read side starts after the write
// side has run START_GAP words ahead, which puts the distance near DEPTH/2.
// err (txbufstatus[1]) flags an overflow or underflow, seen in the write domain.
// The Gray-pointer crossing and the half-depth compare follow the paper; depth, start gap
// and error flag are this design's choices. The same block serves as the receive-side
// elastic buffer between the ring clock and the fabric clock.
module tx_elastic_buffer #(
  parameter int unsigned W         = 17,
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned START_GAP = 4
) (
  input  logic         wclk,
  input  logic         wrst,
  input  logic [W-1:0] wdata,
  output logic         half_full,
  output logic         err,
  input  logic         rclk,
  input  logic         rrst,
  output logic [W-1:0] rdata,
  output logic         rvalid
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wptr, wgray, rgray_s1, rgray_s2, rptr_w, fill;
  logic [AW:0] rptr, rgray, wgray_s1, wgray_s2, wptr_r;
  logic        rrun, rrun_w, rrun_s1;
  always_ff @(posedge wclk) begin
    if (wrst) begin
      wptr     <= '0;
      wgray    <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
      half_full <= 1'b0;
      err      <= 1'b0;
    end else begin
      mem[wptr[AW-1:0]] <= wdata;
      wptr     <= wptr + 1'b1;
      wgray    <= bin2gray(wptr + 1'b1);
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      half_full <= (fill >= (AW+1)'(DEPTH/2));
      if (fill > (AW+1)'(DEPTH) || (rrun_w && fill == 0)) err <= 1'b1;
    end
  end
  assign rptr_w = gray2bin(rgray_s2);
  assign fill   = wptr - rptr_w;

  // ---------------- read domain ----------------
  always_ff @(posedge rclk) begin
    if (rrst) begin
      rptr     <= '0;
      rgray    <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
      rrun     <= 1'b0;
      rvalid   <= 1'b0;
      rdata    <= '0;
    end else begin
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
      if (!rrun && (wptr_r - rptr) >= (AW+1)'(START_GAP)) rrun <= 1'b1;
      rvalid <= rrun;
      if (rrun) begin
        rdata <= mem[rptr[AW-1:0]];
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end
  assign wptr_r = gray2bin(wgray_s2);

  // read-running indication brought into the write domain (used only by err)
  always_ff @(posedge wclk) begin
    if (wrst) begin
      rrun_s1 <= 1'b0;
      rrun_w  <= 1'b0;
    end else begin
      rrun_s1 <= rrun;
      rrun_w  <= rrun_s1;
    end
  end

endmodule

// link_keepalive: keep-alive generator and loss-of-link watchdog.
//
// Transmit side: ka_req pulses every PERIOD cycles; the link transmitter answers it by
// sending a dual comma at its next idle slot. At 156.25 MHz the default PERIOD of
// 1,500,000 cycles is the paper's 9.6 ms. Receive side: a counter restarts at every
// received comma (comma_seen); if WINDOW cycles pass without one the link is declared lost
// (link_lost, held until the next comma) and cdr_reset is raised for RESET_LEN cycles to
// restart clock recovery. The paper gives the 9.6 ms interval and the lost-link rule; the
// receive window here is the interval plus one eighth, because a comma requested while a
// train is on the line leaves a little later than requested (this design's choice).
module link_keepalive #(
  parameter int unsigned PERIOD    = 1500000,
  parameter int unsigned WINDOW    = PERIOD + PERIOD / 8,
  parameter int unsigned RESET_LEN = 16
) (
  input  logic clk,
  input  logic rst,
  output logic ka_req,
  input  logic comma_seen,
  output logic link_lost,
  output logic cdr_reset
);
  logic [$clog2(PERIOD+1)-1:0]    tx_cnt;
  logic [$clog2(WINDOW+1)-1:0]    rx_cnt;
  logic [$clog2(RESET_LEN+1)-1:0] rst_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_cnt    <= '0;
      ka_req    <= 1'b0;
      rx_cnt    <= '0;
      link_lost <= 1'b0;
      rst_cnt   <= '0;
    end else begin
      ka_req <= 1'b0;
      if (tx_cnt == ($bits(tx_cnt))'(PERIOD - 1)) begin
        tx_cnt <= '0;
        ka_req <= 1'b1;
      end else begin
        tx_cnt <= tx_cnt + 1'b1;
      end

      if (rst_cnt != 0) rst_cnt <= rst_cnt - 1'b1;
      if (comma_seen) begin
        rx_cnt    <= '0;
        link_lost <= 1'b0;
      end else if (rx_cnt == ($bits(rx_cnt))'(WINDOW - 1)) begin
        rx_cnt    <= '0;
        link_lost <= 1'b1;
        rst_cnt   <= ($bits(rst_cnt))'(RESET_LEN);
      end else begin
        rx_cnt <= rx_cnt + 1'b1;
      end
    end
  end
  assign cdr_reset = (rst_cnt != 0);
endmodule

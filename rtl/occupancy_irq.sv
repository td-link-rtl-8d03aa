// occupancy_irq: write addressing and occupancy interrupt for one link's event buffer.
//
// Each link stores its returning trains in its own external DDR4 buffer of BUF_WORDS
// words (64 Mi words in the paper's concentrator). This block produces the circular
// write address for every word written (wr), keeps the buffer occupancy from the words
// written and the words the processor reports as consumed (rd_valid/rd_words), and raises
// irq while the occupancy is at or above the programmable threshold. Words arriving with
// the buffer full are dropped and counted (dropped). The buffer size and the
// threshold-driven interrupt follow the paper; the address counter, the consume interface
// and the drop policy are this design's choices. The event pointer table the paper
// mentions is kept by the processor and is not part of this block.
module occupancy_irq #(
  parameter int unsigned BUF_WORDS = 64 * 1024 * 1024
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         wr,
  output logic                         wr_accept,
  output logic [$clog2(BUF_WORDS)-1:0] wr_addr,
  input  logic                         rd_valid,
  input  logic [15:0]                  rd_words,
  input  logic [$clog2(BUF_WORDS):0]   threshold,
  output logic [$clog2(BUF_WORDS):0]   occupancy,
  output logic                         irq,
  output logic [31:0]                  dropped
);
  localparam int unsigned AW = $clog2(BUF_WORDS);
  logic [AW:0] rd_eff, occ_after_rd;

  always_comb begin
    rd_eff = (rd_valid) ? (AW+1)'(rd_words) : '0;
    if (rd_eff > occupancy) rd_eff = occupancy;
    occ_after_rd = occupancy - rd_eff;
  end
  assign wr_accept = wr && (occupancy != (AW+1)'(BUF_WORDS));

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_addr   <= '0;
      occupancy <= '0;
      irq       <= 1'b0;
      dropped   <= '0;
    end else begin
      if (wr_accept) wr_addr <= (wr_addr == AW'(BUF_WORDS - 1)) ? '0 : wr_addr + 1'b1;
      if (wr && !wr_accept) dropped <= dropped + 1'b1;
      occupancy <= occ_after_rd + (wr_accept ? (AW+1)'(1) : (AW+1)'(0));
      irq       <= (occ_after_rd + (wr_accept ? (AW+1)'(1) : (AW+1)'(0))) >= threshold;
    end
  end
endmodule

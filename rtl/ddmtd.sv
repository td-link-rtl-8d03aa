// ddmtd: Digital Dual Mixer Time Difference phase detector.
//
// Two clocks at f_in, clk_a and clk_b, are sampled by flip-flops clocked by clk_dmtd at a
// slightly different frequency. Each sampled stream is a square "beat" at the difference
// frequency, and the time between the rising edges of the two beats is the input phase
// difference magnified by f_in/|f_dmtd - f_in| (1e4 for 156.25 MHz and 15.625 kHz offset).
// The sampler outputs pass a second flip-flop against metastability, then a deglitcher:
// a beat is declared high only after DEGLITCH consecutive 1 samples and low after
// DEGLITCH consecutive 0 samples, which removes the chatter around each beat transition.
// A free-running counter in the clk_dmtd domain time-tags each deglitched rising edge.
// On every B edge the module outputs phase = tag_B - tag_A (the last A edge), in
// clk_dmtd cycles, and on every A edge period = tag_A - previous tag_A (the beat period),
// so phase/period is the phase as a fraction of one input cycle.
// Sampling, magnification, deglitcher and interval counter follow the paper; the
// deglitcher's exact rule and the output format are this design's choices. The paper
// clocks the interval counter at the fabric frequency; here it runs on clk_dmtd, which is
// within 1e-4 of it, so no further clock crossing is needed inside the detector.
module ddmtd #(
  parameter int unsigned CNT_W    = 16,
  parameter int unsigned DEGLITCH = 8
) (
  input  logic             clk_a,
  input  logic             clk_b,
  input  logic             clk_dmtd,
  input  logic             rst,          // synchronous to clk_dmtd
  output logic             phase_valid,
  output logic [CNT_W-1:0] phase,
  output logic             period_valid,
  output logic [CNT_W-1:0] period
);

  // Mixers: clocks used as data, then one more flop each for metastability
  logic a_mix, b_mix, a_s, b_s;
  always_ff @(posedge clk_dmtd) begin
    a_mix <= clk_a;
    b_mix <= clk_b;
    a_s   <= a_mix;
    b_s   <= b_mix;
  end

  logic [CNT_W-1:0] tcount;
  logic a_edge, b_edge;

  ddmtd_deglitch #(.N(DEGLITCH)) u_dga (.clk(clk_dmtd), .rst(rst), .din(a_s), .rise(a_edge));
  ddmtd_deglitch #(.N(DEGLITCH)) u_dgb (.clk(clk_dmtd), .rst(rst), .din(b_s), .rise(b_edge));

  logic [CNT_W-1:0] tag_a;
  logic             have_a;
  always_ff @(posedge clk_dmtd) begin
    if (rst) begin
      tcount       <= '0;
      tag_a        <= '0;
      have_a       <= 1'b0;
      phase_valid  <= 1'b0;
      period_valid <= 1'b0;
      phase        <= '0;
      period       <= '0;
    end else begin
      tcount       <= tcount + 1'b1;
      phase_valid  <= 1'b0;
      period_valid <= 1'b0;
      if (a_edge) begin
        tag_a  <= tcount;
        have_a <= 1'b1;
        if (have_a) begin
          period       <= tcount - tag_a;
          period_valid <= 1'b1;
        end
      end
      if (b_edge && have_a) begin
        // a simultaneous A edge counts as the reference for this B edge
        phase       <= a_edge ? '0 : tcount - tag_a;
        phase_valid <= 1'b1;
      end
    end
  end

endmodule

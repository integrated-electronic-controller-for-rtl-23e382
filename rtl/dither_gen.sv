// dither_gen: square-wave dithering oscillator with in-phase and quadrature
// outputs.
//
// One generator is shared by all channels, as all control loops of the
// beam-coupler mesh can use the same pair of dithering signals. It advances
// once per ADC sample (tick). A counter runs over a period of 4*quarter
// samples; dith_i is high in the first half of the period and dith_q is the
// same wave delayed by a quarter period (90 degrees). Because the period is
// a whole number of quarters, the two square waves are exactly orthogonal
// over every period, which lets one photodiode separate the effect of the two
// heaters. The paper gives a dither "around 10 kHz" at 100 kS/s; the default
// quarter of 2 samples (12.5 kHz) is this design's choice. A quarter of 0 is
// treated as 1. Outputs are registered and change one cycle after tick.
module dither_gen #(
  parameter int unsigned QW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tick,
  input  logic [QW-1:0] quarter,
  output logic          dith_i,
  output logic          dith_q
);
  logic [QW-1:0] q_eff;
  logic [QW-1:0] cnt;    // position inside the current quarter
  logic [1:0]    phase;  // which quarter of the period

  assign q_eff = (quarter == '0) ? QW'(1) : quarter;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      phase <= 2'd0;
    end else if (tick) begin
      if (cnt >= q_eff - QW'(1)) begin
        cnt   <= '0;
        phase <= phase + 2'd1;
      end else begin
        cnt <= cnt + QW'(1);
      end
    end
  end

  // Quarter 0,1: I high; quarter 1,2: Q high.
  assign dith_i = (phase == 2'd0) || (phase == 2'd1);
  assign dith_q = (phase == 2'd1) || (phase == 2'd2);
endmodule

// gain_adjust: automatic gain selection of the photodiode front-end and
// rescaling of the ADC samples.
//
// The analog front-end has six gain steps, each x4 above the previous one, so
// that a 10-bit ADC covers about 50 dB of photocurrent. Step 0 is the lowest
// gain (largest current). After each sample the logic moves one step down
// when the code reaches UP_TH (full scale) and one step up when it falls
// below LO_TH; the new step is driven on `gain` and applies to the next
// conversion. Following the paper, the digital weight of a sample is the
// inverse of the analog gain it was taken with: the code is shifted left by
// 2 bits for each step below the highest gain, giving a 20-bit value
// proportional to the photocurrent whatever the step. The full-scale down
// threshold follows the measured ADC sawtooth (codes 256..1024); the up
// threshold (128) and the one-step-per-sample rule are this design's choice.
// Timing: `weighted` and `weighted_valid` are registered, one cycle after
// `valid`.
module gain_adjust
  import ctrl_pkg::*;
#(
  parameter int unsigned UP_TH = 1023,
  parameter int unsigned LO_TH = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid,
  input  logic [ADC_W-1:0]   adc,
  output logic [GAIN_W-1:0]  gain,
  output logic [WSAMP_W-1:0] weighted,
  output logic               weighted_valid
);
  localparam logic [GAIN_W-1:0] GMAX = GAIN_W'(GSTEPS - 1);

  // 2 bits of weight per x4 step below the highest gain.
  function automatic logic [WSAMP_W-1:0] weigh(input logic [ADC_W-1:0] code,
                                               input logic [GAIN_W-1:0] g);
    logic [4:0] sh;
    sh = {1'b0, GMAX - g, 1'b0};  // 2*(GMAX-g)
    return WSAMP_W'(code) << sh;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gain           <= '0;  // start at the lowest gain: safe for large currents
      weighted       <= '0;
      weighted_valid <= 1'b0;
    end else begin
      weighted_valid <= valid;
      if (valid) begin
        weighted <= weigh(adc, gain);
        if (32'(adc) >= UP_TH && gain != '0)
          gain <= gain - GAIN_W'(1);
        else if (32'(adc) < LO_TH && gain != GMAX)
          gain <= gain + GAIN_W'(1);
      end
    end
  end

  a_gain_range: assert property (@(posedge clk) disable iff (!rst_n) gain <= GMAX);
endmodule

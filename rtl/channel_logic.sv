// channel_logic: digital logic of one controller channel (one MZI, two
// heaters, one photodiode).
//
// The ADC sample first goes through the automatic gain logic, which sets the
// front-end gain for the next conversion and rescales the sample to a value
// proportional to the photocurrent. The rescaled sample feeds two identical
// chains: chain A is demodulated with, and dithers its heater with, the
// 0-degree square wave; chain B uses the 90-degree one. Orthogonal dithers
// let a single photodiode yield the two partial derivatives of the MZI
// response, and each chain drives its heater to null its derivative. For a
// ring resonator only one chain is needed; the other can be held.
//
// Timing: `tick` marks the end of a sample window. On tick the channel stores
// the dither states that were on the heaters during that window; they are
// the demodulation references for the conversion that follows, which must
// arrive (adc_valid) before the next tick. The chains update two cycles after
// adc_valid (one for the gain logic, one for the integrator).
module channel_logic
  import ctrl_pkg::*;
#(
  parameter int unsigned ACC_W = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               tick,
  input  logic               dith_i,
  input  logic               dith_q,
  input  logic [ADC_W-1:0]   adc,
  input  logic               adc_valid,
  input  channel_cfg_t       cfg,
  output logic [GAIN_W-1:0]  gain,
  output logic [DAC_W-1:0]   dac_a,
  output logic [DAC_W-1:0]   dac_b,
  output logic [1:0]         sat_event,
  output mon_t               mon
);
  logic [WSAMP_W-1:0] weighted;
  logic               wvalid;
  logic               ref_i, ref_q;
  logic [ADC_W-1:0]   adc_last;
  logic [GAIN_W-1:0]  gain_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_i     <= 1'b0;
      ref_q     <= 1'b0;
      adc_last  <= '0;
      gain_last <= '0;
    end else begin
      if (tick) begin
        ref_i <= dith_i;
        ref_q <= dith_q;
      end
      if (adc_valid) begin
        adc_last  <= adc;
        gain_last <= gain;  // gain this sample was taken with
      end
    end
  end

  gain_adjust u_gain (
    .clk(clk), .rst_n(rst_n), .valid(adc_valid), .adc(adc),
    .gain(gain), .weighted(weighted), .weighted_valid(wvalid)
  );

  control_chain #(.ACC_W(ACC_W)) u_chain_a (
    .clk(clk), .rst_n(rst_n), .sample_en(wvalid), .weighted(weighted),
    .ref_bit(ref_i), .dith(dith_i), .ccfg(cfg.a), .chcfg(cfg.c),
    .dac_code(dac_a), .word(), .sat_event(sat_event[0])
  );

  control_chain #(.ACC_W(ACC_W)) u_chain_b (
    .clk(clk), .rst_n(rst_n), .sample_en(wvalid), .weighted(weighted),
    .ref_bit(ref_q), .dith(dith_q), .ccfg(cfg.b), .chcfg(cfg.c),
    .dac_code(dac_b), .word(), .sat_event(sat_event[1])
  );

  assign mon = '{adc: adc_last, gain: gain_last, dac_a: dac_a, dac_b: dac_b};
endmodule

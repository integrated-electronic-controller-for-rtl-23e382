// control_chain: one dithering extraction and integration chain, driving one
// heater.
//
// Signal flow, as in the paper's channel diagram:
//   weighted ADC sample -> square-wave multiplier (sq_demod) -> integrator
//   (loop_integrator) -> dither superposition -> square root (sqrt_pwl)
//   -> saturation control (sat_control) -> 12-bit DAC code.
// The integrator output is the working point (control word, proportional to
// heater power). The square-wave dither of amplitude dith_amp is added to it
// (clamped to 0..4095) before the square root, so the dither is a fixed step
// of heater power. When the DAC code leaves the threshold window the
// integrator is reset to midscale on the next sample.
//
// Modes (this design's encoding): RUN closes the loop; HOLD freezes the
// working point and removes the dither (loops paused, heaters at fixed
// values); MANUAL presets the integrator to ccfg.manual and drives it without
// dither, so that RUN later starts from that point.
//
// Timing: on sample_en (one pulse per ADC sample, with `weighted` valid) the
// integrator and the saturation reset update on the clock edge. `ref_bit` is
// the dither state that was applied while that sample was acquired; `dith`
// is the state to apply now. dac_code is combinational from registered state
// and `dith`.
module control_chain
  import ctrl_pkg::*;
#(
  parameter int unsigned ACC_W = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sample_en,
  input  logic [WSAMP_W-1:0] weighted,
  input  logic               ref_bit,
  input  logic               dith,
  input  chain_cfg_t         ccfg,
  input  chan_cfg_t          chcfg,
  output logic [DAC_W-1:0]   dac_code,
  output logic [DAC_W-1:0]   word,
  output logic               sat_event
);
  logic signed [WSAMP_W:0] demod;
  logic                    run, manual;
  logic [DAC_W:0]          sum_w;
  logic [DAC_W-1:0]        dithered;
  logic                    sat_req;

  assign run    = (ccfg.mode == MODE_RUN);
  assign manual = (ccfg.mode == MODE_MANUAL);

  sq_demod #(.IN_W(WSAMP_W)) u_demod (
    .x(weighted), .ref_bit(ref_bit), .y(demod)
  );

  loop_integrator #(.ACC_W(ACC_W), .IN_W(WSAMP_W + 1)) u_int (
    .clk(clk), .rst_n(rst_n),
    .en(sample_en && run),
    .din(demod),
    .negate(chcfg.minimise),
    .shift(chcfg.bw_shift),
    .sat_reset(sample_en && run && sat_req),
    .load(manual),
    .load_word(ccfg.manual),
    .word(word)
  );

  // Superimpose the square-wave dither on the working point.
  always_comb begin
    if (!run)
      sum_w = {1'b0, word};
    else if (dith)
      sum_w = {1'b0, word} + (DAC_W+1)'(ccfg.dith_amp);
    else
      sum_w = {1'b0, word} - (DAC_W+1)'(ccfg.dith_amp);
    if (!run)
      dithered = word;
    else if (dith && sum_w[DAC_W])
      dithered = '1;            // overflow: clamp high
    else if (!dith && sum_w[DAC_W])
      dithered = '0;            // underflow: clamp low
    else
      dithered = sum_w[DAC_W-1:0];
  end

  sqrt_pwl #(.W(DAC_W)) u_sqrt (
    .x(dithered), .bypass(!chcfg.sqrt_en), .y(dac_code)
  );

  sat_control #(.W(DAC_W)) u_sat (
    .code(dac_code), .th_lo(chcfg.th_lo), .th_hi(chcfg.th_hi), .reset_req(sat_req)
  );

  assign sat_event = sample_en && run && sat_req;
endmodule

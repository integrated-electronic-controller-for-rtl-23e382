// ctrl_asic_top: digital core of the multi-channel controller for
// programmable photonic circuits.
//
// Each of the NCH channels closes two dithering feedback loops around one
// Mach-Zehnder interferometer: it reads the interferometer's monitor
// photodiode through the analog front-end and ADC (outside this module),
// extracts the response to two orthogonal square-wave dithers, integrates it
// and drives the two heaters through two 12-bit DACs (outside this module).
// Shared by all channels are the sample timer, which sets the 100 kS/s
// sampling rate from the clock, and one dither generator with 0 and 90
// degree outputs. A configuration shift register sets modes, loop gain,
// dither amplitude, thresholds and manual working points; a monitor shift
// register reads back the samples and DAC codes.
//
// Analog interface: adc_start pulses once per sample period, at the end of
// the front-end integration window; the ADCs of all channels return their
// codes on adc_data with one adc_valid pulse, which must come before the next
// adc_start. gain[i] selects the front-end gain step of channel i for the
// next window. dac_a[i]/dac_b[i] are the codes for the two heater DACs.
// sat_event reports the cycles in which a chain's integrator was reset to
// midscale. The clock rate (10 MHz with CLK_PER_SAMPLE = 100) is this
// design's choice; the sample rate, channel count and converter widths are
// the paper's.
module ctrl_asic_top
  import ctrl_pkg::*;
#(
  parameter int unsigned NCH            = 8,
  parameter int unsigned CLK_PER_SAMPLE = 100,
  parameter int unsigned ACC_W          = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // analog front-end and converters
  output logic              adc_start,
  input  logic [ADC_W-1:0]  adc_data [NCH],
  input  logic              adc_valid,
  output logic [GAIN_W-1:0] gain     [NCH],
  output logic [DAC_W-1:0]  dac_a    [NCH],
  output logic [DAC_W-1:0]  dac_b    [NCH],
  output logic [1:0]        sat_event[NCH],
  // configuration shift register
  input  logic              cfg_shift,
  input  logic              cfg_sdi,
  input  logic              cfg_load,
  output logic              cfg_sdo,
  // monitor shift register
  input  logic              mon_capture,
  input  logic              mon_shift,
  input  logic              mon_sdi,
  output logic              mon_sdo
);
  localparam int unsigned CW = $clog2(CLK_PER_SAMPLE);

  channel_cfg_t    cfg [NCH];
  global_cfg_t     gcfg;
  mon_t            mon [NCH];
  logic [CW-1:0]   div;
  logic            tick;
  logic            dith_i, dith_q;

  // Sample timer: one tick every CLK_PER_SAMPLE clocks.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      div <= '0;
    else if (div == CW'(CLK_PER_SAMPLE - 1))
      div <= '0;
    else
      div <= div + CW'(1);
  end
  assign tick      = (div == CW'(CLK_PER_SAMPLE - 1));
  assign adc_start = tick;

  dither_gen #(.QW(8)) u_dither (
    .clk(clk), .rst_n(rst_n), .tick(tick), .quarter(gcfg.dith_quarter),
    .dith_i(dith_i), .dith_q(dith_q)
  );

  config_sr #(.NCH(NCH)) u_cfg (
    .clk(clk), .rst_n(rst_n), .sr_shift(cfg_shift), .sr_in(cfg_sdi),
    .sr_load(cfg_load), .sr_out(cfg_sdo), .cfg(cfg), .gcfg(gcfg)
  );

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    channel_logic #(.ACC_W(ACC_W)) u_ch (
      .clk(clk), .rst_n(rst_n), .tick(tick), .dith_i(dith_i), .dith_q(dith_q),
      .adc(adc_data[i]), .adc_valid(adc_valid), .cfg(cfg[i]),
      .gain(gain[i]), .dac_a(dac_a[i]), .dac_b(dac_b[i]),
      .sat_event(sat_event[i]), .mon(mon[i])
    );
  end

  monitor_sr #(.NCH(NCH)) u_mon (
    .clk(clk), .rst_n(rst_n), .capture(mon_capture), .shift(mon_shift),
    .sdi(mon_sdi), .mon(mon), .sdo(mon_sdo)
  );

  a_valid_after_start: assert property (@(posedge clk) disable iff (!rst_n)
    adc_start |=> !adc_valid);
endmodule

// config_sr: serial configuration register.
//
// Holds the working parameters of all channels plus the global ones and is
// written from a host computer. While sr_shift is high, one bit per clock
// enters at sr_in and the chain moves towards sr_out, so the register can be
// daisy-chained across several controller chips. The stream is sent most
// significant bit first: after a full load, bit 0 of the image is the last
// bit shifted. The image is {global_cfg, channel NCH-1, ..., channel 0}.
// Shifting only changes a shadow copy; a pulse on sr_load copies the shadow
// into the active configuration in one cycle, so the control loops never see
// a half-written word. The paper gives the register and its purpose; the
// synchronous shift/load protocol, the layout and the reset values
// (all chains in HOLD, minimisation, loop gain 2^-4, square root on, thresholds at the
// full DAC range, dither amplitude 32, dither quarter 2 samples) are this
// design's choices.
module config_sr
  import ctrl_pkg::*;
#(
  parameter int unsigned NCH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sr_shift,
  input  logic         sr_in,
  input  logic         sr_load,
  output logic         sr_out,
  output channel_cfg_t cfg [NCH],
  output global_cfg_t  gcfg
);
  localparam int unsigned N = NCH * CHAN_CFG_W + GLOB_CFG_W;

  function automatic channel_cfg_t default_cfg();
    channel_cfg_t c;
    c.a.mode     = MODE_HOLD;
    c.a.dith_amp = AMP_W'(32);
    c.a.manual   = DAC_W'(2048);
    c.b          = c.a;
    c.c.minimise = 1'b1;
    c.c.bw_shift = SHIFT_W'(4);
    c.c.sqrt_en  = 1'b1;
    c.c.th_lo    = '0;
    c.c.th_hi    = '1;
    return c;
  endfunction

  function automatic logic [N-1:0] default_image();
    logic [N-1:0] img;
    img[N-1 -: GLOB_CFG_W] = GLOB_CFG_W'(2);
    for (int i = 0; i < NCH; i++)
      img[i*CHAN_CFG_W +: CHAN_CFG_W] = default_cfg();
    return img;
  endfunction

  logic [N-1:0] shadow, active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow <= default_image();
      active <= default_image();
    end else begin
      if (sr_shift)
        shadow <= {shadow[N-2:0], sr_in};
      if (sr_load)
        active <= shadow;
    end
  end

  assign sr_out = shadow[N-1];

  always_comb begin
    for (int i = 0; i < NCH; i++)
      cfg[i] = channel_cfg_t'(active[i*CHAN_CFG_W +: CHAN_CFG_W]);
    gcfg = global_cfg_t'(active[N-1 -: GLOB_CFG_W]);
  end
endmodule

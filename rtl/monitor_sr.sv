// monitor_sr: serial read-out register.
//
// Lets a host computer read, for every channel, the last ADC sample with the
// gain step it was taken at (hence the photocurrent) and the two codes sent
// to the heater DACs (hence the heater voltages). A pulse on `capture` loads
// all channels at once into the register, image {channel NCH-1, ...,
// channel 0}, each channel as mon_t {adc, gain, dac_a, dac_b}. While `shift`
// is high the register moves one bit per clock towards `sdo`, most
// significant bit first; the current MSB is on `sdo` right after capture.
// `sdi` lets several chips be chained. The paper gives the register and what
// it reads; the protocol and the layout are this design's choices.
module monitor_sr
  import ctrl_pkg::*;
#(
  parameter int unsigned NCH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic capture,
  input  logic shift,
  input  logic sdi,
  input  mon_t mon [NCH],
  output logic sdo
);
  localparam int unsigned N = NCH * MON_W;

  logic [N-1:0] sr;
  logic [N-1:0] image;

  always_comb
    for (int i = 0; i < NCH; i++)
      image[i*MON_W +: MON_W] = mon[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       sr <= '0;
    else if (capture) sr <= image;
    else if (shift)   sr <= {sr[N-2:0], sdi};
  end

  assign sdo = sr[N-1];
endmodule

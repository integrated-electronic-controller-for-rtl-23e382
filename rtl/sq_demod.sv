// sq_demod: square-wave multiplier of the lock-in demodulator.
//
// Multiplies the (unsigned) weighted ADC sample by the dither reference taken
// as +1 (ref_bit = 1) or -1 (ref_bit = 0). Accumulated over whole dither
// periods, the product removes the average photocurrent and keeps the part
// that moves with the dither, i.e. the derivative of the optical response
// with respect to that heater. Purely combinational; the output is one bit
// wider and signed.
module sq_demod #(
  parameter int unsigned IN_W = 20
) (
  input  logic                   [IN_W-1:0] x,
  input  logic                              ref_bit,
  output logic signed            [IN_W:0]   y
);
  always_comb begin
    y = signed'({1'b0, x});
    if (!ref_bit) y = -y;
  end
endmodule

// sqrt_pwl: piece-wise-linear square-root compressor in front of the DAC.
//
// Heater power goes with the square of the drive voltage, so the loop gain
// would depend on the bias point. Taking the square root of the control word
// before the DAC makes heater power (and hence phase) linear in the word.
// As in the paper, the exact square root is replaced by straight segments
// whose slope halves each time the input grows by a factor of 4. Here the
// segment breakpoints are the powers of 4 (1, 4, 16, 64, 256, 1024) and lie
// on y = 64*sqrt(x), which maps 0..4095 onto 0..4095. In segment m,
// x in [4^m, 4^(m+1)):
//     y = 64*2^m + ((x - 4^m) * 5461) >> (8 + m),
// where 5461/256 ~ 64/3 is the chord slope at m = 0. x = 0 gives 0. The
// breakpoint placement and the constant are this design's choices.
// `bypass` passes x unchanged (compression off). Purely combinational.
module sqrt_pwl #(
  parameter int unsigned W = 12
) (
  input  logic [W-1:0] x,
  input  logic         bypass,
  output logic [W-1:0] y
);
  localparam int unsigned NSEG = W / 2;  // 6 segments for 12 bits

  logic [W-1:0]  y_cmp;
  logic [W-1:0]  base;
  logic [W-1:0]  ybase;
  logic [W+13:0] prod;
  int unsigned   m;

  always_comb begin
    // m = index of the highest non-zero bit pair
    m = 0;
    for (int unsigned k = 0; k < NSEG; k++)
      if (x[2*k +: 2] != 2'b00) m = k;
    base  = W'(1) << (2 * m);
    ybase = W'(64) << m;
    prod  = (W+14)'(x - base) * (W+14)'(5461);
    if (x == '0)
      y_cmp = '0;
    else
      y_cmp = ybase + W'(prod >> (8 + m));
    y = bypass ? x : y_cmp;
  end
endmodule

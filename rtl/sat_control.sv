// sat_control: saturation control of one actuator chain.
//
// Compares the code sent to the DAC with two programmable thresholds. When
// the code leaves the window [th_lo, th_hi] the integrator is to be put back
// to midscale, so that the drive voltage never runs into the supply rails.
// Because the heaters span about 4*pi of phase, the jump lands on an
// equivalent working point and the loop keeps locking. The two thresholds and
// the reset come from the paper; the inclusive window is this design's
// choice. Purely combinational.
module sat_control #(
  parameter int unsigned W = 12
) (
  input  logic [W-1:0] code,
  input  logic [W-1:0] th_lo,
  input  logic [W-1:0] th_hi,
  output logic         reset_req
);
  assign reset_req = (code < th_lo) || (code > th_hi);
endmodule

// loop_integrator: digital integrator of one control loop.
//
// Accumulates the demodulated signal, which implements the integral
// feedback law and, through its gain, sets the loop bandwidth. On each `en`
// the signed input, negated when `negate` is set (with the positive dither
// sense used here, negation makes the loop seek a minimum of the photodiode
// power) and divided by 2^shift, is added
// to an ACC_W-bit unsigned accumulator that saturates at both ends. The top
// 12 bits are the working-point word. `sat_reset` puts the accumulator back
// to midscale (requested by the saturation control) and `load` presets the
// top 12 bits from `load_word` (manual operating point). Priority: load,
// then sat_reset, then en. Reset value: midscale. All updates are registered.
// The shift-based gain, the saturating arithmetic and the widths are this
// design's choices; the paper describes only an accumulator with midscale
// reset.
module loop_integrator #(
  parameter int unsigned ACC_W = 24,
  parameter int unsigned IN_W  = 21
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic signed [IN_W-1:0] din,
  input  logic                   negate,
  input  logic [4:0]             shift,
  input  logic                   sat_reset,
  input  logic                   load,
  input  logic [11:0]            load_word,
  output logic [11:0]            word
);
  localparam logic [ACC_W-1:0] MID = {1'b1, {(ACC_W-1){1'b0}}};
  localparam logic signed [ACC_W+1:0] MAXV = (ACC_W+2)'({ACC_W{1'b1}});

  logic [ACC_W-1:0]         acc;
  logic signed [IN_W-1:0]   d_sgn;
  logic signed [IN_W-1:0]   d_sh;
  logic signed [ACC_W+1:0]  sum;

  always_comb begin
    d_sgn = negate ? -din : din;
    d_sh  = d_sgn >>> shift;
    sum   = signed'({2'b00, acc}) + (ACC_W+2)'(d_sh);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      acc <= MID;
    else if (load)
      acc <= {load_word, {(ACC_W-12){1'b0}}};
    else if (sat_reset)
      acc <= MID;
    else if (en) begin
      if (sum < 0)          acc <= '0;
      else if (sum > MAXV)  acc <= '1;
      else                  acc <= sum[ACC_W-1:0];
    end
  end

  assign word = acc[ACC_W-1 -: 12];
endmodule

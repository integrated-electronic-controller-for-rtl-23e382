// tb_gain_adjust: drives the automatic gain logic with a photocurrent that
// sweeps up and down over more than 50 dB and checks, against a reference
// front-end model, that (1) the gain step moves down at full scale and up
// below 128, one step per sample, within 0..5; (2) the weighted sample equals
// the ADC code times 4^(5-g) for the gain g it was taken with, so it tracks
// the current; (3) the valid strobe comes one clock after the sample.
// The front-end model: code = min(1023, I * 4^g), I in LSBs of the lowest
// gain scaled up by 4^5.
module tb_gain_adjust;
  import ctrl_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [ADC_W-1:0] adc;
  logic [GAIN_W-1:0] gain;
  logic [WSAMP_W-1:0] weighted;
  logic wv;
  int checks = 0, failures = 0;
  int g_ref;
  int n_up = 0, n_down = 0;

  gain_adjust dut (.clk, .rst_n, .valid, .adc, .gain, .weighted, .weighted_valid(wv));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // current in units of 1/1024 LSB at lowest gain (so 2^20 = full scale at g=0)
  task automatic sample(input longint cur);
    longint code;
    code = (cur << (2 * g_ref)) >> 10;
    if (code > 1023) code = 1023;
    check(int'(gain) == g_ref, $sformatf("gain %0d expected %0d", gain, g_ref));
    @(negedge clk);
    adc = ADC_W'(code); valid = 1;
    @(negedge clk);
    valid = 0;
    check(wv == 1'b1, "weighted_valid one clock after valid");
    check(longint'(weighted) == (code << (2 * (5 - g_ref))),
          $sformatf("weighted %0d code %0d g %0d", weighted, code, g_ref));
    if (code >= 1023 && g_ref > 0) begin g_ref--; n_down++; end
    else if (code < 128 && g_ref < 5) begin g_ref++; n_up++; end
    @(negedge clk);
    check(wv == 1'b0, "weighted_valid is a single pulse");
  endtask

  initial begin
    adc = '0;
    g_ref = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // sweep down from full scale to ~50 dB below, then back up
    for (real lg = 0.0; lg > -5.3; lg -= 0.05)
      sample(longint'((2.0 ** 20) * 0.98 * (10.0 ** lg)));
    repeat (10) sample(longint'(20.0));  // very small current: stays at max gain
    for (real lg = -5.3; lg < 0.0; lg += 0.05)
      sample(longint'((2.0 ** 20) * 0.98 * (10.0 ** lg)));
    check(n_up >= 5 && n_down >= 5, $sformatf("steps up %0d down %0d", n_up, n_down));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_control_chain: exercises one dithering chain in all its modes.
//  - HOLD after reset: working point at midscale, DAC code = square root of
//    it (reference: chords of 64*sqrt(x), +/-1 LSB), no dither.
//  - MANUAL: working point forced to the manual word, no dither.
//  - RUN, open loop: DAC code = word +/- dither amplitude (square root
//    bypassed), clamped at 0.
//  - RUN, closed loop on a quadratic plant P = (u - T)^2/8 (u = applied code),
//    minimising and, with an inverted plant 300000 - (u - T)^2/8 and a
//    smaller loop gain, maximising: the working point
//    must settle within 4 LSB of T (8 LSB when maximising, whose larger
//    DC level leaves more ripple in the integrator).
//  - Saturation: a plant whose optimum lies above the high threshold drives
//    the code across it; the integrator must return to midscale.
// Samples come every 8 clocks; the dither has a period of 4 samples.
module tb_control_chain;
  import ctrl_pkg::*;
  logic clk = 0, rst_n = 0, sample_en = 0, ref_bit = 0, dith = 0;
  logic [WSAMP_W-1:0] weighted = '0;
  chain_cfg_t ccfg;
  chan_cfg_t chcfg;
  logic [DAC_W-1:0] dac, word;
  logic sat_event;
  int checks = 0, failures = 0, n_sat = 0, kdith = 0;

  control_chain dut (.clk, .rst_n, .sample_en, .weighted, .ref_bit, .dith, .ccfg, .chcfg,
    .dac_code(dac), .word, .sat_event);

  always #5 clk = ~clk;
  always @(posedge clk) if (sat_event) n_sat++;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic real chord(input int v);
    int m;
    if (v == 0) return 0.0;
    m = 0;
    while ((4 ** (m + 1)) <= v) m++;
    return 64.0 * (2.0 ** m) + (real'(v) - real'(4 ** m)) * 64.0 / (3.0 * (2.0 ** m));
  endfunction

  function automatic bit near(input int a, input real b);
    return (real'(a) - b) <= 1.0 && (b - real'(a)) <= 1.0;
  endfunction

  // One sample window: apply dither, let the plant respond, deliver the sample.
  // sense = +1 minimise-type plant (u-T)^2, -1 maximise-type plant.
  task automatic window(input int target, input int sense);
    longint p;
    dith = (kdith % 4) < 2;
    kdith++;
    repeat (4) @(negedge clk);
    p = (longint'(int'(dac) - target) * longint'(int'(dac) - target)) >>> 3;
    if (sense < 0) p = 64'd300000 - p;
    if (p < 0) p = 0;
    if (p > 64'hFFFFF) p = 64'hFFFFF;
    weighted = WSAMP_W'(p);
    ref_bit = dith;
    sample_en = 1;
    @(negedge clk);
    sample_en = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    ccfg.mode = MODE_HOLD; ccfg.dith_amp = 8'd32; ccfg.manual = 12'd1000;
    chcfg.minimise = 1; chcfg.bw_shift = 5'd0; chcfg.sqrt_en = 1;
    chcfg.th_lo = 12'd0; chcfg.th_hi = 12'hFFF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(word == 12'd2048, "midscale after reset");
    check(near(int'(dac), chord(2048)), $sformatf("hold dac %0d", dac));
    dith = 1; weighted = 20'hFFFFF; ref_bit = 1; sample_en = 1;
    @(negedge clk); sample_en = 0;
    check(word == 12'd2048 && near(int'(dac), chord(2048)), "hold ignores samples and dither");

    ccfg.mode = MODE_MANUAL;
    @(negedge clk);
    check(word == 12'd1000, "manual word");
    check(near(int'(dac), chord(1000)), $sformatf("manual dac %0d", dac));

    // open-loop dither, square root bypassed
    chcfg.sqrt_en = 0;
    ccfg.mode = MODE_RUN;
    dith = 1; #1; check(dac == 12'd1032, $sformatf("dither high %0d", dac));
    dith = 0; #1; check(dac == 12'd968,  $sformatf("dither low %0d", dac));
    ccfg.mode = MODE_MANUAL; ccfg.manual = 12'd10;
    @(negedge clk);
    ccfg.mode = MODE_RUN; dith = 0; #1;
    check(dac == 12'd0, "clamp at 0");
    ccfg.mode = MODE_MANUAL; ccfg.manual = 12'd4090;
    @(negedge clk);
    ccfg.mode = MODE_RUN; dith = 1; #1;
    check(dac == 12'hFFF, "clamp at full scale");

    // closed loop, minimise
    ccfg.dith_amp = 8'd64;
    ccfg.mode = MODE_MANUAL; ccfg.manual = 12'd2048;
    @(negedge clk);
    ccfg.mode = MODE_RUN;
    repeat (2500) window(1500, 1);
    check(int'(word) > 1496 && int'(word) < 1504, $sformatf("minimum found: word %0d", word));

    // hold freezes the working point
    ccfg.mode = MODE_HOLD;
    repeat (50) window(3000, 1);
    check(int'(word) > 1496 && int'(word) < 1504 && dac == word, "hold keeps working point");

    // closed loop, maximise
    chcfg.minimise = 0;
    ccfg.mode = MODE_RUN;
    chcfg.bw_shift = 5'd5;
    repeat (45000) window(2600, -1);
    chcfg.bw_shift = 5'd0;
    check(int'(word) > 2592 && int'(word) < 2608, $sformatf("maximum found: word %0d", word));

    // saturation: optimum beyond th_hi
    chcfg.minimise = 1;
    chcfg.th_lo = 12'd100; chcfg.th_hi = 12'd3500;
    n_sat = 0;
    for (int k = 0; k < 3000 && n_sat == 0; k++) window(4000, 1);
    check(n_sat > 0, "saturation reset happened");
    check(word == 12'd2048, $sformatf("reset to midscale: %0d", word));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

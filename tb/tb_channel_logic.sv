// tb_channel_logic: one channel closing both loops on a model of a
// two-heater device whose photocurrent is a paraboloid,
//   I = 2*((ua - Ta)^2 + (ub - Tb)^2) + 50   (units: 2^20 = ADC full scale
//   at the lowest gain),
// read through a front-end model with six x4 gain steps:
//   code = min(1023, I * 4^g / 1024).
// Both chains run at once on the 0 and 90 degree dithers (period 4 samples,
// square root bypassed). The test checks that
//  - each chain finds its own minimum (orthogonal dithers separate them);
//  - the gain logic climbs as the current falls while locking, reaches the
//    highest step when the working points are set by hand on the optimum
//    (manual mode, no dither), and steps down again when the optimum moves;
//  - after the move both loops lock again;
//  - the monitor output holds the last ADC code and the gain it was taken
//    with, and the two DAC codes.
// A sample window is 10 clocks: tick at its end, ADC result 3 clocks later.
module tb_channel_logic;
  import ctrl_pkg::*;
  logic clk = 0, rst_n = 0, tick = 0, di = 0, dq = 0, adc_valid = 0;
  logic [ADC_W-1:0] adc = '0;
  channel_cfg_t cfg;
  logic [GAIN_W-1:0] gain;
  logic [DAC_W-1:0] dac_a, dac_b;
  logic [1:0] sat_event;
  mon_t mon;
  int checks = 0, failures = 0;
  int ta = 1700, tb = 2400, kd = 0;
  int max_gain = 0, n_down = 0, prev_gain = 0;
  int last_code, last_gain;

  channel_logic dut (.clk, .rst_n, .tick, .dith_i(di), .dith_q(dq), .adc, .adc_valid, .cfg,
    .gain, .dac_a, .dac_b, .sat_event, .mon);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic window();
    longint cur, code;
    int g;
    di = (kd % 4) < 2;
    dq = ((kd + 3) % 4) < 2;   // quarter period later
    kd++;
    repeat (5) @(negedge clk);
    cur = 2 * (longint'(int'(dac_a) - ta) ** 2 + longint'(int'(dac_b) - tb) ** 2) + 50;
    g = int'(gain);
    code = (cur << (2 * g)) >> 10;
    if (code > 1023) code = 1023;
    tick = 1; @(negedge clk); tick = 0;
    repeat (2) @(negedge clk);
    adc = ADC_W'(code); adc_valid = 1;
    last_code = int'(code); last_gain = g;
    @(negedge clk); adc_valid = 0;
    @(negedge clk);
    if (int'(gain) > max_gain) max_gain = int'(gain);
    if (int'(gain) < prev_gain) n_down++;
    prev_gain = int'(gain);
  endtask

  function automatic bit locked(input int d, input int t);
    return (d - t) <= int'(cfg.a.dith_amp) + 6 && (t - d) <= int'(cfg.a.dith_amp) + 6;
  endfunction

  initial begin
    cfg.a.mode = MODE_RUN; cfg.a.dith_amp = 8'd64; cfg.a.manual = 12'd2048;
    cfg.b = cfg.a;
    cfg.c.minimise = 1; cfg.c.bw_shift = 5'd3; cfg.c.sqrt_en = 0;
    cfg.c.th_lo = '0; cfg.c.th_hi = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3000) window();
    check(locked(int'(dac_a), ta), $sformatf("chain A locked: dac_a %0d target %0d", dac_a, ta));
    check(locked(int'(dac_b), tb), $sformatf("chain B locked: dac_b %0d target %0d", dac_b, tb));
    check(max_gain >= 3, $sformatf("gain climbed while locking: %0d", max_gain));
    // working points set by hand exactly on the optimum: only the dark
    // current is left, the gain must reach the top step
    cfg.a.mode = MODE_MANUAL; cfg.a.manual = 12'(ta);
    cfg.b.mode = MODE_MANUAL; cfg.b.manual = 12'(tb);
    repeat (20) window();
    check(int'(gain) == GSTEPS - 1, $sformatf("gain at top step: %0d", gain));
    check(dac_a == 12'(ta) && dac_b == 12'(tb), "manual working points, no dither");
    cfg.a.mode = MODE_RUN; cfg.b.mode = MODE_RUN;
    check(mon.adc == ADC_W'(last_code) && int'(mon.gain) == last_gain, "monitor sample and gain");
    check(mon.dac_a == dac_a && mon.dac_b == dac_b, "monitor DAC codes");
    // move the optimum: current jumps, gain must step down, loops relock
    ta = 2300; tb = 1800;
    repeat (4000) window();
    check(n_down >= 3, $sformatf("gain stepped down %0d times", n_down));
    check(locked(int'(dac_a), ta), $sformatf("chain A relocked: dac_a %0d target %0d", dac_a, ta));
    check(locked(int'(dac_b), tb), $sformatf("chain B relocked: dac_b %0d target %0d", dac_b, tb));
    check(sat_event == 2'b00, "no saturation with full window");
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

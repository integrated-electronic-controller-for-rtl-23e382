// tb_ubc16: two controllers (default size, 8 channels each) tuning a
// 16-input self-aligning beam coupler: a 4-stage binary tree of 15 MZIs
// (8 + 4 + 2 + 1), each with an input heater, an arm heater and a photodiode
// on its drop port, as in the paper's demonstration. Chip A drives the 8
// first-stage MZIs, chip B the 7 others (its channel 7 is held). The two
// configuration registers are daisy-chained (A's serial output feeds B).
//
// The 16 antennas receive a beam with random amplitudes (0.1 mW on
// average) and random phases; all loops start at once from the reset
// working point. The test runs three "phase screens" (new random phases
// and amplitudes each time, like changing the wavefront distortion) and
// for each checks that within 25 ms at least 90% of the received power
// reaches the single output, reporting how long it took and when each
// stage settled (photodiodes of the stage below 1% of the input power).
// A fourth phase screen is then applied with the loops in HOLD: the
// coupling must drop (no tracking), and recover once RUN is restored.
module tb_ubc16;
  import ctrl_pkg::*;
  import tb_photonics_pkg::*;
  localparam int NCH = 8;
  localparam int N = NCH * CHAN_CFG_W + GLOB_CFG_W;

  logic clk = 0, rst_n = 0;
  logic adc_start [2];
  logic adc_valid [2];
  logic [ADC_W-1:0] adc_data [2][NCH];
  logic [GAIN_W-1:0] gain [2][NCH];
  logic [DAC_W-1:0] dac_a [2][NCH], dac_b [2][NCH];
  logic [1:0] sat_event [2][NCH];
  logic cfg_shift = 0, cfg_sdi = 0, cfg_load = 0, cfg_ab, cfg_sdo;
  logic mon_sdo [2];

  ctrl_asic_top chip_a (.clk, .rst_n, .adc_start(adc_start[0]), .adc_data(adc_data[0]),
    .adc_valid(adc_valid[0]), .gain(gain[0]), .dac_a(dac_a[0]), .dac_b(dac_b[0]),
    .sat_event(sat_event[0]), .cfg_shift, .cfg_sdi, .cfg_load, .cfg_sdo(cfg_ab),
    .mon_capture(1'b0), .mon_shift(1'b0), .mon_sdi(1'b0), .mon_sdo(mon_sdo[0]));
  ctrl_asic_top chip_b (.clk, .rst_n, .adc_start(adc_start[1]), .adc_data(adc_data[1]),
    .adc_valid(adc_valid[1]), .gain(gain[1]), .dac_a(dac_a[1]), .dac_b(dac_b[1]),
    .sat_event(sat_event[1]), .cfg_shift, .cfg_sdi(cfg_ab), .cfg_load, .cfg_sdo,
    .mon_capture(1'b0), .mon_shift(1'b0), .mon_sdi(1'b0), .mon_sdo(mon_sdo[1]));

  always #50 clk = ~clk;

  int checks = 0, failures = 0;
  real in_r [16], in_i [16], ptot;
  real pd [15];
  real pout;
  int sample_no = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // MZI m is on chip m/8, channel m%8
  function automatic int da(input int m);
    return (m < 8) ? int'(dac_a[0][m]) : int'(dac_a[1][m - 8]);
  endfunction
  function automatic int db(input int m);
    return (m < 8) ? int'(dac_b[0][m]) : int'(dac_b[1][m - 8]);
  endfunction

  // propagate the beam through the tree with the present heater codes
  function automatic void mesh();
    real fr [16], fi [16], o_r, o_i, p;
    int m, n;
    for (int k = 0; k < 16; k++) begin fr[k] = in_r[k]; fi[k] = in_i[k]; end
    m = 0; n = 16;
    while (n > 1) begin
      for (int k = 0; k < n / 2; k++) begin
        mzi(fr[2*k], fi[2*k], fr[2*k+1], fi[2*k+1], da(m), db(m), o_r, o_i, p);
        pd[m] = p;
        fr[k] = o_r; fi[k] = o_i;
        m++;
      end
      n = n / 2;
    end
    pout = fr[0] * fr[0] + fi[0] * fi[0];
  endfunction

  // Behavioural front ends and ADCs of both chips (they sample together)
  always @(posedge clk) begin
    if (rst_n && adc_start[0]) begin
      int c [2][NCH];
      mesh();
      for (int m = 0; m < 16; m++) begin
        int ch, i;
        ch = m / 8; i = m % 8;
        c[ch][i] = (m < 15) ? adc_code(pd[m], int'(gain[ch][i])) : 0;
      end
      sample_no++;
      repeat (20) @(posedge clk);
      for (int ch = 0; ch < 2; ch++) begin
        for (int i = 0; i < NCH; i++) adc_data[ch][i] <= ADC_W'(c[ch][i]);
        adc_valid[ch] <= 1'b1;
      end
      @(posedge clk);
      adc_valid[0] <= 1'b0; adc_valid[1] <= 1'b0;
    end
  end

  task automatic new_screen();
    ptot = 0.0;
    for (int k = 0; k < 16; k++) begin
      real a, th;
      a = 0.2e-3 * real'(1 + $urandom % 1000) / 1000.0;
      th = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      in_r[k] = $sqrt(a) * $cos(th); in_i[k] = $sqrt(a) * $sin(th);
      ptot += a;
    end
  endtask

  task automatic configure(input mode_e md);
    channel_cfg_t c;
    logic [N-1:0] img [2];
    c.a.mode = md; c.a.dith_amp = 8'd32; c.a.manual = 12'd2048;
    c.b = c.a;
    c.c.minimise = 1; c.c.bw_shift = 5'd1; c.c.sqrt_en = 1;
    c.c.th_lo = 12'd100; c.c.th_hi = 12'd4000;
    for (int ch = 0; ch < 2; ch++) begin
      img[ch][N-1 -: GLOB_CFG_W] = GLOB_CFG_W'(2);
      for (int i = 0; i < NCH; i++) img[ch][i*CHAN_CFG_W +: CHAN_CFG_W] = c;
    end
    img[1][7*CHAN_CFG_W +: CHAN_CFG_W] = '0;  // unused channel: HOLD
    @(negedge clk);
    // chip B's image first: it travels through chip A
    for (int ch = 1; ch >= 0; ch--)
      for (int k = N - 1; k >= 0; k--) begin
        cfg_sdi = img[ch][k]; cfg_shift = 1; @(negedge clk);
      end
    cfg_shift = 0; cfg_load = 1; @(negedge clk); cfg_load = 0;
  endtask

  function automatic int stage_of(input int m);
    return (m < 8) ? 0 : (m < 12) ? 1 : (m < 14) ? 2 : 3;
  endfunction

  task automatic converge(input string tag, input int max_samples, output int t90);
    int s0, st_done [4];
    bit ok;
    s0 = sample_no; t90 = -1;
    for (int s = 0; s < 4; s++) st_done[s] = -1;
    while (sample_no - s0 < max_samples) begin
      @(posedge adc_valid[0]);
      mesh();
      for (int s = 0; s < 4; s++) begin
        ok = 1;
        for (int m = 0; m < 15; m++) if (stage_of(m) == s && pd[m] > 0.01 * ptot) ok = 0;
        if (ok && st_done[s] < 0) st_done[s] = sample_no - s0;
        if (!ok) st_done[s] = -1;
      end
      if (pout >= 0.9 * ptot && t90 < 0) t90 = sample_no - s0;
      if (pout < 0.8 * ptot) t90 = -1;
    end
    mesh();
    $display("%s: output %0.1f%% of received power; 90%% reached after %0.2f ms; stages settled at %0.2f %0.2f %0.2f %0.2f ms",
             tag, 100.0 * pout / ptot, real'(t90) * 0.01, real'(st_done[0]) * 0.01,
             real'(st_done[1]) * 0.01, real'(st_done[2]) * 0.01, real'(st_done[3]) * 0.01);
  endtask

  initial begin
    int t90;
    real held;
    for (int ch = 0; ch < 2; ch++) begin
      adc_valid[ch] = 0;
      for (int i = 0; i < NCH; i++) adc_data[ch][i] = '0;
    end
    new_screen();
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure(MODE_RUN);
    for (int scr = 0; scr < 3; scr++) begin
      if (scr > 0) new_screen();
      converge($sformatf("screen %0d", scr), 2500, t90);
      check(pout >= 0.9 * ptot, $sformatf("screen %0d: output power %0.3f of %0.3f", scr, pout, ptot));
      check(t90 >= 0, $sformatf("screen %0d: coupling reached 90%% and stayed", scr));
    end
    // loops paused: a new screen is not compensated
    configure(MODE_HOLD);
    new_screen();
    repeat (50) @(posedge adc_valid[0]);
    mesh();
    held = pout / ptot;
    $display("hold, new screen: output %0.1f%%", 100.0 * held);
    check(held < 0.9, "held configuration does not track a new screen");
    configure(MODE_RUN);
    converge("resume", 2500, t90);
    check(pout >= 0.9 * ptot, "tracking resumes after hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ctrl_asic_top: end-to-end test of the 8-channel controller at its
// default size, each channel closing its loops on a model of one
// two-heater MZI with a monitor photodiode (tb_photonics_pkg).
//
// Every MZI receives 0.4 mW split between its two inputs with a random
// ratio and relative phase; the controller starts with all heaters at the
// reset working point. The host side is modelled by shifting a
// configuration image into the configuration register and reading the
// monitor register. Sequence and checks:
//  1. configure: all loops RUN, minimise, square root on except channel 6
//     (bypassed); channel 7 gets a narrow threshold window so that its
//     integrator has to be reset to midscale;
//  2. 15 ms of closed loop: every channel but 7 must bring its photodiode
//     below 1% of its input power (all light to the through port); the
//     time each one takes is reported;
//  3. monitor read-out matches the ADC codes, gains and DAC codes;
//  4. HOLD: heater codes frozen, no dither, device stays tuned;
//  5. MANUAL on channel 0: its heaters jump to the programmed working point,
//     the photocurrent rises and the gain steps down; back to RUN it relocks.
// Each mechanism (lock, gain step up and down, saturation reset, hold,
// manual, square-root bypass, configuration load, monitor read) is counted
// and a failure is counted for any that never happened.
// The behavioural ADC converts all channels at adc_start and answers 20
// clocks later.
module tb_ctrl_asic_top;
  import ctrl_pkg::*;
  import tb_photonics_pkg::*;
  localparam int NCH = 8;
  localparam int N = NCH * CHAN_CFG_W + GLOB_CFG_W;
  localparam int NM = NCH * MON_W;

  logic clk = 0, rst_n = 0;
  logic adc_start, adc_valid = 0;
  logic [ADC_W-1:0] adc_data [NCH];
  logic [GAIN_W-1:0] gain [NCH];
  logic [DAC_W-1:0] dac_a [NCH], dac_b [NCH];
  logic [1:0] sat_event [NCH];
  logic cfg_shift = 0, cfg_sdi = 0, cfg_load = 0, cfg_sdo;
  logic mon_capture = 0, mon_shift = 0, mon_sdi = 0, mon_sdo;

  ctrl_asic_top dut (.clk, .rst_n, .adc_start, .adc_data, .adc_valid, .gain, .dac_a, .dac_b,
    .sat_event, .cfg_shift, .cfg_sdi, .cfg_load, .cfg_sdo, .mon_capture, .mon_shift, .mon_sdi,
    .mon_sdo);

  always #50 clk = ~clk;  // 10 MHz

  int checks = 0, failures = 0;
  real e1r [NCH], e1i [NCH], e2r [NCH], e2i [NCH], pin [NCH], pdp [NCH];
  int n_gain_up = 0, n_gain_down = 0, n_sat = 0, n_lock = 0, n_hold = 0, n_manual = 0;
  int n_bypass = 0, n_cfg = 0, n_mon = 0, n_relock = 0;
  int lock_sample [NCH];
  int sample_no = 0;
  int g_prev [NCH];
  int codes [NCH];
  int g_sample [NCH];  // gain each channel's last sample was taken with
  channel_cfg_t ccfg [NCH];
  global_cfg_t gc;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Behavioural front end + ADC
  always @(posedge clk) begin
    if (rst_n && adc_start) begin
      real o_r, o_i;
      for (int i = 0; i < NCH; i++) begin
        mzi(e1r[i], e1i[i], e2r[i], e2i[i], int'(dac_a[i]), int'(dac_b[i]), o_r, o_i, pdp[i]);
        codes[i] = adc_code(pdp[i], int'(gain[i]));
        g_sample[i] = int'(gain[i]);
      end
      sample_no++;
      repeat (20) @(posedge clk);
      for (int i = 0; i < NCH; i++) adc_data[i] <= ADC_W'(codes[i]);
      adc_valid <= 1'b1;
      @(posedge clk);
      adc_valid <= 1'b0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NCH; i++) begin
      if (int'(gain[i]) > g_prev[i]) n_gain_up++;
      if (int'(gain[i]) < g_prev[i]) n_gain_down++;
      g_prev[i] = int'(gain[i]);
      if (sat_event[i] != 2'b00) n_sat++;
    end
  end

  task automatic load_config();
    logic [N-1:0] img;
    img[N-1 -: GLOB_CFG_W] = gc;
    for (int i = 0; i < NCH; i++) img[i*CHAN_CFG_W +: CHAN_CFG_W] = ccfg[i];
    @(negedge clk);
    for (int k = N - 1; k >= 0; k--) begin
      cfg_sdi = img[k]; cfg_shift = 1; @(negedge clk);
    end
    cfg_shift = 0; cfg_load = 1; @(negedge clk); cfg_load = 0;
    n_cfg++;
  endtask

  function automatic bit tuned(input int i, input real frac);
    real o_r, o_i, p;
    mzi(e1r[i], e1i[i], e2r[i], e2i[i], int'(dac_a[i]), int'(dac_b[i]), o_r, o_i, p);
    return p < frac * pin[i];
  endfunction

  function automatic real chord(input int v);
    int m;
    if (v == 0) return 0.0;
    m = 0;
    while ((4 ** (m + 1)) <= v) m++;
    return 64.0 * (2.0 ** m) + (real'(v) - real'(4 ** m)) * 64.0 / (3.0 * (2.0 ** m));
  endfunction

  initial begin
    for (int i = 0; i < NCH; i++) begin
      real a, th, p;
      p = 0.4e-3;
      a = 0.1 + 0.8 * real'($urandom % 1000) / 1000.0;  // share on input 1
      th = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      e1r[i] = $sqrt(p * a); e1i[i] = 0.0;
      e2r[i] = $sqrt(p * (1.0 - a)) * $cos(th); e2i[i] = $sqrt(p * (1.0 - a)) * $sin(th);
      pin[i] = p;
      lock_sample[i] = -1;
      g_prev[i] = 0;
      adc_data[i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. configuration
    gc.dith_quarter = 8'd2;
    for (int i = 0; i < NCH; i++) begin
      ccfg[i].a.mode = MODE_RUN; ccfg[i].a.dith_amp = 8'd32; ccfg[i].a.manual = 12'd2048;
      ccfg[i].b = ccfg[i].a;
      ccfg[i].c.minimise = 1; ccfg[i].c.bw_shift = 5'd1; ccfg[i].c.sqrt_en = (i != 6);
      ccfg[i].c.th_lo = 12'd100; ccfg[i].c.th_hi = 12'd4000;
    end
    ccfg[7].c.th_lo = 12'd2600; ccfg[7].c.th_hi = 12'd2900;
    load_config();

    // 2. closed loop for 15 ms (1500 samples)
    while (sample_no < 1500) begin
      @(posedge adc_valid);
      for (int i = 0; i < NCH; i++)
        if (lock_sample[i] < 0 && tuned(i, 0.01)) lock_sample[i] = sample_no;
        else if (lock_sample[i] >= 0 && !tuned(i, 0.03)) lock_sample[i] = -1;
    end
    for (int i = 0; i < 7; i++) begin
      check(tuned(i, 0.01), $sformatf("channel %0d tuned (dac %0d %0d)", i, dac_a[i], dac_b[i]));
      if (tuned(i, 0.01)) n_lock++;
      $display("channel %0d: locked after %0d samples (%0.2f ms)", i, lock_sample[i],
               real'(lock_sample[i]) * 0.01);
    end
    if (tuned(6, 0.01)) n_bypass++;

    // 3. monitor read-out
    begin
      logic [NM-1:0] got;
      logic [ADC_W-1:0] s_adc [NCH];
      logic [DAC_W-1:0] s_a [NCH], s_b [NCH];
      int s_g [NCH];
      @(posedge adc_valid); repeat (4) @(negedge clk);
      for (int i = 0; i < NCH; i++) begin
        s_adc[i] = adc_data[i]; s_a[i] = dac_a[i]; s_b[i] = dac_b[i]; s_g[i] = g_sample[i];
      end
      mon_capture = 1; @(negedge clk); mon_capture = 0;
      for (int k = NM - 1; k >= 0; k--) begin
        got[k] = mon_sdo; mon_shift = 1; @(negedge clk); mon_shift = 0;
      end
      for (int i = 0; i < NCH; i++) begin
        check(got[i*MON_W + 27 +: 10] == s_adc[i], $sformatf("monitor adc ch %0d", i));
        check(got[i*MON_W + 12 +: 12] == s_a[i] && got[i*MON_W +: 12] == s_b[i],
              $sformatf("monitor dac ch %0d", i));
        check(int'(got[i*MON_W + 24 +: 3]) == s_g[i], $sformatf("monitor gain ch %0d", i));
      end
      n_mon++;
    end

    // 4. hold
    for (int i = 0; i < NCH; i++) begin ccfg[i].a.mode = MODE_HOLD; ccfg[i].b.mode = MODE_HOLD; end
    load_config();
    begin
      logic [DAC_W-1:0] ha [NCH], hb [NCH];
      bit same;
      repeat (2) @(posedge adc_valid);
      for (int i = 0; i < NCH; i++) begin ha[i] = dac_a[i]; hb[i] = dac_b[i]; end
      same = 1;
      repeat (50) begin
        @(posedge adc_valid); repeat (3) @(negedge clk);
        for (int i = 0; i < NCH; i++) if (dac_a[i] != ha[i] || dac_b[i] != hb[i]) same = 0;
      end
      check(same, "hold keeps heater codes fixed");
      for (int i = 0; i < 7; i++) check(tuned(i, 0.01), $sformatf("channel %0d tuned in hold", i));
      if (same) n_hold++;
    end

    // 5. manual working point on channel 0, then relock
    for (int i = 0; i < NCH; i++) begin ccfg[i].a.mode = MODE_RUN; ccfg[i].b.mode = MODE_RUN; end
    ccfg[0].a.mode = MODE_MANUAL; ccfg[0].a.manual = 12'd700;
    ccfg[0].b.mode = MODE_MANUAL; ccfg[0].b.manual = 12'd3300;
    begin
      int gd0;
      gd0 = n_gain_down;
      load_config();
      repeat (20) @(posedge adc_valid);
      check((real'(dac_a[0]) - chord(700)) <= 1.0 && (chord(700) - real'(dac_a[0])) <= 1.0,
            $sformatf("manual dac_a %0d", dac_a[0]));
      check((real'(dac_b[0]) - chord(3300)) <= 1.0 && (chord(3300) - real'(dac_b[0])) <= 1.0,
            $sformatf("manual dac_b %0d", dac_b[0]));
      if (!tuned(0, 0.01)) n_manual++;
      check(n_gain_down > gd0 || tuned(0, 0.01), "gain steps down when the device is detuned");
    end
    ccfg[0].a.mode = MODE_RUN; ccfg[0].b.mode = MODE_RUN;
    load_config();
    repeat (1500) @(posedge adc_valid);
    check(tuned(0, 0.01), "channel 0 relocked from the manual working point");
    if (tuned(0, 0.01)) n_relock++;

    $display("mechanisms: lock=%0d relock=%0d gain_up=%0d gain_down=%0d sat_reset=%0d hold=%0d manual=%0d sqrt_bypass=%0d cfg_load=%0d mon_read=%0d",
             n_lock, n_relock, n_gain_up, n_gain_down, n_sat, n_hold, n_manual, n_bypass, n_cfg, n_mon);
    check(n_lock > 0, "lock happened");
    check(n_relock > 0, "relock happened");
    check(n_gain_up > 0, "gain step up happened");
    check(n_gain_down > 0, "gain step down happened");
    check(n_sat > 0, "saturation reset happened");
    check(n_hold > 0, "hold happened");
    check(n_manual > 0, "manual working point happened");
    check(n_bypass > 0, "square-root bypass channel locked");
    check(n_cfg > 0 && n_mon > 0, "configuration load and monitor read happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ubc16_turbulence: dynamic wavefront distortion on the 16-input beam
// coupler tuned by two controllers at their default size (same mesh, chip
// split and daisy-chained configuration as tb_ubc16).
//
// Each antenna's phase wanders as the sum of two sinusoids with random
// frequencies between 5 and 60 Hz and amplitudes up to 0.6 rad, and its
// power fluctuates by up to +/-20% at similar rates: a slowly
// varying turbulent wavefront. After an initial lock, the received power is
// recorded for 150 ms with the loops running and then for 150 ms with the
// heaters held at the values reached (loops paused). Checks: with the loops
// running, the mean coupled power is at least 90% of the received power and
// higher than with the loops paused, more samples stay above -0.3 dB and
// the worst dip is smaller.
// Mean, worst dip and the share of samples above -0.3 dB are reported for
// both cases, with the number of integrator midscale resets while tracking.
module tb_ubc16_turbulence;
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
  real amp0 [16], ph0 [16], fa [16], fb [16], aa [16], ab [16], pa [16], pb [16], fm [16], pm [16];
  real pd [15];
  real pout;
  int sample_no = 0;
  int n_sat = 0;
  bit moving = 0;
  int move_start = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk)
    for (int ch = 0; ch < 2; ch++)
      for (int i = 0; i < NCH; i++) if (sat_event[ch][i] != 2'b00) n_sat++;

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
      if (moving) set_field(real'(sample_no - move_start) * 1.0e-5);
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
    for (int k = 0; k < 16; k++) begin
      amp0[k] = 0.2e-3 * real'(200 + $urandom % 800) / 1000.0;
      ph0[k] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      fa[k] = 5.0 + 55.0 * real'($urandom % 1000) / 1000.0;
      fb[k] = 5.0 + 55.0 * real'($urandom % 1000) / 1000.0;
      fm[k] = 5.0 + 55.0 * real'($urandom % 1000) / 1000.0;
      aa[k] = 0.6 * real'($urandom % 1000) / 1000.0;
      ab[k] = 0.6 * real'($urandom % 1000) / 1000.0;
      pa[k] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      pb[k] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      pm[k] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
    end
    set_field(0.0);
  endtask

  // field at time t (seconds)
  function automatic void set_field(input real t);
    ptot = 0.0;
    for (int k = 0; k < 16; k++) begin
      real a, th;
      a = amp0[k] * (1.0 + 0.2 * $sin(2.0 * PI * fm[k] * t + pm[k]));
      th = ph0[k] + aa[k] * $sin(2.0 * PI * fa[k] * t + pa[k]) + ab[k] * $sin(2.0 * PI * fb[k] * t + pb[k]);
      in_r[k] = $sqrt(a) * $cos(th); in_i[k] = $sqrt(a) * $sin(th);
      ptot += a;
    end
  endfunction

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

  task automatic record(input int nsamp, output real mean, output real worst, output real above);
    real acc;
    int nab;
    acc = 0.0; worst = 1.0; nab = 0;
    for (int s = 0; s < nsamp; s++) begin
      @(posedge adc_valid[0]);
      mesh();
      acc += pout / ptot;
      if (pout / ptot < worst) worst = pout / ptot;
      if (pout / ptot > 0.933) nab++;   // -0.3 dB
    end
    mean = acc / real'(nsamp);
    above = real'(nab) / real'(nsamp);
  endtask

  initial begin
    real m_run, w_run, m_hold, w_hold, a_run, a_hold;
    int s0;
    for (int ch = 0; ch < 2; ch++) begin
      adc_valid[ch] = 0;
      for (int i = 0; i < NCH; i++) adc_data[ch][i] = '0;
    end
    new_screen();
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure(MODE_RUN);
    repeat (2500) @(posedge adc_valid[0]);   // initial lock on the still beam
    mesh();
    check(pout >= 0.9 * ptot, "initial lock");
    move_start = sample_no;
    moving = 1;
    s0 = n_sat;
    record(15000, m_run, w_run, a_run);
    configure(MODE_HOLD);
    record(15000, m_hold, w_hold, a_hold);
    $display("loops running: mean %0.2f dB, worst %0.2f dB, %0.1f%% of samples above -0.3 dB, %0d midscale resets",
             10.0 * $log10(m_run), 10.0 * $log10(w_run), 100.0 * a_run, n_sat - s0);
    $display("loops paused:  mean %0.2f dB, worst %0.2f dB, %0.1f%% of samples above -0.3 dB",
             10.0 * $log10(m_hold), 10.0 * $log10(w_hold), 100.0 * a_hold);
    check(m_run >= 0.9, $sformatf("tracking keeps mean coupling %0.3f", m_run));
    check(m_run > m_hold, "tracking beats held heaters on the mean");
    check(a_run > a_hold, "tracking keeps more samples above -0.3 dB");
    check(w_run > w_hold, "tracking beats held heaters on the worst dip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_config_sr: checks the configuration register.
//  - reset values: all chains HOLD, minimisation, dither quarter 2;
//  - a random image shifted in MSB first does not reach the active
//    configuration until sr_load, and then appears field by field at the
//    documented positions ({global, channel 7, ..., channel 0});
//  - the serial output replays the shadow content MSB first (daisy chain).
module tb_config_sr;
  import ctrl_pkg::*;
  localparam int NCH = 8;
  localparam int N = NCH * CHAN_CFG_W + GLOB_CFG_W;
  logic clk = 0, rst_n = 0, sr_shift = 0, sr_in = 0, sr_load = 0, sr_out;
  channel_cfg_t cfg [NCH];
  global_cfg_t gcfg;
  logic [N-1:0] img, img2;
  int checks = 0, failures = 0;

  config_sr #(.NCH(NCH)) dut (.clk, .rst_n, .sr_shift, .sr_in, .sr_load, .sr_out, .cfg, .gcfg);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic shift_in(input logic [N-1:0] v, output logic [N-1:0] seen);
    for (int k = N - 1; k >= 0; k--) begin
      sr_in = v[k]; sr_shift = 1;
      seen[k] = sr_out;
      @(negedge clk);
    end
    sr_shift = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(gcfg.dith_quarter == 8'd2, "default dither quarter");
    for (int i = 0; i < NCH; i++) begin
      check(cfg[i].a.mode == MODE_HOLD && cfg[i].b.mode == MODE_HOLD, "default HOLD");
      check(cfg[i].c.minimise == 1'b1 && cfg[i].c.sqrt_en == 1'b1, "default minimise, sqrt on");
    end
    for (int w = 0; w < N; w += 32) img[w +: 32] = $urandom;
    shift_in(img, img2);
    check(gcfg.dith_quarter == 8'd2 && cfg[3].a.mode == MODE_HOLD, "active unchanged before load");
    sr_load = 1; @(negedge clk); sr_load = 0;
    check(gcfg == img[N-1 -: 8], "global field");
    for (int i = 0; i < NCH; i++) begin
      check(cfg[i] == img[i*CHAN_CFG_W +: CHAN_CFG_W], $sformatf("channel %0d image", i));
      check(cfg[i].c.th_hi == img[i*CHAN_CFG_W +: 12], $sformatf("channel %0d th_hi at bits 11:0", i));
      check(cfg[i].a.mode == img[i*CHAN_CFG_W + CHAN_CFG_W - 1 -: 2], $sformatf("channel %0d mode A at top", i));
    end
    // second image: what comes out must be the first one, MSB first
    for (int w = 0; w < N; w += 32) img2[w +: 32] = $urandom;
    begin
      logic [N-1:0] seen;
      shift_in(img2, seen);
      check(seen == img, "daisy-chain output replays previous image");
    end
    check(cfg[0] == img[0 +: CHAN_CFG_W], "active still the first image");
    sr_load = 1; @(negedge clk); sr_load = 0;
    check(cfg[5] == img2[5*CHAN_CFG_W +: CHAN_CFG_W], "second image loaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_monitor_sr: captures random channel data and reads it back serially,
// MSB first, comparing with the expected image {channel 7, ..., channel 0},
// each {adc, gain, dac_a, dac_b}. Also checks that inputs changing after the
// capture do not disturb the read-out and that sdi feeds the tail (chaining).
module tb_monitor_sr;
  import ctrl_pkg::*;
  localparam int NCH = 8;
  localparam int N = NCH * MON_W;
  logic clk = 0, rst_n = 0, capture = 0, shift = 0, sdi = 0, sdo;
  mon_t mon [NCH];
  logic [N-1:0] exp_img, got;
  int checks = 0, failures = 0;

  monitor_sr #(.NCH(NCH)) dut (.clk, .rst_n, .capture, .shift, .sdi, .mon, .sdo);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < NCH; i++) begin
        mon[i].adc = 10'($urandom); mon[i].gain = 3'($urandom % 6);
        mon[i].dac_a = 12'($urandom); mon[i].dac_b = 12'($urandom);
        exp_img[i*MON_W +: MON_W] = {mon[i].adc, mon[i].gain, mon[i].dac_a, mon[i].dac_b};
      end
      capture = 1; @(negedge clk); capture = 0;
      for (int i = 0; i < NCH; i++) mon[i] = '0;
      for (int k = N - 1; k >= 0; k--) begin
        got[k] = sdo;
        sdi = 1'(r & 1);
        shift = 1; @(negedge clk); shift = 0;
      end
      checks++;
      if (got != exp_img) begin failures++; $display("FAIL read-out round %0d", r); end
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (sdo != 1'(r & 1)) begin failures++; $display("FAIL sdi chaining"); end
        shift = 1; @(negedge clk); shift = 0;
      end
    end
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

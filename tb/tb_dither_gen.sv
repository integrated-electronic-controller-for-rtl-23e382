// tb_dither_gen: checks the shared dither generator against a reference
// built from a tick counter: with q samples per quarter, after n ticks the
// period phase is (n / q) mod 4, the in-phase wave is high in quarters 0-1 and
// the quadrature wave in quarters 1-2. Also checks that the two waves are
// orthogonal (their +/-1 product sums to zero over a period) and that the
// outputs do not move without a tick. Ticks come every 3 clocks.
module tb_dither_gen;
  logic clk = 0, rst_n = 0, tick = 0;
  logic [7:0] quarter;
  logic di, dq;
  int checks = 0, failures = 0;

  dither_gen #(.QW(8)) dut (.clk, .rst_n, .tick, .quarter, .dith_i(di), .dith_q(dq));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run_q(input int q, input int nper);
    int n, ph, corr;
    rst_n = 0; quarter = 8'(q);
    repeat (2) @(posedge clk);
    rst_n = 1;
    n = 0; corr = 0;
    for (int k = 0; k < 4 * q * nper; k++) begin
      ph = (n / q) % 4;
      @(negedge clk);
      check(di == (ph == 0 || ph == 1), $sformatf("q=%0d n=%0d dith_i=%0b", q, n, di));
      check(dq == (ph == 1 || ph == 2), $sformatf("q=%0d n=%0d dith_q=%0b", q, n, dq));
      corr += ((di ? 1 : -1) * (dq ? 1 : -1));
      // no tick for two clocks: outputs must hold
      repeat (2) begin @(negedge clk); check(di == (ph == 0 || ph == 1), "hold"); end
      tick = 1; @(negedge clk); tick = 0;
      n++;
    end
    check(corr == 0, $sformatf("orthogonality q=%0d corr=%0d", q, corr));
  endtask

  initial begin
    run_q(2, 3);
    run_q(3, 2);
    run_q(1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

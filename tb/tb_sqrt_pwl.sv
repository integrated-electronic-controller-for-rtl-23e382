// tb_sqrt_pwl: exhaustive check of the square-root compressor over all 4096
// inputs. Reference: chords of y = 64*sqrt(x) between the powers of 4,
// computed in real arithmetic; the RTL may differ by at most 1 LSB. Also
// checks exact values at the breakpoints, monotonicity, the halving of the
// slope from one segment to the next, that the result stays within 4.5% of
// full scale of the exact square root above x = 16, and the bypass.
module tb_sqrt_pwl;
  logic [11:0] x, y;
  logic bp;
  int checks = 0, failures = 0;
  int prev;
  real yr, ex;

  sqrt_pwl #(.W(12)) dut (.x, .bypass(bp), .y);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic real chord(input int v);
    int m;
    real b;
    if (v == 0) return 0.0;
    m = 0;
    while ((4 ** (m + 1)) <= v) m++;
    b = real'(4 ** m);
    return 64.0 * (2.0 ** m) + (real'(v) - b) * 64.0 / (3.0 * (2.0 ** m));
  endfunction

  initial begin
    bp = 0; prev = -1;
    for (int v = 0; v < 4096; v++) begin
      x = 12'(v); #1;
      yr = chord(v);
      check((real'(y) - yr) <= 1.0 && (yr - real'(y)) <= 1.0,
            $sformatf("x=%0d y=%0d ref=%f", v, y, yr));
      check(int'(y) >= prev, $sformatf("monotonic at %0d", v));
      prev = int'(y);
      if (v >= 16) begin
        ex = 64.0 * $sqrt(real'(v));
        check((ex - real'(y)) < 0.045 * 4096.0 && (real'(y) - ex) < 0.045 * 4096.0,
              $sformatf("sqrt error x=%0d y=%0d exact=%f", v, y, ex));
      end
    end
    for (int m = 0; m < 6; m++) begin
      x = 12'(4 ** m); #1;
      check(int'(y) == 64 * (2 ** m), $sformatf("breakpoint 4^%0d -> %0d", m, y));
    end
    // slope halves from segment m to m+1 (segments 2..5, measured over the segment)
    for (int m = 2; m < 5; m++) begin
      int y0, y1, y2, y3;
      real s0, s1;
      x = 12'(4 ** m); #1; y0 = int'(y);
      x = 12'(4 ** (m + 1) - 1); #1; y1 = int'(y);
      x = 12'(4 ** (m + 1)); #1; y2 = int'(y);
      x = 12'(4 ** (m + 2) - 1); #1; y3 = int'(y);
      s0 = real'(y1 - y0) / real'(3 * 4 ** m - 1);
      s1 = real'(y3 - y2) / real'(3 * 4 ** (m + 1) - 1);
      check(s1 / s0 > 0.45 && s1 / s0 < 0.55, $sformatf("slope ratio seg %0d: %f", m, s1 / s0));
    end
    bp = 1;
    for (int k = 0; k < 200; k++) begin
      x = 12'($urandom); #1;
      check(y == x, "bypass");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

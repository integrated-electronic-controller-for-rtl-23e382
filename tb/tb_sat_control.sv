// tb_sat_control: random codes and thresholds; the reset request must be
// raised exactly when the code is below the low or above the high threshold,
// including the boundary values.
module tb_sat_control;
  logic [11:0] code, lo, hi;
  logic rq;
  int checks = 0, failures = 0;

  sat_control #(.W(12)) dut (.code, .th_lo(lo), .th_hi(hi), .reset_req(rq));

  initial begin
    for (int k = 0; k < 5000; k++) begin
      lo = 12'($urandom % 2048);
      hi = 12'(2048 + $urandom % 2048);
      case (k % 5)
        0: code = lo;
        1: code = hi;
        2: code = lo - 12'(lo != 0);
        3: code = hi + 12'(hi != 12'hFFF);
        default: code = 12'($urandom);
      endcase
      #1;
      checks++;
      if (rq != (int'(code) < int'(lo) || int'(code) > int'(hi))) begin
        failures++;
        $display("FAIL code=%0d lo=%0d hi=%0d rq=%0b", code, lo, hi, rq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

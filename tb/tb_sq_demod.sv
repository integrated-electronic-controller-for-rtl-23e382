// tb_sq_demod: checks the square-wave multiplier on random and corner
// samples: output = +x when the reference is 1, -x when it is 0.
module tb_sq_demod;
  logic [19:0] x;
  logic r;
  logic signed [20:0] y;
  int checks = 0, failures = 0;
  longint exp_v;

  sq_demod #(.IN_W(20)) dut (.x, .ref_bit(r), .y);

  initial begin
    for (int k = 0; k < 2000; k++) begin
      x = (k < 4) ? ((k[0]) ? 20'hFFFFF : 20'h0) : 20'($urandom);
      r = (k < 4) ? k[1] : 1'($urandom);
      #1;
      exp_v = r ? longint'(x) : -longint'(x);
      checks++;
      if (longint'(y) != exp_v) begin
        failures++;
        $display("FAIL x=%0d r=%0b y=%0d", x, r, y);
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

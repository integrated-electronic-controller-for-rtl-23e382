// tb_loop_integrator: random stimulus against a reference accumulator kept
// as a 64-bit integer: acc += (negate ? -d : d) >>> shift with saturation at
// 0 and 2^24-1, midscale on sat_reset, preset on load (priority load >
// sat_reset > en). Checks the 12-bit word after every cycle, and that the
// accumulator saturates at both ends.
module tb_loop_integrator;
  localparam int ACC_W = 24;
  logic clk = 0, rst_n = 0, en = 0, negate = 0, sat_reset = 0, load = 0;
  logic signed [20:0] din = '0;
  logic [4:0] shift = '0;
  logic [11:0] load_word = '0, word;
  longint acc_ref;
  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0;

  loop_integrator #(.ACC_W(ACC_W), .IN_W(21)) dut (.clk, .rst_n, .en, .din, .negate,
    .shift, .sat_reset, .load, .load_word, .word);

  always #5 clk = ~clk;

  function automatic longint asr(input longint v, input int s);
    return v >>> s;
  endfunction

  initial begin
    acc_ref = longint'(1) << (ACC_W - 1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (word != 12'h800) begin failures++; $display("FAIL reset word %h", word); end
    for (int k = 0; k < 20000; k++) begin
      en        = ($urandom % 4) != 0;
      negate    = 1'($urandom);
      shift     = (k % 5000 < 2500) ? 5'($urandom % 6) : 5'($urandom % 32);
      sat_reset = ($urandom % 200) == 0;
      load      = ($urandom % 300) == 0;
      load_word = 12'($urandom);
      // bias the input so that both rails are reached
      din       = 21'(signed'(21'($urandom)) + ((k / 1000) % 2 == 0 ? 21'sd400000 : -21'sd400000));
      @(negedge clk);
      if (load) acc_ref = longint'(load_word) << (ACC_W - 12);
      else if (sat_reset) acc_ref = longint'(1) << (ACC_W - 1);
      else if (en) begin
        acc_ref += asr(negate ? -longint'(din) : longint'(din), int'(shift));
        if (acc_ref < 0) begin acc_ref = 0; n_lo++; end
        if (acc_ref > (longint'(1) << ACC_W) - 1) begin acc_ref = (longint'(1) << ACC_W) - 1; n_hi++; end
      end
      checks++;
      if (longint'(word) != (acc_ref >> (ACC_W - 12))) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d word %0d ref %0d", k, word, acc_ref >> (ACC_W - 12));
      end
    end
    en = 0; load = 0; sat_reset = 0;
    checks++;
    if (n_hi == 0 || n_lo == 0) begin failures++; $display("FAIL rails not reached %0d %0d", n_hi, n_lo); end
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

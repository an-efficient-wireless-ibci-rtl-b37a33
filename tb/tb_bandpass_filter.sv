// tb_bandpass_filter: checks the per-electrode band-pass filter.
//
// 1. Random samples on randomly interleaved electrodes are compared, output by
//    output, with a reference written here with 64-bit integers (floor
//    division by powers of two).  This also shows that electrodes do not share
//    state.
// 2. Band shape: a constant input (DC) must decay to near zero, an input
//    alternating every sample (the top of the band) must be attenuated, and a
//    slow square wave of period 32 samples must pass with most of its amplitude.
module tb_bandpass_filter;
  import hs_pkg::*;
  localparam int KF = 1, KS = 5, FR = 8;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  sample_t in, out;
  int checks = 0, failures = 0;
  longint fast [NUM_CH], slow [NUM_CH];

  always #5 clk = ~clk;

  bandpass_filter #(.KF(KF), .KS(KS), .FR(FR)) dut (.clk, .rst_n, .in_valid, .in, .out_valid, .out);

  function automatic longint fdiv(longint a, int k);   // floor(a / 2^k)
    longint d = longint'(1) << k;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic int ref_step(int ch, int x);
    longint xs, y;
    xs = longint'(x) * 256;
    fast[ch] = fast[ch] + fdiv(xs - fast[ch], KF);
    slow[ch] = slow[ch] + fdiv(xs - slow[ch], KS);
    y = fdiv(fast[ch] - slow[ch], FR);
    if (y > 32767) y = 32767;
    if (y < -32768) y = -32768;
    return int'(y);
  endfunction

  task automatic put(input int ch, input int x, output int y);
    int e;
    @(negedge clk);
    in_valid = 1; in.ch = 8'(ch); in.ts = TS_W'(x); in.data = 16'(x);
    e = ref_step(ch, x);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || int'(out.data) != e || int'(out.ch) != ch || out.ts != TS_W'(x)) begin
      failures++;
      if (failures < 10) $display("FAIL ch %0d x %0d: out %0d (valid %0b) expected %0d", ch, x, out.data, out_valid, e);
    end
    y = int'(out.data);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int y, pk;
    foreach (fast[i]) begin fast[i] = 0; slow[i] = 0; end
    in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. random interleaved samples, including full-scale values
    for (int k = 0; k < 3000; k++) begin
      int x;
      x = int'($urandom_range(0, 65535)) - 32768;
      if (k % 5 == 0) x = x / 64;
      put($urandom_range(0, NUM_CH - 1), x, y);
    end
    // 2a. DC on electrode 7 decays
    for (int k = 0; k < 400; k++) put(7, 1000, y);
    checks++;
    if (y > 10 || y < -10) begin failures++; $display("FAIL DC not removed: %0d", y); end
    // 2b. alternating +-1000 on electrode 9 is attenuated
    pk = 0;
    for (int k = 0; k < 400; k++) begin
      put(9, (k % 2) ? 1000 : -1000, y);
      if (k > 300 && (y > pk || -y > pk)) pk = (y > 0) ? y : -y;
    end
    checks++;
    if (pk > 800) begin failures++; $display("FAIL top of band not attenuated: %0d", pk); end
    // 2c. square wave of period 32 on electrode 11 passes
    pk = 0;
    for (int k = 0; k < 640; k++) begin
      put(11, ((k / 16) % 2) ? 1000 : -1000, y);
      if (k > 320 && (y > pk || -y > pk)) pk = (y > 0) ? y : -y;
    end
    checks++;
    if (pk < 900) begin failures++; $display("FAIL mid band not passed: %0d", pk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

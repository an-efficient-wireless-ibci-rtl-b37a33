// tb_noise_whitener: checks the per-electrode noise normalisation.
//
// Samples with a different noise level per electrode (amplitude 20 .. 400
// codes) are fed on interleaved electrodes.  Every output is compared with a
// reference computed here: m_i kept in Q.4, updated with floor((|x|*16 -
// m_i) / 2^KN) after use, and out = sign(x) * floor(|x| * 4096 / m_i)
// saturated to 32767.  The latency must be 28 cycles and in_ready must be
// low meanwhile.  After the estimates settle, a sample equal to an
// electrode's mean absolute value must come out close to 1.0 (256).
module tb_noise_whitener;
  import hs_pkg::*;
  localparam int KN = 6;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  sample_t in, out;
  int checks = 0, failures = 0;
  longint m [NUM_CH];
  int amp [NUM_CH];

  always #5 clk = ~clk;

  noise_whitener #(.KN(KN), .NOISE_INIT(320)) dut (.clk, .rst_n, .in_valid, .in_ready, .in, .out_valid, .out);

  function automatic longint fdiv(longint a, int k);
    longint d = longint'(1) << k;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic int ref_step(int ch, int x);
    longint mag, q, den;
    mag = (x < 0) ? -x : x;
    den = (m[ch] == 0) ? 1 : m[ch];
    q = ((mag > 32767 ? 32767 : mag) * 4096) / den;
    if (q > 32767) q = 32767;
    m[ch] = m[ch] + fdiv(mag * 16 - m[ch], KN);
    return (x < 0) ? -int'(q) : int'(q);
  endfunction

  task automatic put(input int ch, input int x, output int y);
    int e, lat;
    @(negedge clk);
    in_valid = 1; in.ch = 8'(ch); in.ts = TS_W'(x); in.data = 16'(x);
    e = ref_step(ch, x);
    @(negedge clk);
    in_valid = 0;
    lat = 0;
    while (!out_valid && lat < 100) begin
      checks++;
      if (in_ready) begin failures++; $display("FAIL ready while busy"); end
      @(negedge clk);
      lat++;
    end
    checks++;
    if (lat != 28) begin failures++; $display("FAIL latency %0d", lat); end
    checks++;
    if (int'(out.data) != e || int'(out.ch) != ch || out.ts != TS_W'(x)) begin
      failures++;
      if (failures < 10) $display("FAIL ch %0d x %0d: out %0d expected %0d", ch, x, out.data, e);
    end
    y = int'(out.data);
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int y;
    foreach (m[i]) begin m[i] = 320; amp[i] = 20 + 12 * i; end
    in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      int ch, x;
      ch = $urandom_range(0, NUM_CH - 1);
      x = int'($urandom_range(0, 2 * amp[ch])) - amp[ch];
      if (k % 97 == 0) x = (k % 2) ? 32767 : -32768;     // saturation path
      put(ch, x, y);
    end
    // settled: a sample at the electrode's own mean |x| reads about 1.0
    for (int ch = 0; ch < NUM_CH; ch += 5) begin
      put(ch, -int'(m[ch] / 16), y);
      checks++;
      if (y > -230 || y < -282) begin failures++; $display("FAIL ch %0d unit sample -> %0d", ch, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

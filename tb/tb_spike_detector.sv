// tb_spike_detector: checks the per-electrode threshold-crossing detector.
//
// Each electrode gets a random negative threshold.  Random samples (with many
// near the thresholds) on interleaved electrodes are fed in; an event is
// expected exactly when a sample is below its electrode's threshold and the
// previous sample of the same electrode was not.  Event fields are checked.
module tb_spike_detector;
  import hs_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, spk_valid;
  sample_t in;
  spike_t  spk;
  th_t [NUM_CH-1:0] th;
  int checks = 0, failures = 0, nev = 0;
  bit below [NUM_CH];

  always #5 clk = ~clk;

  spike_detector dut (.clk, .rst_n, .in_valid, .in, .th, .spk_valid, .spk);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NUM_CH; i++) begin
      th[i] = -th_t'($urandom_range(256, 2000));
      below[i] = 0;
    end
    th[3] = 16'sd500;   // a positive threshold behaves the same way
    in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      int ch, x;
      bit b, e;
      ch = $urandom_range(0, NUM_CH - 1);
      x  = int'(th[ch]) + int'($urandom_range(0, 600)) - 300;
      if (k % 9 == 0) x = int'($urandom_range(0, 65535)) - 32768;
      @(negedge clk);
      in_valid = 1; in.ch = 8'(ch); in.ts = TS_W'(k); in.data = 16'(x);
      b = (x < int'(th[ch]));
      e = b && !below[ch];
      below[ch] = b;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (spk_valid != e) begin
        failures++;
        if (failures < 10) $display("FAIL k %0d ch %0d x %0d th %0d: event %0b expected %0b", k, ch, x, th[ch], spk_valid, e);
      end
      if (e) begin
        nev++;
        checks++;
        if (int'(spk.ch) != ch || spk.ts != TS_W'(k) || int'(spk.amp) != x) begin
          failures++; $display("FAIL event fields");
        end
      end
    end
    checks++;
    if (nev < 100) begin failures++; $display("FAIL only %0d events", nev); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

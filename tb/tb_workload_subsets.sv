// tb_workload_subsets: rate-adaptation workload on 32-electrode subsets.
//
// Large arrays (100-electrode Utah arrays, 384-electrode Neuropixels probes)
// are recorded in 32-electrode subsets, one front end each.  This testbench
// plays the server for such subsets: it holds a target sample rate s_i for
// every electrode, maps it to the largest supported factor x with R/x >= s_i
// (R = full per-electrode rate, factors 1..15), sends the configuration over
// the radio link and then measures, at the front-end model, how often each
// electrode is really converted.  The clock is 48 MHz, the controller's
// default parameters are used, so R = 48 MHz / 1564 = 30.69 kS/s (taken
// from the simulated clock period, which the time precision rounds).
//
//   Subset A: a full subset.  Targets drawn at random between 1 and 30 kS/s,
//             plus boundary cases (exactly R, just above and exactly R/2,
//             exactly R/15, and a target below R/15).
//   Subset B: the last subset of a 100-electrode array, where only 4 of the
//             32 inputs carry electrodes; the 28 idle ones are given the
//             largest factor, the lowest rate the schedule can run.
//
// Checked for every electrode: the chosen factor meets the target and the
// next larger factor would not; over NR rounds the electrode is converted
// exactly ceil(NR/x) times, so the realised rate R/x is at least the target;
// the time-based rate (conversions per simulated second) lies between the
// target and R/x + R/NR (the ceiling of a window that is not a multiple of x).
// Spike packets received during the run must carry a round number that is a
// multiple of the electrode's factor, and electrodes with factors up to 3
// must still report spikes (the model's spike spans three full-rate samples).
// The overall saving in conversions against full-rate sampling is printed.
// Target-rate distributions are this testbench's own; the 32-electrode subset
// split and the max-factor rule are those of the published scheme.
module tb_workload_subsets;
  import hs_pkg::*;

  localparam real CLK_NS = 1000.0 / 48.0;                 // 48 MHz
  localparam int  ROUND  = (NUM_CH + 2) * 46;             // cycles per round
  localparam int  XMAX   = (1 << DS_W) - 1;
  localparam int  NR     = 180;                           // measured rounds

  logic clk = 0, rst_n = 0;
  logic adc_cs_n, adc_sclk, adc_mosi, adc_miso;
  logic esp_sclk, esp_cs_n, esp_mosi, esp_miso, esp_data_rdy;
  logic running, calib_mode;
  logic [15:0] cfg_cnt, err_cnt, pkt_cnt, drop_cnt;

  always #(CLK_NS / 2.0) clk = ~clk;

  headstage_top dut (
    .clk, .rst_n, .adc_cs_n, .adc_sclk, .adc_mosi, .adc_miso,
    .esp_sclk, .esp_cs_n, .esp_mosi, .esp_miso, .esp_data_rdy,
    .running, .calib_mode, .cfg_cnt, .err_cnt, .pkt_cnt, .drop_cnt);

  rhd2132_model #(.T_SAMPLE_NS(32585), .NOISE(20), .SPIKE_MASK(32'hFFFF_FFFF),
                  .SPIKE_PERIOD(37), .SPIKE_AMP(400))
    adc (.cs_n(adc_cs_n), .sclk(adc_sclk), .mosi(adc_mosi), .miso(adc_miso));

  esp_host_model #(.HALF_NS(100)) host (.sclk(esp_sclk), .cs_n(esp_cs_n), .mosi(esp_mosi), .miso(esp_miso));

  int  checks = 0, failures = 0;
  real r_full;                                 // R, samples per second
  real target [NUM_CH];
  int  fac [NUM_CH];
  int  ev_cnt [NUM_CH];
  bit  measuring = 0;
  int  n_events = 0;
  int  first_new = 0;                          // index of the first packet under the new configuration

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Server side: x = max{x in 1..XMAX | R/x >= s}.
  function automatic int pick_factor(real s);
    for (int x = XMAX; x >= 1; x--)
      if (r_full / real'(x) >= s) return x;
    return 1;
  endfunction

  // ---------------------------------------------------------------------
  // Radio side: downlink frames are queued; otherwise the uplink is polled
  // and spike packets are parsed (E5 ch ts2 ts1 ts0, 00 = idle filler).
  logic [7:0] frames [$][$];
  int         pidx = 0;
  logic [7:0] pkt [5];

  task automatic parse(input logic [7:0] rx [$]);
    foreach (rx[i]) begin
      if (pidx == 0 && rx[i] == 8'h00) continue;
      if (pidx == 0 && rx[i] != PKT_SPIKE) begin
        check(0, $sformatf("unexpected uplink byte %02h", rx[i]));
        continue;
      end
      pkt[pidx] = rx[i];
      pidx++;
      if (pidx == PKT_LEN) begin
        int ch, ts;
        pidx = 0;
        ch = int'(pkt[1]);
        ts = int'({pkt[2], pkt[3], pkt[4]});
        n_events++;
        if (ch >= NUM_CH) check(0, $sformatf("event on electrode %0d", ch));
        else if (measuring && n_events > first_new) begin
          ev_cnt[ch]++;
          check(ts % fac[ch] == 0,
                $sformatf("event ch %0d round %0d not a multiple of x=%0d", ch, ts, fac[ch]));
        end
      end
    end
  endtask

  initial begin
    logic [7:0] rx [$];
    logic [7:0] z [$];
    wait (rst_n);
    forever begin
      if (frames.size() > 0) begin
        host.xfer(frames.pop_front(), rx);
        parse(rx);
      end else begin
        z = {};
        for (int i = 0; i < 16; i++) z.push_back(8'h00);
        host.xfer(z, rx);
        parse(rx);
      end
    end
  end

  function automatic void queue_config();
    logic [7:0] f [$];
    logic [7:0] chk;
    f = {DL_SYNC, OP_CONFIG};
    chk = OP_CONFIG;
    for (int i = 0; i < NUM_CH; i++) begin
      logic [15:0] t;
      t = 16'(-1024);                          // -4.0 noise units
      f.push_back(8'(fac[i])); f.push_back(t[15:8]); f.push_back(t[7:0]);
      chk ^= 8'(fac[i]) ^ t[15:8] ^ t[7:0];
    end
    f.push_back(chk);
    frames.push_back(f);
  endfunction

  // Send the configuration, wait for it to be committed and measure NR rounds.
  task automatic run_subset(input string name, input int live);
    int  c0 [NUM_CH], c1 [NUM_CH];
    int  n;
    longint conv_adapt = 0, conv_full = 0;
    realtime t0, t1;
    logic [15:0] cfg_before;
    for (int i = 0; i < NUM_CH; i++) begin
      fac[i] = pick_factor(target[i]);
      check(r_full / real'(fac[i]) >= target[i],
            $sformatf("%s ch %0d: x=%0d misses target %0.0f", name, i, fac[i], target[i]));
      if (fac[i] < XMAX)
        check(r_full / real'(fac[i] + 1) < target[i],
              $sformatf("%s ch %0d: x=%0d is not the largest factor", name, i, fac[i]));
    end
    cfg_before = cfg_cnt;
    queue_config();
    wait (cfg_cnt != cfg_before);
    // every event of the old schedule is already in the FIFO at the commit
    first_new = int'(pkt_cnt);
    foreach (c0[i]) c0[i] = adc.conv_cnt[i];
    foreach (ev_cnt[i]) ev_cnt[i] = 0;
    measuring = 1;
    t0 = $realtime;
    repeat (NR * ROUND) @(posedge clk);
    t1 = $realtime;
    foreach (c1[i]) c1[i] = adc.conv_cnt[i];
    #200us;                                    // let the last packets drain
    measuring = 0;
    for (int i = 0; i < NUM_CH; i++) begin
      real meas;
      n = c1[i] - c0[i];
      meas = real'(n) / ((t1 - t0) * 1.0e-9);
      check(n == (NR + fac[i] - 1) / fac[i],
            $sformatf("%s ch %0d x=%0d: %0d conversions in %0d rounds", name, i, fac[i], n, NR));
      check(meas >= target[i] * (1.0 - 1.0e-9) && meas <= r_full * (1.0 / real'(fac[i]) + 1.0 / real'(NR)) + 1.0,
            $sformatf("%s ch %0d: measured %0.0f S/s, target %0.0f, R/x %0.0f",
                      name, i, meas, target[i], r_full / real'(fac[i])));
      if (fac[i] <= 3)
        check(ev_cnt[i] > 0, $sformatf("%s ch %0d x=%0d: no spikes reported", name, i, fac[i]));
      if (i < live) begin
        conv_adapt += longint'(n);
        conv_full  += longint'(NR);
      end
      if (i < 4 || i >= NUM_CH - 2)
        $display("  %s ch %2d: target %6.0f S/s  x=%2d  R/x %6.0f S/s  measured %6.0f S/s  events %0d",
                 name, i, target[i], fac[i], r_full / real'(fac[i]), meas, ev_cnt[i]);
    end
    $display("%s: %0d live electrodes, %0d conversions instead of %0d at full rate (%0.1f%% saved)",
             name, live, conv_adapt, conv_full, 100.0 * (1.0 - real'(conv_adapt) / real'(conv_full)));
  endtask

  // ---------------------------------------------------------------------
  initial begin
    #200ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    begin
      realtime ta;
      @(posedge clk) ta = $realtime;
      @(posedge clk) r_full = 1.0e9 / (real'(ROUND) * ($realtime - ta));
    end
    $display("full rate per electrode R = %0.1f S/s", r_full);
    check(r_full >= 30000.0, "full rate below 30 kS/s");

    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (running);

    // Subset A: a full 32-electrode subset.
    for (int i = 0; i < NUM_CH; i++)
      target[i] = 1000.0 + real'($urandom_range(0, 29000));
    target[0] = r_full;
    target[1] = r_full / 2.0 + 1.0;
    target[2] = r_full / 2.0;
    target[3] = r_full / 15.0;
    target[4] = 300.0;
    run_subset("subset A", NUM_CH);

    // Subset B: last subset of a 100-electrode array (100 - 3*32 = 4 live).
    for (int i = 0; i < NUM_CH; i++)
      target[i] = (i < 4) ? 2000.0 + real'($urandom_range(0, 20000)) : 0.0;
    run_subset("subset B", 4);

    check(err_cnt == 0, "downlink frames rejected");
    check(drop_cnt == 0, "uplink packets dropped");
    check(n_events > 0, "no spike events at all");
    $display("spike packets received: %0d", n_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

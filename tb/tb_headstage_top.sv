// tb_headstage_top: end-to-end test of the headstage controller at its
// default parameters (32 electrodes, 46-cycle slots, 2 filler slots).
//
// The RHD2132 model supplies noise on every electrode and spikes on a few;
// the radio module model sends downlink frames and keeps reading the uplink.
// A reference model written here (band-pass, noise estimate, divide,
// threshold crossing, all from the block documentation) runs on every
// conversion the RHD2132 model performs and predicts the spike events.
//
// Scenario and checks:
//   A. Start-up: the front end receives CALIBRATE.
//   B. A configuration frame with a bad checksum is rejected; a good one sets
//      factors 1,2,3,4 on electrodes 0..3 and 1..6 on the rest, and a huge
//      threshold on electrode 8 (its spikes must disappear).
//   C. Streaming for 300 rounds: each electrode is converted ceil(R/x) times
//      in R rounds, and the spike packets read over the radio link since
//      reset equal the reference events, in order, with their round time
//      stamps.
//   D. Calibration mode: pre-processed samples are sent; the radio cannot keep
//      up, so whole packets are dropped and counted.  Every raw packet that
//      arrives must carry the reference value of that sample.
//   E. Back to streaming: spike packets again, each one a reference event.
// Each mechanism (calibration command, rejected frame, commit, skipped
// conversion, spike packet, raw packet, overflow drop, mode switch) is
// counted and must occur at least once.
module tb_headstage_top;
  import hs_pkg::*;

  localparam int CLK_NS   = 10;
  localparam int ROUND    = (NUM_CH + 2) * 46;            // cycles per round
  localparam logic [31:0] SPIKES = 32'h0000_0125;         // electrodes 0, 2, 5, 8
  localparam int TH_ALL   = -1024;                        // -4.0
  localparam int TH_HIGH  = -32000;                       // -125: never crossed
  localparam int KF = 1, KS = 5, KN = 10;

  logic clk = 0, rst_n = 0;
  logic adc_cs_n, adc_sclk, adc_mosi, adc_miso;
  logic esp_sclk, esp_cs_n, esp_mosi, esp_miso, esp_data_rdy;
  logic running, calib_mode;
  logic [15:0] cfg_cnt, err_cnt, pkt_cnt, drop_cnt;

  always #(CLK_NS / 2) clk = ~clk;

  headstage_top dut (
    .clk, .rst_n, .adc_cs_n, .adc_sclk, .adc_mosi, .adc_miso,
    .esp_sclk, .esp_cs_n, .esp_mosi, .esp_miso, .esp_data_rdy,
    .running, .calib_mode, .cfg_cnt, .err_cnt, .pkt_cnt, .drop_cnt);

  rhd2132_model #(.T_SAMPLE_NS(ROUND * CLK_NS), .NOISE(20), .SPIKE_MASK(SPIKES),
                  .SPIKE_PERIOD(37), .SPIKE_AMP(400))
    adc (.cs_n(adc_cs_n), .sclk(adc_sclk), .mosi(adc_mosi), .miso(adc_miso));

  esp_host_model #(.HALF_NS(100)) host (.sclk(esp_sclk), .cs_n(esp_cs_n), .mosi(esp_mosi), .miso(esp_miso));

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------------
  // Round counting from the outside: every round ends with two filler
  // commands at the front end, and a commit (cfg_cnt changing, one cycle
  // after the round boundary) restarts the count at 0.
  int  tb_round = 0;
  int  rounds_total = 0;
  int  n_commit = 0;
  int  n_fill = 0;
  int  first_post = -1;              // index in exp_ev of the first event after the commit
  always @(adc.ncmd) if (rst_n && running && adc.last_cmd == CMD_DUMMY) begin
    n_fill++;
    if (n_fill % 2 == 0) begin
      tb_round++;
      rounds_total++;
    end
  end
  always @(cfg_cnt) if (rst_n) begin
    tb_round = 0;
    n_commit++;
    if (first_post < 0) first_post = exp_ev.size();
  end

  // ---------------------------------------------------------------------
  // Reference pipeline
  longint fast [NUM_CH], slow [NUM_CH], noise_m [NUM_CH];
  bit     below [NUM_CH];
  int     th_ref [NUM_CH];
  int     fac [NUM_CH];

  typedef struct { int ch; int ts; } ev_t;
  ev_t    exp_ev [$];                 // events expected in phase C
  bit     ev_set [longint];           // all expected events, key {ch, ts}
  int     raw_ref [longint];          // whitened value, key {ch, ts[7:0]} of the latest
  bit     collect = 1;                // events recorded until the end of phase C
  int     conv_since [NUM_CH];
  int     n_calibrate = 0;

  function automatic longint fdiv(longint a, int k);
    longint d = longint'(1) << k;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic int ref_sample(int ch, logic [15:0] code);
    longint x, xs, y, mag, q, den;
    x  = longint'(code) - 32768;
    xs = x * 256;
    fast[ch] = fast[ch] + fdiv(xs - fast[ch], KF);
    slow[ch] = slow[ch] + fdiv(xs - slow[ch], KS);
    y = fdiv(fast[ch] - slow[ch], 8);
    if (y > 32767) y = 32767;
    if (y < -32768) y = -32768;
    mag = (y < 0) ? -y : y;
    den = (noise_m[ch] == 0) ? 1 : noise_m[ch];
    q = ((mag > 32767 ? 32767 : mag) * 4096) / den;
    if (q > 32767) q = 32767;
    noise_m[ch] = noise_m[ch] + fdiv(mag * 16 - noise_m[ch], KN);
    return (y < 0) ? -int'(q) : int'(q);
  endfunction

  always @(adc.ncmd) if (rst_n && adc.last_cmd == CMD_CALIBRATE) n_calibrate++;

  always @(adc.conv_ev) if (rst_n) begin
    int ch, w;
    bit b;
    ch = adc.last_ch;
    conv_since[ch]++;
    w = ref_sample(ch, adc.last_code);
    raw_ref[{32'(ch), 32'(tb_round & 255)}] = w;
    b = (w < th_ref[ch]);
    if (b && !below[ch]) begin
      ev_t e;
      e.ch = ch; e.ts = tb_round;
      ev_set[{32'(ch), 32'(tb_round)}] = 1;
      if (collect) exp_ev.push_back(e);
    end
    below[ch] = b;
  end

  // ---------------------------------------------------------------------
  // Uplink parser
  ev_t got_ev [$];
  int  n_spike_pkt = 0, n_raw_pkt = 0, n_raw_bad = 0, n_ev_bad = 0;
  logic [7:0] pkt [$];

  task automatic parse(input logic [7:0] b);
    if (pkt.size() == 0) begin
      if (b == 8'h00) return;
      if (b != PKT_SPIKE && b != PKT_RAW) begin
        checks++; failures++; $display("FAIL bad packet header %h", b);
        return;
      end
    end
    pkt.push_back(b);
    if (pkt.size() == PKT_LEN) begin
      if (pkt[0] == PKT_SPIKE) begin
        ev_t e;
        e.ch = int'(pkt[1]);
        e.ts = int'({pkt[2], pkt[3], pkt[4]});
        n_spike_pkt++;
        got_ev.push_back(e);
        checks++;
        if (!ev_set.exists({32'(e.ch), 32'(e.ts)})) begin
          failures++; n_ev_bad++; $display("FAIL spike packet ch %0d ts %0d not expected", e.ch, e.ts);
        end
      end else begin
        longint key;
        int d;
        key = {32'(pkt[1]), 32'(pkt[2])};
        d = int'($signed({pkt[3], pkt[4]}));
        n_raw_pkt++;
        checks++;
        if (!raw_ref.exists(key) || raw_ref[key] != d) begin
          failures++; n_raw_bad++;
          if (n_raw_bad < 10) $display("FAIL raw packet ch %0d ts %0d value %0d", pkt[1], pkt[2], d);
        end
      end
      pkt = {};
    end
  endtask

  // The radio model: sends queued frames, otherwise polls the uplink.
  logic [7:0] frames [$][$];
  bit poll = 1;

  task automatic xfer_and_parse(input logic [7:0] tx [$]);
    logic [7:0] rx [$];
    host.xfer(tx, rx);
    foreach (rx[i]) parse(rx[i]);
  endtask

  initial begin
    wait (rst_n);
    forever begin
      if (frames.size() != 0) begin
        logic [7:0] f [$];
        f = frames.pop_front();
        xfer_and_parse(f);
      end else if (poll) begin
        logic [7:0] z [$];
        z = {};
        for (int i = 0; i < 16; i++) z.push_back(8'h00);
        xfer_and_parse(z);
      end else begin
        #1000;
      end
    end
  end

  function automatic void queue_config(input bit corrupt);
    logic [7:0] f [$];
    logic [7:0] chk;
    f = {DL_SYNC, OP_CONFIG};
    chk = OP_CONFIG;
    for (int i = 0; i < NUM_CH; i++) begin
      logic [15:0] t;
      t = 16'(i == 8 ? TH_HIGH : TH_ALL);
      f.push_back(8'(fac[i])); f.push_back(t[15:8]); f.push_back(t[7:0]);
      chk ^= 8'(fac[i]) ^ t[15:8] ^ t[7:0];
    end
    f.push_back(corrupt ? ~chk : chk);
    frames.push_back(f);
  endfunction

  function automatic void queue_mode(input bit m);
    logic [7:0] f [$];
    f = {DL_SYNC, OP_MODE, 8'(m), OP_MODE ^ 8'(m)};
    frames.push_back(f);
  endfunction

  task automatic wait_rounds(input int n);
    repeat (n * ROUND) @(posedge clk);
  endtask

  // ---------------------------------------------------------------------
  initial begin
    #30ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_skipped, base_round;
    for (int i = 0; i < NUM_CH; i++) begin
      fast[i] = 0; slow[i] = 0; noise_m[i] = 320; below[i] = 0;
      th_ref[i] = TH_ALL; conv_since[i] = 0;
      fac[i] = (i < 4) ? i + 1 : int'($urandom_range(1, 6));
    end
    fac[5] = 2; fac[8] = 1;
    repeat (5) @(negedge clk);
    rst_n = 1;

    // A.
    wait (running);
    checks++;
    if (n_calibrate != 1) begin failures++; $display("FAIL %0d CALIBRATE commands", n_calibrate); end
    wait_rounds(20);

    // B.
    queue_config(1);
    queue_config(0);
    wait (n_commit == 1);
    // threshold of electrode 8 changes with the commit (its samples are
    // processed well inside a round)
    th_ref[8] = TH_HIGH;
    checks++;
    if (err_cnt != 1 || cfg_cnt != 1) begin failures++; $display("FAIL err_cnt %0d cfg_cnt %0d", err_cnt, cfg_cnt); end

    // C. 300 rounds of streaming, counted from the first round after commit
    @(negedge clk);
    foreach (conv_since[i]) conv_since[i] = 0;
    base_round = rounds_total;
    while (rounds_total - base_round < 300) @(negedge clk);
    collect = 0;
    // conversions per electrode in the 300 rounds (300 + pipeline: the first
    // round's conversions are counted, the 301st's not yet)
    n_skipped = 0;
    for (int i = 0; i < NUM_CH; i++) begin
      checks++;
      if (conv_since[i] != (300 + fac[i] - 1) / fac[i]) begin
        failures++; $display("FAIL ch %0d x %0d: %0d conversions in 300 rounds", i, fac[i], conv_since[i]);
      end
      n_skipped += 300 - conv_since[i];
    end
    wait_rounds(10);          // let the last packets out
    // every event predicted since reset must have arrived, in order; later
    // packets (from conversions after the cut) may follow
    checks++;
    if (got_ev.size() < exp_ev.size() || got_ev.size() > exp_ev.size() + 8) begin
      failures++; $display("FAIL %0d spike packets, %0d expected", got_ev.size(), exp_ev.size());
    end
    for (int i = 0; i < exp_ev.size() && i < got_ev.size(); i++) begin
      checks++;
      if (got_ev[i].ch != exp_ev[i].ch || got_ev[i].ts != exp_ev[i].ts) begin
        failures++; $display("FAIL event %0d: ch %0d ts %0d, expected ch %0d ts %0d",
                             i, got_ev[i].ch, got_ev[i].ts, exp_ev[i].ch, exp_ev[i].ts);
      end
    end
    // after the commit: electrode 8 is silenced and events fall on sampling rounds
    for (int i = first_post; i < exp_ev.size() && i < got_ev.size(); i++) begin
      checks++;
      if (got_ev[i].ch == 8) begin failures++; $display("FAIL electrode 8 spike passed its high threshold"); end
      checks++;
      if (got_ev[i].ts % fac[got_ev[i].ch] != 0) begin
        failures++; $display("FAIL event ch %0d at round %0d not a sampling round", got_ev[i].ch, got_ev[i].ts);
      end
    end
    checks++;
    if (drop_cnt != 0) begin failures++; $display("FAIL %0d drops while streaming", drop_cnt); end

    // D. calibration mode
    queue_mode(1);
    wait (calib_mode);
    wait_rounds(60);
    checks++;
    if (drop_cnt == 0) begin failures++; $display("FAIL no overflow in calibration mode"); end

    // E. back to streaming
    begin
      int n0;
      queue_mode(0);
      wait (!calib_mode);
      n0 = n_spike_pkt;
      wait_rounds(120);
      checks++;
      if (n_spike_pkt == n0) begin failures++; $display("FAIL no spikes after returning to streaming"); end
    end

    // mechanism counts
    $display("mechanisms: calibrate=%0d rejected_frames=%0d commits=%0d skipped_conversions=%0d",
             n_calibrate, err_cnt, n_commit, n_skipped);
    $display("            spike_packets=%0d raw_packets=%0d overflow_drops=%0d mode_switches=2 rounds=%0d",
             n_spike_pkt, n_raw_pkt, drop_cnt, rounds_total);
    checks++; if (n_calibrate == 0)  begin failures++; $display("FAIL mechanism: calibrate"); end
    checks++; if (err_cnt == 0)      begin failures++; $display("FAIL mechanism: rejected frame"); end
    checks++; if (n_commit == 0)     begin failures++; $display("FAIL mechanism: commit"); end
    checks++; if (n_skipped == 0)    begin failures++; $display("FAIL mechanism: skipped conversion"); end
    checks++; if (n_spike_pkt == 0)  begin failures++; $display("FAIL mechanism: spike packet"); end
    checks++; if (n_raw_pkt == 0)    begin failures++; $display("FAIL mechanism: raw packet"); end
    checks++; if (drop_cnt == 0)     begin failures++; $display("FAIL mechanism: overflow drop"); end
    checks++;
    if (adc.nerr != 0) begin failures++; $display("FAIL %0d SPI framing errors at the front end", adc.nerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rate_scheduler: checks the per-electrode sampling decision.
//
// Factors 0..15 are drawn at random for 32 electrodes.  After every round
// tick the enable of electrode i must equal (r mod x_i == 0), with x = 0
// read as 1, computed here from the round number directly.  A restart in
// the middle must bring r back to 0 with every electrode enabled, and over
// a whole run each electrode must be sampled ceil(R / x_i) times in R rounds
// (the realised rate R_max / x_i).
module tb_rate_scheduler;
  import hs_pkg::*;

  logic clk = 0, rst_n = 0, restart = 0, round_tick = 0;
  logic [NUM_CH-1:0][DS_W-1:0] ds;
  logic [NUM_CH-1:0] en;
  logic [TS_W-1:0]   ridx;
  int checks = 0, failures = 0;
  int r, cnt [NUM_CH];

  always #5 clk = ~clk;

  rate_scheduler dut (.clk, .rst_n, .restart, .round_tick, .ds_factor(ds),
                      .sample_en(en), .round_idx(ridx));

  function automatic int xeff(int i);
    return (ds[i] == 0) ? 1 : int'(ds[i]);
  endfunction

  task automatic check_round();
    for (int i = 0; i < NUM_CH; i++) begin
      checks++;
      if (en[i] !== ((r % xeff(i)) == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL r=%0d ch=%0d x=%0d en=%0b", r, i, xeff(i), en[i]);
      end
      if (en[i]) cnt[i]++;
    end
    checks++;
    if (ridx != TS_W'(r)) begin
      failures++;
      $display("FAIL round_idx %0d expected %0d", ridx, r);
    end
  endtask

  task automatic tick(input logic rs);
    @(negedge clk);
    round_tick = 1; restart = rs;
    @(negedge clk);
    round_tick = 0; restart = 0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NUM_CH; i++) ds[i] = DS_W'($urandom_range(0, 15));
    ds[0] = 1; ds[1] = 2; ds[2] = 3; ds[3] = 4; ds[4] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: 50 rounds from reset
    foreach (cnt[i]) cnt[i] = 0;
    r = 0;
    check_round();
    for (int k = 1; k < 50; k++) begin
      tick(1'b0); r++; check_round();
    end
    // restart with new factors in the middle
    for (int i = 0; i < NUM_CH; i++) ds[i] = DS_W'($urandom_range(1, 15));
    tick(1'b1); r = 0;
    foreach (cnt[i]) cnt[i] = 0;
    check_round();
    for (int k = 1; k < 120; k++) begin
      tick(1'b0); r++; check_round();
    end
    // sampling count over 120 rounds = ceil(120 / x)
    for (int i = 0; i < NUM_CH; i++) begin
      checks++;
      if (cnt[i] != (120 + xeff(i) - 1) / xeff(i)) begin
        failures++;
        $display("FAIL ch=%0d x=%0d sampled %0d times", i, xeff(i), cnt[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

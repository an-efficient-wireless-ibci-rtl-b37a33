// tb_event_packetizer: checks packet framing, mode selection and overflow.
//
// FIFO depth is cut to 16 bytes so overflow is easy to reach.
//   1. Streaming mode, FIFO drained continuously: every spike becomes the
//      5-byte packet E5 ch ts[23:16] ts[15:8] ts[7:0], in order, none dropped;
//      samples offered at the same time are ignored.
//   2. Overflow: with nothing drained, 10 spikes are offered; exactly 3 fit
//      (15 bytes), 7 are dropped whole and counted, and the 3 come out intact.
//   3. Calibration mode: samples become CA ch ts[7:0] d[15:8] d[7:0] and
//      spikes are ignored.
module tb_event_packetizer;
  import hs_pkg::*;

  logic clk = 0, rst_n = 0, calib = 0, spk_valid = 0, smp_valid = 0, tx_pop = 0, tx_avail;
  spike_t spk;
  sample_t smp;
  logic [7:0] tx_data;
  logic [15:0] pkt_cnt, drop_cnt;
  int checks = 0, failures = 0;
  logic [7:0] exp_q [$];
  bit drain = 0;

  always #5 clk = ~clk;

  event_packetizer #(.FIFO_DEPTH(16)) dut (.clk, .rst_n, .calib_mode(calib), .spk_valid, .spk,
    .smp_valid, .smp, .tx_data, .tx_avail, .tx_pop, .pkt_cnt, .drop_cnt);

  // reader: pops one byte every other cycle while draining and compares
  always @(negedge clk) begin
    tx_pop = 0;
    if (drain && tx_avail && !tx_pop) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected byte %h", tx_data);
      end else begin
        logic [7:0] e;
        e = exp_q.pop_front();
        if (tx_data != e) begin failures++; $display("FAIL byte %h expected %h", tx_data, e); end
      end
      tx_pop = 1;
    end
  end

  task automatic offer(input bit keep, input int ch, input int ts, input int d);
    @(negedge clk);
    spk_valid = 1; spk.ch = 8'(ch); spk.ts = TS_W'(ts); spk.amp = 16'(d);
    smp_valid = 1; smp.ch = 8'(ch ^ 1); smp.ts = TS_W'(ts + 1); smp.data = 16'(d + 1);
    if (keep) begin
      if (!calib) begin
        exp_q.push_back(8'hE5); exp_q.push_back(8'(ch));
        exp_q.push_back(8'(ts >> 16)); exp_q.push_back(8'(ts >> 8)); exp_q.push_back(8'(ts));
      end else begin
        exp_q.push_back(8'hCA); exp_q.push_back(8'(ch ^ 1)); exp_q.push_back(8'(ts + 1));
        exp_q.push_back(8'((d + 1) >> 8)); exp_q.push_back(8'(d + 1));
      end
    end
    @(negedge clk);
    spk_valid = 0; smp_valid = 0;
    repeat (10) @(negedge clk);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spk = '0; smp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1.
    drain = 1;
    for (int k = 0; k < 50; k++) offer(1, $urandom_range(0, 31), $urandom, $urandom);
    repeat (40) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || drop_cnt != 0 || pkt_cnt != 50) begin
      failures++; $display("FAIL phase 1: left %0d drops %0d pkts %0d", exp_q.size(), drop_cnt, pkt_cnt);
    end
    // 2.
    drain = 0;
    for (int k = 0; k < 10; k++) offer(k < 3, k, 1000 + k, k);
    checks++;
    if (drop_cnt != 7 || pkt_cnt != 53) begin
      failures++; $display("FAIL overflow: drops %0d pkts %0d", drop_cnt, pkt_cnt);
    end
    drain = 1;
    repeat (60) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL phase 2 left %0d", exp_q.size()); end
    // 3.
    calib = 1;
    for (int k = 0; k < 20; k++) offer(1, $urandom_range(0, 31), $urandom, $urandom);
    repeat (40) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || pkt_cnt != 73) begin
      failures++; $display("FAIL phase 3: left %0d pkts %0d", exp_q.size(), pkt_cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_adc_sequencer: checks the ADC command schedule against the RHD2132 model.
//
// A random enable pattern is applied each round.  Checked:
//   - start-up: CALIBRATE then nine filler commands, before the first round;
//   - a round lasts exactly (32 + AUX) * SLOT_CYCLES cycles;
//   - the number of CONVERTs in a round equals the number of enabled
//     electrodes, and only enabled electrodes are converted;
//   - every reply comes out tagged with the right electrode and round, with the
//     model's code converted to two's complement, and all replies of a round
//     come out before that round ends.
module tb_adc_sequencer;
  import hs_pkg::*;

  localparam int AUX = 2, SLOT = 40;
  localparam int NT  = (NUM_CH + AUX) * SLOT;

  logic clk = 0, rst_n = 0;
  logic [NUM_CH-1:0] en;
  logic [TS_W-1:0]   ridx;
  logic round_end, running, smp_valid;
  sample_t smp;
  logic cs_n, sclk, mosi, miso;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  adc_sequencer #(.AUX(AUX), .SLOT_CYCLES(SLOT), .HALF(1), .STARTUP(10)) dut (
    .clk, .rst_n, .sample_en(en), .round_idx(ridx), .round_end, .running,
    .smp_valid, .smp, .spi_cs_n(cs_n), .spi_sclk(sclk),
    .spi_mosi(mosi), .spi_miso(miso));

  rhd2132_model #(.SPIKE_MASK(32'hFFFF_FFFF)) adc (.cs_n, .sclk, .mosi, .miso);

  typedef struct { int ch; int ts; logic [15:0] code; } exp_t;
  exp_t q [$];
  int conv_in_round;
  logic [15:0] cmds [$];

  always @(adc.conv_ev) begin
    exp_t e;
    e.ch = adc.last_ch; e.ts = int'(ridx); e.code = adc.last_code;
    q.push_back(e);
    conv_in_round++;
    checks++;
    if (!en[adc.last_ch]) begin
      failures++; $display("FAIL converted disabled ch %0d", adc.last_ch);
    end
  end

  always @(adc.ncmd) if (rst_n && cmds.size() < 12) cmds.push_back(adc.last_cmd);

  always @(posedge clk) if (rst_n && smp_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin
      failures++; $display("FAIL unexpected sample ch %0d", smp.ch);
    end else begin
      e = q.pop_front();
      if (int'(smp.ch) != e.ch || int'(smp.ts) != e.ts ||
          smp.data != $signed({~e.code[15], e.code[14:0]})) begin
        failures++;
        $display("FAIL sample ch %0d ts %0d data %0d, expected ch %0d ts %0d code %h",
                 smp.ch, smp.ts, smp.data, e.ch, e.ts, e.code);
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_prev, nen, rounds;
    en = '1; ridx = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(posedge running);
    // start-up sequence
    checks++;
    if (cmds.size() < 10 || cmds[0] != 16'h5500) begin
      failures++; $display("FAIL no CALIBRATE first: %0d cmds, first %h", cmds.size(), cmds[0]);
    end
    for (int i = 1; i < 10 && i < cmds.size(); i++) begin
      checks++;
      if (cmds[i][15:14] != 2'b11) begin failures++; $display("FAIL start-up filler %0d = %h", i, cmds[i]); end
    end
    conv_in_round = 0;
    t_prev = -1;
    rounds = 0;
    nen = NUM_CH;
    while (rounds < 40) begin
      @(posedge clk);
      if (round_end) begin
        int t;
        t = int'($time / 10);
        if (t_prev >= 0) begin
          checks++;
          if (t - t_prev != NT) begin failures++; $display("FAIL round length %0d", t - t_prev); end
        end
        t_prev = t;
        #1;
        checks++;
        if (conv_in_round != nen) begin
          failures++; $display("FAIL round %0d: %0d conversions, %0d enabled", ridx, conv_in_round, nen);
        end
        checks++;
        if (q.size() != 0) begin failures++; $display("FAIL %0d replies still pending at round end", q.size()); end
        // next round: new pattern and round number
        @(negedge clk);
        en = NUM_CH'({$urandom, $urandom} & {$urandom, $urandom});
        if (rounds % 7 == 0) en = '0;
        if (rounds % 5 == 0) en = '1;
        nen = $countones(en);
        ridx = ridx + 1;
        conv_in_round = 0;
        rounds++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

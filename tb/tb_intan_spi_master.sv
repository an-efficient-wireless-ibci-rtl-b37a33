// tb_intan_spi_master: checks single SPI transactions against the RHD2132 model.
//
// Random 16-bit commands are sent back to back.  The model must receive each
// command intact with exactly 16 clocks, the reply of transaction k must be
// the model's answer to command k-2, and each transaction must take
// 1 + 33*HALF cycles from start to done.  Run with HALF = 1 and HALF = 3.
module tb_intan_spi_master;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic        start  [2];
  logic [15:0] cmd    [2];
  logic        busy   [2];
  logic        done   [2];
  logic [15:0] rx     [2];
  logic        cs_n   [2];
  logic        sclk   [2];
  logic        mosi   [2];
  logic        miso   [2];

  intan_spi_master #(.HALF(1)) dut1 (.clk, .rst_n, .start(start[0]), .cmd(cmd[0]),
    .busy(busy[0]), .done(done[0]), .rx(rx[0]), .cs_n(cs_n[0]), .sclk(sclk[0]),
    .mosi(mosi[0]), .miso(miso[0]));
  intan_spi_master #(.HALF(3)) dut3 (.clk, .rst_n, .start(start[1]), .cmd(cmd[1]),
    .busy(busy[1]), .done(done[1]), .rx(rx[1]), .cs_n(cs_n[1]), .sclk(sclk[1]),
    .mosi(mosi[1]), .miso(miso[1]));

  rhd2132_model m1 (.cs_n(cs_n[0]), .sclk(sclk[0]), .mosi(mosi[0]), .miso(miso[0]));
  rhd2132_model m3 (.cs_n(cs_n[1]), .sclk(sclk[1]), .mosi(mosi[1]), .miso(miso[1]));

  // expected reply of the model, computed from its documented behaviour
  function automatic logic [15:0] expect_reply(logic [15:0] c, logic [15:0] code);
    if (c[15:14] == 2'b00) return code;
    if (c == 16'h5500)     return 16'h0000;
    return 16'h0001;
  endfunction

  task automatic run(input int u, input int half);
    logic [15:0] hist [$];
    int t0, lat;
    for (int k = 0; k < 40; k++) begin
      logic [15:0] c;
      c = 16'($urandom);
      if (k % 3 == 0) c[15:14] = 2'b00;     // plenty of CONVERTs
      @(negedge clk);
      start[u] = 1; cmd[u] = c;
      t0 = $time;
      @(negedge clk);
      start[u] = 0;
      while (!done[u]) @(negedge clk);
      lat = int'(($time - t0) / 10);
      checks++;
      if (lat != 1 + 33 * half) begin
        failures++; $display("FAIL HALF=%0d latency %0d", half, lat);
      end
      // model saw the command
      checks++;
      if ((u == 0 ? m1.last_cmd : m3.last_cmd) != c) begin
        failures++; $display("FAIL HALF=%0d cmd %h seen %h", half, c, (u == 0 ? m1.last_cmd : m3.last_cmd));
      end
      hist.push_back(expect_reply(c, u == 0 ? m1.last_code : m3.last_code));
      if (k >= 2) begin
        checks++;
        if (rx[u] != hist[k-2]) begin
          failures++; $display("FAIL HALF=%0d k=%0d rx %h expected %h", half, k, rx[u], hist[k-2]);
        end
      end
    end
    checks++;
    if ((u == 0 ? m1.nerr : m3.nerr) != 0) begin
      failures++; $display("FAIL HALF=%0d framing errors", half);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start[0] = 0; start[1] = 0; cmd[0] = 0; cmd[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 1);
    run(1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

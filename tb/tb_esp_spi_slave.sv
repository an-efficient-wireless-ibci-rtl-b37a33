// tb_esp_spi_slave: checks the byte link to the radio module.
//
// The radio's SPI master model exchanges transfers of random length.  Every
// byte it sends must appear once on rx_valid/rx_byte, in order, and each
// transfer must end with one frame_end pulse.  The uplink side is fed from a
// FIFO that a writer here fills at random times: the bytes read back must be
// the FIFO contents in order with 00 filling in when it is empty, and no
// FIFO byte may be lost or repeated, including at transfer ends.
module tb_esp_spi_slave;
  logic clk = 0, rst_n = 0;
  logic sclk, cs_n, mosi, miso;
  logic rx_valid, frame_end, tx_pop, tx_avail, push = 0;
  logic [7:0] rx_byte, tx_data, wr_data;
  int checks = 0, failures = 0, frames = 0;
  logic [7:0] sent [$], fifo_ref [$];

  always #5 clk = ~clk;

  esp_spi_slave dut (.clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi),
    .spi_miso(miso), .rx_valid, .rx_byte, .frame_end, .tx_data, .tx_avail, .tx_pop);

  sync_fifo #(.W(8), .DEPTH(64)) ufifo (.clk, .rst_n, .push, .wr_data, .pop(tx_pop),
    .rd_data(tx_data), .empty(), .full(), .count());
  assign tx_avail = !ufifo.empty;

  esp_host_model host (.sclk, .cs_n, .mosi, .miso);

  always @(posedge clk) if (rst_n) begin
    if (rx_valid) begin
      checks++;
      if (sent.size() == 0 || rx_byte != sent[0]) begin
        failures++; $display("FAIL rx %h", rx_byte);
      end
      if (sent.size() != 0) void'(sent.pop_front());
    end
    if (frame_end) frames++;
  end

  // writer: non-zero bytes at random times, never overfilling
  initial begin
    wait (rst_n);
    forever begin
      @(negedge clk);
      push = 0;
      if ($urandom_range(0, 300) == 0 && ufifo.count < 60) begin
        push = 1;
        wr_data = 8'($urandom_range(1, 255));
        fifo_ref.push_back(wr_data);
      end
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [7:0] tx [$], rx [$];
      int n;
      n = $urandom_range(1, 12);
      tx = {};
      for (int i = 0; i < n; i++) tx.push_back(8'($urandom));
      foreach (tx[i]) sent.push_back(tx[i]);
      host.xfer(tx, rx);
      foreach (rx[i]) begin
        if (rx[i] != 8'h00) begin
          checks++;
          if (fifo_ref.size() == 0 || rx[i] != fifo_ref[0]) begin
            failures++; $display("FAIL uplink byte %h expected %h", rx[i], fifo_ref.size() ? fifo_ref[0] : 8'h00);
          end
          if (fifo_ref.size() != 0) void'(fifo_ref.pop_front());
        end
      end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d bytes not received", sent.size()); end
    checks++;
    if (frames != 60) begin failures++; $display("FAIL %0d frame ends", frames); end
    // every FIFO byte that left the FIFO was seen by the host
    checks++;
    if (fifo_ref.size() != ufifo.count) begin
      failures++; $display("FAIL %0d bytes popped but not seen", fifo_ref.size() - ufifo.count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

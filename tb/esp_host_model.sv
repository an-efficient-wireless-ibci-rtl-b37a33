// esp_host_model: behavioural model of the radio module's SPI master.
//
// Not synthesizable; for testbenches only.  The task xfer() pulls chip
// select low, exchanges the given bytes in SPI mode 0 (MSB first, SCLK half
// period HALF_NS) and returns the bytes read on MISO.  Chip select has
// HALF_NS of set-up and hold around the clocks.
module esp_host_model #(
  parameter int HALF_NS = 100
) (
  output logic sclk,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);

  initial begin
    sclk = 0;
    cs_n = 1;
    mosi = 0;
  end

  task automatic xfer(input logic [7:0] tx [$], output logic [7:0] rx [$]);
    rx = {};
    cs_n = 0;
    #(HALF_NS);
    foreach (tx[i]) begin
      logic [7:0] b;
      for (int k = 7; k >= 0; k--) begin
        mosi = tx[i][k];
        #(HALF_NS);
        sclk = 1;
        b[k] = miso;
        #(HALF_NS);
        sclk = 0;
      end
      rx.push_back(b);
    end
    #(HALF_NS);
    cs_n = 1;
    #(2 * HALF_NS);
  endtask

endmodule

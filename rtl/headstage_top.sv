// headstage_top: FPGA controller of the adaptive-sample-rate neural headstage.
//
// The controller sits between a 32-channel RHD2132 recording front end and an
// ESP32-S3 radio module.  It runs the ADC command schedule so that electrode i
// is converted only once every x_d,i rounds (rate_scheduler, adc_sequencer),
// band-pass filters and noise-normalises each acquired sample
// (bandpass_filter, noise_whitener), detects threshold crossings against the
// electrode's own threshold th_i (spike_detector) and sends only the spike
// events to the radio (event_packetizer, esp_spi_slave).  The radio also
// delivers the server's configuration frames, which config_receiver commits
// at a round boundary; it can also switch the uplink to calibration mode, in
// which the pre-processed samples are sent instead of events.
//
//   RHD2132 --SPI--> adc_sequencer --> bandpass_filter --> noise_whitener
//                        ^                                      |       \
//                 rate_scheduler                        spike_detector   | (calibration)
//                        ^                                      v       /
//                 config_receiver <-- esp_spi_slave <--> event_packetizer
//
// This partition follows the published headstage (schedule execution,
// filtering, whitening, thresholding, spike-only uplink, server-set
// configuration); the insides of every block except the rate scheduler are
// this design's own.
//
// Timing: one round lasts (32 + AUX) * SLOT_CYCLES clock cycles; with the
// defaults (46-cycle slots, 2 filler slots) that is 1564 cycles, so with a
// 48 MHz clock (SCLK 24 MHz) every electrode runs at up to 30.7 kS/s.  A sample reaches the
// packet FIFO about 3 + 16*2*HALF + 30 cycles after its reply is clocked in.
module headstage_top
  import hs_pkg::*;
#(
  parameter int unsigned AUX         = 2,
  parameter int unsigned SLOT_CYCLES = 46,
  parameter int unsigned HALF        = 1,
  parameter int unsigned STARTUP     = 10,
  parameter int unsigned KF          = 1,
  parameter int unsigned KS          = 5,
  parameter int unsigned KN          = 10,
  parameter int unsigned NOISE_INIT  = 320,
  parameter int signed   TH_DEFAULT  = -1024,
  parameter int unsigned FIFO_DEPTH  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // RHD2132 SPI (FPGA is master)
  output logic        adc_cs_n,
  output logic        adc_sclk,
  output logic        adc_mosi,
  input  logic        adc_miso,
  // ESP32-S3 SPI (FPGA is slave)
  input  logic        esp_sclk,
  input  logic        esp_cs_n,
  input  logic        esp_mosi,
  output logic        esp_miso,
  output logic        esp_data_rdy,
  // status
  output logic        running,
  output logic        calib_mode,
  output logic [15:0] cfg_cnt,
  output logic [15:0] err_cnt,
  output logic [15:0] pkt_cnt,
  output logic [15:0] drop_cnt
);

  logic [NUM_CH-1:0][DS_W-1:0] ds_factor;
  th_t  [NUM_CH-1:0]           th;
  logic [NUM_CH-1:0]           sample_en;
  logic [TS_W-1:0]             round_idx;
  logic                        round_end, commit;

  logic    raw_valid, bp_valid, wh_valid, wh_ready, spk_valid;
  sample_t raw_smp, bp_smp, wh_smp;
  spike_t  spk;

  logic       rx_valid, frame_end, tx_avail, tx_pop;
  logic [7:0] rx_byte, tx_data;

  rate_scheduler u_sched (
    .clk        (clk),
    .rst_n      (rst_n),
    .restart    (commit),
    .round_tick (round_end),
    .ds_factor  (ds_factor),
    .sample_en  (sample_en),
    .round_idx  (round_idx)
  );

  adc_sequencer #(
    .AUX(AUX), .SLOT_CYCLES(SLOT_CYCLES), .HALF(HALF), .STARTUP(STARTUP)
  ) u_seq (
    .clk        (clk),
    .rst_n      (rst_n),
    .sample_en  (sample_en),
    .round_idx  (round_idx),
    .round_end  (round_end),
    .running    (running),
    .smp_valid  (raw_valid),
    .smp        (raw_smp),
    .spi_cs_n   (adc_cs_n),
    .spi_sclk   (adc_sclk),
    .spi_mosi   (adc_mosi),
    .spi_miso   (adc_miso)
  );

  bandpass_filter #(.KF(KF), .KS(KS)) u_bpf (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (raw_valid),
    .in        (raw_smp),
    .out_valid (bp_valid),
    .out       (bp_smp)
  );

  noise_whitener #(.KN(KN), .NOISE_INIT(NOISE_INIT)) u_wht (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (bp_valid),
    .in_ready  (wh_ready),
    .in        (bp_smp),
    .out_valid (wh_valid),
    .out       (wh_smp)
  );

  spike_detector u_det (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (wh_valid),
    .in        (wh_smp),
    .th        (th),
    .spk_valid (spk_valid),
    .spk       (spk)
  );

  event_packetizer #(.FIFO_DEPTH(FIFO_DEPTH)) u_pkt (
    .clk        (clk),
    .rst_n      (rst_n),
    .calib_mode (calib_mode),
    .spk_valid  (spk_valid),
    .spk        (spk),
    .smp_valid  (wh_valid),
    .smp        (wh_smp),
    .tx_data    (tx_data),
    .tx_avail   (tx_avail),
    .tx_pop     (tx_pop),
    .pkt_cnt    (pkt_cnt),
    .drop_cnt   (drop_cnt)
  );

  esp_spi_slave u_esp (
    .clk       (clk),
    .rst_n     (rst_n),
    .spi_sclk  (esp_sclk),
    .spi_cs_n  (esp_cs_n),
    .spi_mosi  (esp_mosi),
    .spi_miso  (esp_miso),
    .rx_valid  (rx_valid),
    .rx_byte   (rx_byte),
    .frame_end (frame_end),
    .tx_data   (tx_data),
    .tx_avail  (tx_avail),
    .tx_pop    (tx_pop)
  );

  config_receiver #(.TH_DEFAULT(TH_DEFAULT)) u_cfg (
    .clk        (clk),
    .rst_n      (rst_n),
    .rx_valid   (rx_valid),
    .rx_byte    (rx_byte),
    .frame_end  (frame_end),
    .round_end  (round_end),
    .commit     (commit),
    .ds_factor  (ds_factor),
    .th         (th),
    .calib_mode (calib_mode),
    .cfg_cnt    (cfg_cnt),
    .err_cnt    (err_cnt)
  );

  assign esp_data_rdy = tx_avail;

  // The whitener must be free whenever the filter hands it a sample; slots
  // are long enough for that by construction.
  a_whitener_ready: assert property (@(posedge clk) disable iff (!rst_n) bp_valid |-> wh_ready);

endmodule

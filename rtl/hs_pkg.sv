// hs_pkg: constants and types shared by the headstage controller.
//
// The headstage samples NUM_CH electrodes through an Intan RHD2132 front end.
// Each electrode i carries a configuration pair: an integer down-sampling
// factor x_d,i (the electrode is converted once every x_d,i scheduling rounds)
// and a spike-detection threshold th_i.  Both come from the server over the
// wireless downlink.  The 32-channel count follows the RHD2132 used in the
// prototype; every width below is this design's own choice.
package hs_pkg;

  // Electrodes served by one RHD2132.
  localparam int unsigned NUM_CH  = 32;
  localparam int unsigned CH_W    = $clog2(NUM_CH);

  // Down-sampling factor field: factors 1 .. 2**DS_W-1 are supported.
  localparam int unsigned DS_W    = 4;

  // Threshold and whitened samples are signed Q8.8 numbers in units of the
  // electrode's mean absolute noise level.
  localparam int unsigned TH_W    = 16;
  localparam int unsigned WFRAC   = 8;

  // Time stamp: index of the scheduling round in which a sample was taken.
  localparam int unsigned TS_W    = 24;

  typedef logic [DS_W-1:0]         ds_t;
  typedef logic signed [TH_W-1:0]  th_t;

  // One processed sample travelling down the pipeline.
  typedef struct packed {
    logic [7:0]              ch;
    logic [TS_W-1:0]         ts;
    logic signed [15:0]      data;
  } sample_t;

  // A detected threshold crossing.
  typedef struct packed {
    logic [7:0]              ch;
    logic [TS_W-1:0]         ts;
    logic signed [15:0]      amp;
  } spike_t;

  // RHD2132 command words (MSB first, 16 bits).
  //   CONVERT(C)  = 00 C[5:0] 0000000 H     (H = fast-settle, kept 0)
  //   CALIBRATE   = 0101 0101 0000 0000
  //   READ(R)     = 11 R[5:0] 0000 0000
  function automatic logic [15:0] cmd_convert(input logic [5:0] c);
    return {2'b00, c, 8'h00};
  endfunction

  localparam logic [15:0] CMD_CALIBRATE = 16'h5500;
  // READ(63): returns the chip ID; used as a harmless filler command.
  localparam logic [15:0] CMD_DUMMY     = 16'hFF00;

  // Uplink packet framing (bytes).
  localparam logic [7:0] PKT_SPIKE  = 8'hE5;  // E5 ch ts[23:16] ts[15:8] ts[7:0]
  localparam logic [7:0] PKT_RAW    = 8'hCA;  // CA ch ts[7:0] d[15:8] d[7:0]
  localparam int unsigned PKT_LEN   = 5;

  // Downlink frame framing.
  localparam logic [7:0] DL_SYNC    = 8'hA5;
  localparam logic [7:0] OP_CONFIG  = 8'h01;  // NUM_CH x {x_d, th[15:8], th[7:0]}, checksum
  localparam logic [7:0] OP_MODE    = 8'h02;  // {7'b0, calibration}, checksum

endpackage

// adc_sequencer: the periodic ADC command schedule.
//
// The ADC interface repeats a round of SLOTS = N_CH + AUX command slots, each
// SLOT_CYCLES clock cycles long, so a round lasts N_t = SLOTS*SLOT_CYCLES
// cycles and holds N_s = N_CH sampling slots.  Slot k < N_CH belongs to
// electrode k: if the rate scheduler enables electrode k in this round a
// CONVERT(k) command is sent, otherwise the slot stays silent (chip select
// high, no conversion) - the skipped sampling opportunity of the published
// scheme.  A channel converted every round runs at f_clk/N_t; a channel with
// factor x at f_clk/(N_t*x).
//
// The RHD2132 returns the result of a command two transactions later.  The
// sequencer therefore keeps the tags (electrode, round) of the last three
// commands and labels each reply with the tag of the command two before it.
// The AUX slots at the end of every round carry filler READ commands so the
// last conversions of a round are returned within that round.  After reset a
// CALIBRATE command and nine filler commands are sent once (the front end's
// ADC self-calibration) before round 0 begins.  Slot lengths, the AUX count
// and the start-up sequence are this design's choices.
//
// Interface and timing:
//   sample_en/round_idx  from rate_scheduler, read in the first cycle of a slot
//   round_end            one-cycle pulse in the last cycle of every round; a
//                        new configuration may be committed then
//   smp_valid/smp        one-cycle pulse with (electrode, round, signed value);
//                        the RHD2132 offset-binary code is converted to two's
//                        complement by inverting its MSB
module adc_sequencer
  import hs_pkg::*;
#(
  parameter int unsigned N_CH        = NUM_CH,
  parameter int unsigned AUX         = 2,
  parameter int unsigned SLOT_CYCLES = 46,
  parameter int unsigned HALF        = 1,
  parameter int unsigned STARTUP     = 10   // CALIBRATE + 9 fillers; 0 skips it
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_CH-1:0]      sample_en,
  input  logic [TS_W-1:0]      round_idx,
  output logic                 round_end,
  output logic                 running,
  output logic                 smp_valid,
  output sample_t              smp,
  // SPI pins to the RHD2132
  output logic                 spi_cs_n,
  output logic                 spi_sclk,
  output logic                 spi_mosi,
  input  logic                 spi_miso
);

  localparam int unsigned SLOTS = N_CH + AUX;
  localparam int unsigned SW    = $clog2(SLOTS + 1);
  localparam int unsigned CW    = $clog2(SLOT_CYCLES);
  localparam int unsigned UW    = $clog2(STARTUP + 1);

  typedef struct packed {
    logic            is_smp;
    logic [7:0]      ch;
    logic [TS_W-1:0] ts;
  } tag_t;

  logic [CW-1:0] cyc;
  logic [SW-1:0] slot;
  logic [UW-1:0] boot;          // start-up commands still to send
  logic          slot_first, slot_last;
  logic          start;
  logic [15:0]   cmd;
  tag_t          new_tag, h1, h2, h3;
  logic          busy, done;
  logic [15:0]   rx;

  assign slot_first = (cyc == '0);
  assign slot_last  = (cyc == CW'(SLOT_CYCLES - 1));
  assign running    = (boot == '0);
  assign round_end  = running && slot_last && (slot == SW'(SLOTS - 1));

  // Command chosen at the first cycle of each slot.
  always_comb begin
    start   = 1'b0;
    cmd     = CMD_DUMMY;
    new_tag = '0;
    if (slot_first) begin
      if (!running) begin
        start = 1'b1;
        cmd   = (boot == UW'(STARTUP)) ? CMD_CALIBRATE : CMD_DUMMY;
      end else if (slot < SW'(N_CH)) begin
        if (sample_en[slot[CH_W-1:0]]) begin
          start          = 1'b1;
          cmd            = cmd_convert(6'(slot));
          new_tag.is_smp = 1'b1;
          new_tag.ch     = 8'(slot);
          new_tag.ts     = round_idx;
        end
      end else begin
        start = 1'b1;
        cmd   = CMD_DUMMY;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc  <= '0;
      slot <= '0;
      boot <= UW'(STARTUP);
      h1   <= '0;
      h2   <= '0;
      h3   <= '0;
    end else begin
      cyc <= slot_last ? '0 : cyc + 1'b1;
      if (slot_last) begin
        if (!running)
          boot <= boot - 1'b1;
        else
          slot <= (slot == SW'(SLOTS - 1)) ? '0 : slot + 1'b1;
      end
      if (start) begin
        h1 <= new_tag;
        h2 <= h1;
        h3 <= h2;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      smp_valid <= 1'b0;
      smp       <= '0;
    end else begin
      smp_valid <= done && h3.is_smp;
      if (done) begin
        smp.ch   <= h3.ch;
        smp.ts   <= h3.ts;
        smp.data <= {~rx[15], rx[14:0]};
      end
    end
  end

  intan_spi_master #(.HALF(HALF)) u_spi (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start),
    .cmd   (cmd),
    .busy  (busy),
    .done  (done),
    .rx    (rx),
    .cs_n  (spi_cs_n),
    .sclk  (spi_sclk),
    .mosi  (spi_mosi),
    .miso  (spi_miso)
  );

  // Every slot must hold a whole transaction.
  initial assert (SLOT_CYCLES >= 2 + 33 * HALF)
    else $fatal(1, "adc_sequencer: SLOT_CYCLES too short for one SPI transaction");

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule

// rate_scheduler: per-electrode sampling decision for each scheduling round.
//
// The ADC command schedule repeats in rounds.  Electrode i has an integer
// down-sampling factor x_d,i and is converted only in rounds r with
// r mod x_d,i == 0; in every other round its conversion slot is skipped, so
// its realised rate is R_max / x_d,i.  This rule and the use of one modulo
// counter per electrode are the published scheme.  Instead of dividing the
// round number, each electrode keeps phase_i = r mod x_d,i and advances it by
// one per round, wrapping at x_d,i.
//
// Interface and timing:
//   restart     one-cycle pulse: the round counter and all phases return to 0,
//               so the round that follows is round 0 and every electrode is
//               sampled in it.  Used when a new configuration is committed.
//   round_tick  one-cycle pulse at each round boundary; advances r.
//   ds_factor   per-electrode factor; 0 is treated as 1 (this design's choice).
//   sample_en   bit i is high for the whole of a round in which electrode i is
//               to be converted.  It changes one cycle after round_tick.
//   round_idx   r, the current round number (also used as a time stamp).
module rate_scheduler
  import hs_pkg::*;
#(
  parameter int unsigned N_CH = NUM_CH,
  parameter int unsigned DSW  = DS_W,
  parameter int unsigned TSW  = TS_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      restart,
  input  logic                      round_tick,
  input  logic [N_CH-1:0][DSW-1:0]  ds_factor,
  output logic [N_CH-1:0]           sample_en,
  output logic [TSW-1:0]            round_idx
);

  logic [N_CH-1:0][DSW-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      round_idx <= '0;
    end else if (restart) begin
      phase     <= '0;
      round_idx <= '0;
    end else if (round_tick) begin
      round_idx <= round_idx + 1'b1;
      for (int i = 0; i < N_CH; i++) begin
        // Wrap when the next phase would reach the factor (x = 0 or 1: always 0).
        if ({1'b0, phase[i]} + 1'b1 >= {1'b0, ds_factor[i]})
          phase[i] <= '0;
        else
          phase[i] <= phase[i] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N_CH; i++)
      sample_en[i] = (phase[i] == '0);
  end

endmodule

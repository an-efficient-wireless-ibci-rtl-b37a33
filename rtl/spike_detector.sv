// spike_detector: per-electrode threshold-crossing detector.
//
// Each electrode i has its own threshold th_i, chosen by the server together
// with the electrode's sample rate.  Spikes are negative-going, so a sample
// below th_i counts as "over threshold".  An event is reported on the first
// over-threshold sample after one that was not (the downward crossing); the
// following over-threshold samples of the same spike do not repeat it, so a
// spike gives one event however many samples it spans.  A per-electrode
// threshold comes from the paper; the crossing rule (one event per excursion,
// no extra dead time) is this design's choice.
//
// Interface and timing: in_valid/in carry a whitened sample (Q8.8); th[i] is
// a signed Q8.8 threshold.  spk_valid/spk follow one cycle later with the
// electrode, the round time stamp and the sample value.
module spike_detector
  import hs_pkg::*;
#(
  parameter int unsigned N_CH = NUM_CH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  sample_t               in,
  input  th_t [N_CH-1:0]        th,
  output logic                  spk_valid,
  output spike_t                spk
);

  localparam int unsigned CI = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic [N_CH-1:0] below_q;
  logic [CI-1:0]   idx;
  logic            below;

  assign idx   = in.ch[CI-1:0];
  assign below = (in.data < th[idx]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      below_q   <= '0;
      spk_valid <= 1'b0;
      spk       <= '0;
    end else begin
      spk_valid <= in_valid && below && !below_q[idx];
      if (in_valid) begin
        below_q[idx] <= below;
        spk.ch  <= in.ch;
        spk.ts  <= in.ts;
        spk.amp <= in.data;
      end
    end
  end

endmodule

// bandpass_filter: per-electrode band-pass filter on the multiplexed stream.
//
// Samples of all electrodes arrive interleaved, one at a time, tagged with
// their electrode number.  For every electrode the block keeps two
// first-order exponential averages of the input: a fast one (weight 2^-KF)
// and a slow one (weight 2^-KS).  The output is fast minus slow: the fast
// average removes the top of the band, subtracting the slow one removes the
// bottom, which gives a band-pass built from shifts and adds only.  The state
// carries FR fraction bits.  The published headstage band-pass filters its
// samples on chip but does not describe the filter; this structure and the
// default shifts are this design's own choice.  With KF = 1 and KS = 5 the
// pass band at 30 kS/s runs from roughly 150 Hz to a few kHz.  Because each
// electrode's filter advances once per acquired sample, the band scales with
// that electrode's own sample rate.
//
// Interface and timing: in_valid/in carry one sample; out_valid/out follow
// one cycle later with the same electrode and time stamp.  The output is
// saturated to 16 bits.  One sample may enter every cycle.
module bandpass_filter
  import hs_pkg::*;
#(
  parameter int unsigned N_CH = NUM_CH,
  parameter int unsigned KF   = 1,
  parameter int unsigned KS   = 5,
  parameter int unsigned FR   = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t in,
  output logic    out_valid,
  output sample_t out
);

  localparam int unsigned SW = 16 + FR + 2;   // state width with head room
  localparam int unsigned CI = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic signed [SW-1:0] fast_q [N_CH];
  logic signed [SW-1:0] slow_q [N_CH];

  logic [CI-1:0]        idx;
  logic signed [SW-1:0] xs, fast_n, slow_n, diff;
  logic signed [15:0]   y;

  assign idx = in.ch[CI-1:0];

  always_comb begin
    xs     = SW'(in.data) <<< FR;
    fast_n = fast_q[idx] + ((xs - fast_q[idx]) >>> KF);
    slow_n = slow_q[idx] + ((xs - slow_q[idx]) >>> KS);
    diff   = (fast_n - slow_n) >>> FR;
    if (diff > SW'(32767))       y = 16'sh7FFF;
    else if (diff < -SW'(32768)) y = -16'sh8000;
    else                         y = 16'(diff);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) begin
        fast_q[i] <= '0;
        slow_q[i] <= '0;
      end
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        fast_q[idx] <= fast_n;
        slow_q[idx] <= slow_n;
        out.ch      <= in.ch;
        out.ts      <= in.ts;
        out.data    <= y;
      end
    end
  end

endmodule

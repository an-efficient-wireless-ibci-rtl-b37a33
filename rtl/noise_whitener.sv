// noise_whitener: per-electrode noise normalisation ("whitening").
//
// The published pipeline whitens the filtered samples before thresholding,
// so that one threshold scale applies to every electrode; it does not say how.
// This block takes the simplest per-electrode form: it tracks each
// electrode's mean absolute value m_i with an exponential average (weight
// 2^-KN, 4 fraction bits) and divides each sample by it.  The output is the
// sample in units of m_i as a signed Q8.8 number, saturated to 16 bits, which
// is the unit of the per-electrode threshold th_i.  Spatial (cross-electrode)
// whitening is not done.  The divide uses the noise estimate held before the
// current sample, then the estimate is updated with that sample.
//
// The divide is a restoring divider producing one quotient bit per cycle,
// so a sample takes NW = 16 + WFRAC + 4 - 1 = 27 cycles plus one to load
// (in_ready is low meanwhile).  In the headstage a new sample arrives at most
// once per ADC slot, which is longer than that.
//
// Interface and timing: in_valid && in_ready accepts a sample; out_valid
// pulses LAT = NW + 1 cycles later with the same electrode and time stamp.
module noise_whitener
  import hs_pkg::*;
#(
  parameter int unsigned N_CH       = NUM_CH,
  parameter int unsigned KN         = 10,
  parameter int unsigned NOISE_INIT = 320   // initial m_i, Q.4 (20 ADC codes)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  sample_t in,
  output logic    out_valid,
  output sample_t out
);

  localparam int unsigned MW = 20;                  // m_i: Q16.4
  localparam int unsigned NW = 15 + WFRAC + 4;      // |x| (15 bits) << (WFRAC+4)
  localparam int unsigned CI = (N_CH > 1) ? $clog2(N_CH) : 1;
  localparam int unsigned KW = $clog2(NW + 1);

  logic [MW-1:0] noise_q [N_CH];

  logic [CI-1:0]  idx;
  logic [15:0]    mag;
  logic [MW-1:0]  m_old, m_new;
  logic signed [MW+1:0] m_diff;

  // Divider state
  logic          busy;
  logic [KW-1:0] k;
  logic [NW-1:0] num;
  logic [NW-1:0] quo;
  logic [MW:0]   rem;
  logic [MW-1:0] den;
  logic          neg;
  logic [7:0]    ch_q;
  logic [TS_W-1:0] ts_q;
  logic [MW:0]   rem_sh;

  assign idx      = in.ch[CI-1:0];
  assign mag      = in.data[15] ? 16'(-in.data) : 16'(in.data);
  assign m_old    = noise_q[idx];
  assign m_diff   = $signed({2'b00, mag, 4'b0}) - $signed({2'b00, m_old});
  assign m_new    = MW'($signed({2'b00, m_old}) + (m_diff >>> KN));
  assign in_ready = !busy;
  assign rem_sh   = {rem[MW-1:0], num[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) noise_q[i] <= MW'(NOISE_INIT);
      busy      <= 1'b0;
      k         <= '0;
      num       <= '0;
      quo       <= '0;
      rem       <= '0;
      den       <= '0;
      neg       <= 1'b0;
      ch_q      <= '0;
      ts_q      <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          noise_q[idx] <= m_new;
          busy <= 1'b1;
          k    <= KW'(NW);
          // |x| saturated to 15 bits (only -32768 needs it)
          num  <= NW'(mag[15] ? 16'h7FFF : mag) << (WFRAC + 4);
          den  <= (m_old == '0) ? MW'(1) : m_old;
          rem  <= '0;
          quo  <= '0;
          neg  <= in.data[15];
          ch_q <= in.ch;
          ts_q <= in.ts;
        end
      end else if (k != '0) begin
        // one restoring-division step
        if (rem_sh >= {1'b0, den}) begin
          rem <= rem_sh - {1'b0, den};
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          quo <= {quo[NW-2:0], 1'b0};
        end
        num <= {num[NW-2:0], 1'b0};
        k   <= k - 1'b1;
      end else begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        out.ch    <= ch_q;
        out.ts    <= ts_q;
        if (quo > NW'(32767))
          out.data <= neg ? -16'sd32767 : 16'sd32767;
        else
          out.data <= neg ? -$signed(16'(quo)) : $signed(16'(quo));
      end
    end
  end

  a_accept_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                        in_valid |-> in_ready)
    else $error("noise_whitener: sample offered while busy");

endmodule

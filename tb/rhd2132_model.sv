// rhd2132_model: behavioural model of the RHD2132 front end's SPI side.
//
// Not synthesizable; for testbenches only.  The model accepts 16-bit commands
// (SPI mode 0, MSB first) and answers each one two transactions later, as the
// real chip does.  CONVERT(c) answers with the offset-binary ADC code of the
// model's signal on channel c at the time of the command; CALIBRATE answers
// 0000 and every other command 0001.  The signal is a deterministic pseudo-
// random noise of about +-NOISE codes, plus, on channels whose bit is set in
// SPIKE_MASK, a negative spike waveform every SPIKE_PERIOD full-rate sample
// periods (T_SAMPLE_NS).  The spike has its trough at SPIKE_AMP codes, the
// other samples being fractions of it.  Because the signal is a function of
// time, a channel sampled less often may miss a narrow spike, as on the real
// chip.
//
// For checking, every completed CONVERT sets last_ch/last_code, increments
// conv_cnt[c] and triggers conv_ev.  ncmd counts commands, nerr counts
// transactions that did not have exactly 16 clocks.
module rhd2132_model #(
  parameter int          T_SAMPLE_NS  = 1000,
  parameter int          NOISE        = 20,
  parameter logic [31:0] SPIKE_MASK   = 32'h0000_0005,
  parameter int          SPIKE_PERIOD = 37,
  parameter int          SPIKE_AMP    = 400
) (
  input  logic cs_n,
  input  logic sclk,
  input  logic mosi,
  output logic miso
);

  logic [15:0] in_sr, out_sr;
  logic [15:0] reply_q [2];     // replies to the last two commands
  int          nbits;
  int          ncmd = 0;
  int          nerr = 0;
  int          conv_cnt [32];
  int          last_ch;
  logic [15:0] last_code;
  logic [15:0] last_cmd;
  event        conv_ev;

  initial begin
    reply_q[0] = '0;
    reply_q[1] = '0;
    out_sr     = '0;
    in_sr      = '0;
    nbits      = 0;
    foreach (conv_cnt[i]) conv_cnt[i] = 0;
  end

  assign miso = out_sr[15];

  function automatic int noise(int ch, longint t);
    int unsigned h;
    h = 32'(t) * 32'd2654435761 ^ (32'(ch) * 32'd40503) ^ 32'h9E37_79B9;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return int'(h % (2 * NOISE + 1)) - NOISE;
  endfunction

  // Spike shape in full-rate samples after onset: trough at offset 1.
  function automatic int spike(int ch, longint t);
    int ph;
    if (!SPIKE_MASK[ch]) return 0;
    ph = int'(t % longint'(SPIKE_PERIOD));
    case (ph)
      0: return -SPIKE_AMP / 4;
      1: return -SPIKE_AMP;
      2: return -SPIKE_AMP / 2;
      3: return  SPIKE_AMP / 8;
      default: return 0;
    endcase
  endfunction

  function automatic logic [15:0] code_of(int ch, longint t);
    int v;
    v = noise(ch, t) + spike(ch, t);
    return 16'(v + 32768);
  endfunction

  bit in_xfer = 1'b0;

  always @(negedge cs_n) begin
    in_xfer = 1'b1;
    nbits  = 0;
    out_sr = reply_q[1];
  end

  always @(posedge sclk) if (!cs_n) begin
    in_sr = {in_sr[14:0], mosi};
    nbits++;
  end

  always @(negedge sclk) if (!cs_n) out_sr = {out_sr[14:0], 1'b0};

  always @(posedge cs_n) if (in_xfer) begin
    logic [15:0] r;
    longint      t;
    in_xfer = 1'b0;
    if (nbits != 16) nerr++;
    ncmd++;
    last_cmd = in_sr;
    t = $time / longint'(T_SAMPLE_NS);
    if (in_sr[15:14] == 2'b00) begin
      r         = code_of(int'(in_sr[13:8]), t);
      last_ch   = int'(in_sr[13:8]);
      last_code = r;
      conv_cnt[in_sr[12:8]]++;
      -> conv_ev;
    end else if (in_sr == 16'h5500) begin
      r = 16'h0000;
    end else begin
      r = 16'h0001;
    end
    reply_q[1] = reply_q[0];
    reply_q[0] = r;
  end

endmodule

// config_receiver: downlink parser and holder of the per-electrode schedule.
//
// The server periodically sends the configuration vector {(x_d,i, th_i)}:
// each electrode's integer down-sampling factor and its detection threshold.
// Between updates, and whenever the link breaks, the headstage keeps running
// on the last configuration it received.  This block parses downlink bytes
// into a shadow copy and makes it active only when a whole frame has arrived
// with a correct checksum, and then only at the boundary between two
// scheduling rounds, so that a round is never run with a half-updated schedule.
//
// Frame formats (this design's own; bytes in the order sent):
//   A5 01 {x_d,0 th_0[15:8] th_0[7:0]} ... {x_d,N-1 ...} chk   configuration
//   A5 02 m chk                                          mode, m[0]=calibration
// chk is the XOR of every byte after A5.  A frame must lie within one
// chip-select period of the radio link: frame_end aborts a frame in progress.
// A new frame cancels a pending, not yet committed frame of the same kind,
// because the shadow copy it was held in is being overwritten.
// Factors of 0 are stored as 1 and factors above 2**DS_W-1 are clipped.
// Threshold th_i is a signed Q8.8 number (units of the electrode's mean
// absolute noise).  The server sends x_d,i, not s_i: it knows R_max and
// applies x_d,i = max{x : R_max/x >= s_i} itself.
//
// Interface and timing:
//   round_end   strobe from the ADC sequencer (last cycle of a round)
//   commit      combinational: high in the round_end cycle in which a pending
//               configuration becomes active; ds_factor/th change on the next
//               edge, and the rate scheduler restarts its round count.
//   calib_mode  changes at a round boundary too.
//   cfg_cnt / err_cnt  committed configurations / rejected frames.
module config_receiver
  import hs_pkg::*;
#(
  parameter int unsigned N_CH       = NUM_CH,
  parameter int signed   TH_DEFAULT = -1024      // -4.0 in Q8.8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     rx_valid,
  input  logic [7:0]               rx_byte,
  input  logic                     frame_end,
  input  logic                     round_end,
  output logic                     commit,
  output logic [N_CH-1:0][DS_W-1:0] ds_factor,
  output th_t  [N_CH-1:0]          th,
  output logic                     calib_mode,
  output logic [15:0]              cfg_cnt,
  output logic [15:0]              err_cnt
);

  localparam int unsigned CI = (N_CH > 1) ? $clog2(N_CH) : 1;

  typedef enum logic [2:0] {P_IDLE, P_OP, P_CFG, P_MODE, P_CHK} pstate_t;
  pstate_t state;

  logic [N_CH-1:0][DS_W-1:0] ds_sh;
  th_t  [N_CH-1:0]           th_sh;
  logic                      mode_sh;
  logic [7:0]                op_q, chk_q;
  logic [CI-1:0]             ch_q;
  logic [1:0]                fld_q;
  logic                      cfg_pending, mode_pending;
  logic [DS_W-1:0]           ds_clip;

  assign commit = round_end && cfg_pending;

  always_comb begin
    if (rx_byte == 8'd0)                    ds_clip = DS_W'(1);
    else if (rx_byte > 8'((1 << DS_W) - 1)) ds_clip = '1;
    else                                    ds_clip = DS_W'(rx_byte);
  end

  // Frame parser
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= P_IDLE;
      op_q         <= '0;
      chk_q        <= '0;
      ch_q         <= '0;
      fld_q        <= '0;
      ds_sh        <= '0;
      th_sh        <= '0;
      mode_sh      <= 1'b0;
      cfg_pending  <= 1'b0;
      mode_pending <= 1'b0;
      err_cnt      <= '0;
    end else begin
      if (commit) cfg_pending <= 1'b0;
      if (round_end) mode_pending <= 1'b0;
      if (frame_end) begin
        if (state != P_IDLE) err_cnt <= err_cnt + 1'b1;
        state <= P_IDLE;
      end else if (rx_valid) begin
        case (state)
          P_IDLE: if (rx_byte == DL_SYNC) state <= P_OP;
          P_OP: begin
            op_q  <= rx_byte;
            chk_q <= rx_byte;
            ch_q  <= '0;
            fld_q <= '0;
            if (rx_byte == OP_CONFIG) begin
              // the shadow copy is about to be overwritten: forget any
              // configuration still waiting for a round boundary
              state       <= P_CFG;
              cfg_pending <= 1'b0;
            end
            else if (rx_byte == OP_MODE) begin
              // likewise for a mode change still waiting
              state        <= P_MODE;
              mode_pending <= 1'b0;
            end
            else begin
              state   <= P_IDLE;
              err_cnt <= err_cnt + 1'b1;
            end
          end
          P_CFG: begin
            chk_q <= chk_q ^ rx_byte;
            case (fld_q)
              2'd0:    ds_sh[ch_q]       <= ds_clip;
              2'd1:    th_sh[ch_q][15:8] <= rx_byte;
              default: th_sh[ch_q][7:0]  <= rx_byte;
            endcase
            if (fld_q == 2'd2) begin
              fld_q <= '0;
              if (ch_q == CI'(N_CH - 1)) state <= P_CHK;
              else ch_q <= ch_q + 1'b1;
            end else begin
              fld_q <= fld_q + 1'b1;
            end
          end
          P_MODE: begin
            chk_q   <= chk_q ^ rx_byte;
            mode_sh <= rx_byte[0];
            state   <= P_CHK;
          end
          P_CHK: begin
            state <= P_IDLE;
            if (rx_byte == chk_q) begin
              if (op_q == OP_CONFIG) cfg_pending  <= 1'b1;
              else                   mode_pending <= 1'b1;
            end else begin
              err_cnt <= err_cnt + 1'b1;
            end
          end
          default: state <= P_IDLE;
        endcase
      end
    end
  end

  // Active configuration: changes only at a round boundary.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) begin
        ds_factor[i] <= DS_W'(1);
        th[i]        <= TH_W'(TH_DEFAULT);
      end
      calib_mode <= 1'b0;
      cfg_cnt    <= '0;
    end else begin
      if (commit) begin
        ds_factor <= ds_sh;
        th        <= th_sh;
        cfg_cnt   <= cfg_cnt + 1'b1;
      end
      if (round_end && mode_pending) calib_mode <= mode_sh;
    end
  end

endmodule

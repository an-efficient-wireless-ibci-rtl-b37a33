// event_packetizer: frames uplink packets into the byte FIFO read by the radio.
//
// In streaming mode only detected spike events leave the headstage, which is
// what keeps the radio's duty cycle low.  Each event becomes a 5-byte packet
//     E5  ch  ts[23:16]  ts[15:8]  ts[7:0]
// (ts = scheduling round of the sample).  In calibration mode the
// pre-processed samples themselves are sent so that the server can extract
// spike templates, one 5-byte packet per sample
//     CA  ch  ts[7:0]  d[15:8]  d[7:0].
// Packets are written byte by byte into a FIFO_DEPTH-byte FIFO whose head the
// radio link reads.  A packet is accepted only if the FIFO has room for all of
// it; otherwise, or if a packet arrives while the previous one is still being
// written, it is dropped whole and drop_cnt (saturating) counts it.  Spike-only
// uplink and the calibration upload follow the paper; the packet formats, the
// FIFO size and the drop policy are this design's own.
//
// Interface and timing: one packet is written in PKT_LEN cycles after its
// input pulse.  tx_data/tx_avail show the FIFO head; tx_pop removes it.
module event_packetizer
  import hs_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        calib_mode,
  input  logic        spk_valid,
  input  spike_t      spk,
  input  logic        smp_valid,
  input  sample_t     smp,
  output logic [7:0]  tx_data,
  output logic        tx_avail,
  input  logic        tx_pop,
  output logic [15:0] pkt_cnt,
  output logic [15:0] drop_cnt
);

  localparam int unsigned CNTW = $clog2(FIFO_DEPTH + 1);

  logic [PKT_LEN-1:0][7:0] pkt_q;      // byte 0 is sent first
  logic [2:0]              left_q;     // bytes of pkt_q still to write
  logic                    offer;
  logic [PKT_LEN-1:0][7:0] offer_pkt;
  logic                    room;
  logic                    fifo_empty, fifo_full;
  logic [CNTW-1:0]         fifo_count;

  always_comb begin
    offer     = 1'b0;
    offer_pkt = '0;
    if (calib_mode) begin
      offer     = smp_valid;
      offer_pkt = {smp.data[7:0], smp.data[15:8], smp.ts[7:0], smp.ch, PKT_RAW};
    end else begin
      offer     = spk_valid;
      offer_pkt = {spk.ts[7:0], spk.ts[15:8], spk.ts[23:16], spk.ch, PKT_SPIKE};
    end
  end

  assign room = (CNTW'(FIFO_DEPTH) - fifo_count) >= CNTW'(PKT_LEN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_q    <= '0;
      left_q   <= '0;
      pkt_cnt  <= '0;
      drop_cnt <= '0;
    end else begin
      if (left_q != '0) begin
        pkt_q  <= pkt_q >> 8;
        left_q <= left_q - 1'b1;
      end
      if (offer) begin
        if (left_q == '0 && room) begin
          pkt_q   <= offer_pkt;
          left_q  <= 3'(PKT_LEN);
          pkt_cnt <= pkt_cnt + 1'b1;
        end else if (drop_cnt != 16'hFFFF) begin
          drop_cnt <= drop_cnt + 1'b1;
        end
      end
    end
  end

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .push    (left_q != '0),
    .wr_data (pkt_q[0]),
    .pop     (tx_pop),
    .rd_data (tx_data),
    .empty   (fifo_empty),
    .full    (fifo_full),
    .count   (fifo_count)
  );

  assign tx_avail = !fifo_empty;

endmodule

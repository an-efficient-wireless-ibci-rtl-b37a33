// intan_spi_master: one 16-bit SPI transaction with the RHD2132 front end.
//
// The FPGA controls the RHD2132 over SPI, one 16-bit command per transaction
// and a 16-bit reply clocked back on MISO in the same transaction.  That the
// link is SPI comes from the prototype description; the framing below
// (mode 0, MSB first, chip select held low for exactly 16 clocks) follows the
// RHD2000-series interface and the clock divider is this design's choice.
//
// Interface and timing:
//   start/cmd    a one-cycle start pulse while idle latches cmd and pulls
//                cs_n low.  MOSI carries cmd[15] first.
//   sclk         low for HALF cycles, high for HALF cycles per bit; the
//                front end samples MOSI on the rising edge, and this block
//                samples MISO on the same rising edge (the slave changes
//                MISO after falling edges).
//   done/rx      one-cycle pulse HALF cycles after the 16th falling edge,
//                together with cs_n returning high and the 16-bit reply.
//                A transaction therefore takes 1 + 33*HALF cycles.
//   busy         high from the start pulse until done.
module intan_spi_master #(
  parameter int unsigned HALF = 1   // clk cycles per SCLK half period
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] cmd,
  output logic        busy,
  output logic        done,
  output logic [15:0] rx,
  // SPI pins
  output logic        cs_n,
  output logic        sclk,
  output logic        mosi,
  input  logic        miso
);

  typedef enum logic [1:0] {S_IDLE, S_LOW, S_HIGH, S_END} state_t;
  state_t state;

  localparam int unsigned DW = (HALF > 1) ? $clog2(HALF) : 1;
  logic [DW-1:0] div;
  logic [3:0]    bit_cnt;
  logic [15:0]   tx_sr, rx_sr;
  logic          half_done;

  assign half_done = (div == DW'(HALF - 1));
  assign busy      = (state != S_IDLE);
  assign mosi      = tx_sr[15];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      div     <= '0;
      bit_cnt <= '0;
      tx_sr   <= '0;
      rx_sr   <= '0;
      rx      <= '0;
      cs_n    <= 1'b1;
      sclk    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cs_n    <= 1'b0;
          tx_sr   <= cmd;
          bit_cnt <= '0;
          div     <= '0;
          state   <= S_LOW;
        end
        S_LOW: begin
          div <= half_done ? '0 : div + 1'b1;
          if (half_done) begin
            sclk  <= 1'b1;
            rx_sr <= {rx_sr[14:0], miso};
            state <= S_HIGH;
          end
        end
        S_HIGH: begin
          div <= half_done ? '0 : div + 1'b1;
          if (half_done) begin
            sclk <= 1'b0;
            if (bit_cnt == 4'd15) begin
              state <= S_END;
            end else begin
              bit_cnt <= bit_cnt + 1'b1;
              tx_sr   <= {tx_sr[14:0], 1'b0};
              state   <= S_LOW;
            end
          end
        end
        S_END: begin
          div <= half_done ? '0 : div + 1'b1;
          if (half_done) begin
            cs_n  <= 1'b1;
            done  <= 1'b1;
            rx    <= rx_sr;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A start request is only legal while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("intan_spi_master: start while busy");

endmodule

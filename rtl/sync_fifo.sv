// sync_fifo: single-clock first-in first-out buffer with a visible head.
//
// DEPTH entries of W bits held in a register array.  The oldest entry is
// always present on rd_data while empty is low (show-ahead), so a reader can
// look at it before deciding to pop.  A push when full and a pop when empty
// are ignored (and flagged by the assertions).  count gives the fill level.
//
// Interface and timing: push/pop act at the clock edge; push and pop in the
// same cycle are both performed.  DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               wr_data,
  input  logic                       pop,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule

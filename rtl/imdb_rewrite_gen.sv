// imdb_rewrite_gen: rewrite generator of one IMDB plane.
//
// What it does: when an aggressor's largest ZeroFlipCntr passes the threshold, the
// cells of the two wordlines next to it (rows row-1 and row+1, same column: the
// neighbours sharing its bitlines) have taken up to half of the WDE limitation in
// disturbing pulses. The generator sends one rewrite command per neighbour to the
// write queue of the media controller, which restores those cells before they
// flip. An aggressor on the first or last row has one neighbour only and gets one
// rewrite (boundary handling is this design's choice; the paper always speaks of
// two rewrites).
//
// How: a trigger loads up to two pending addresses; they leave one per accepted
// handshake on the output channel, lower row first.
//
// Interface and timing: trig_valid/trig_ready load the aggressor address (ready
// only when nothing is pending). rw_valid/rw_ready/rw_addr is a valid-ready channel;
// the first rewrite is offered the cycle after the trigger, the second the cycle
// after the first is accepted. rw_valid and rw_addr hold until accepted.
module imdb_rewrite_gen
  import imdb_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  trig_valid,
  output logic  trig_ready,
  input  addr_t trig_addr,
  output logic  rw_valid,
  input  logic  rw_ready,
  output addr_t rw_addr
);
  logic  pend_lo_q, pend_hi_q;
  addr_t base_q;

  assign trig_ready = !pend_lo_q && !pend_hi_q;
  assign rw_valid   = pend_lo_q || pend_hi_q;
  always_comb begin
    rw_addr     = base_q;
    rw_addr.row = pend_lo_q ? base_q.row - 1'b1 : base_q.row + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_lo_q <= 1'b0;
      pend_hi_q <= 1'b0;
      base_q    <= '0;
    end else if (trig_valid && trig_ready) begin
      base_q    <= trig_addr;
      pend_lo_q <= trig_addr.row != '0;
      pend_hi_q <= trig_addr.row != '1;
    end else if (rw_valid && rw_ready) begin
      if (pend_lo_q) pend_lo_q <= 1'b0;
      else           pend_hi_q <= 1'b0;
    end
  end

  // valid-ready rule: an offered rewrite stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rw_valid && !rw_ready |=> rw_valid && $stable(rw_addr));
endmodule

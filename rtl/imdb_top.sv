// imdb_top: the in-module disturbance barrier of a PCM module (four planes).
//
// What it does: sits between the media controller of a PCM module and its PCM
// devices. The module of the paper's main configuration has 2 ranks x 2 banks; one
// IMDB plane serves each of the four banks, so the banks are protected
// concurrently and never contend for a table. Each plane is a main table of 256
// aggressor addresses with AppLE victim selection (group size 8), an 8-entry barrier
// buffer, eight integrated counters, a rewrite generator and the IDLE/HIT/MISS
// control (see imdb_plane).
//
// How: a single command channel from the media controller carries a bank number;
// the command is steered to that bank's plane and cmd_ready is that plane's ready.
// Each plane has its own output channels towards the media (per-bank arrays), its
// own rewrite channel back to the media controller's write queue and its own read
// response, so no arbitration is needed here; scheduling across banks stays with
// the media controller. flush_req goes to all planes and flush_done is high when
// every barrier buffer has been written back.
//
// The per-bank split and the sizes (e256 b8 g8) follow the paper; the single
// bank-tagged command channel and the per-bank output arrays are this design's
// choice. Timing is that of imdb_plane.
module imdb_top
  import imdb_pkg::*;
#(
  parameter int unsigned BANKS         = NBANKS,
  parameter int unsigned MT_ENTRIES    = 256,
  parameter int unsigned BB_ENTRIES    = 8,
  parameter int unsigned GROUP_SIZE    = 8,
  parameter int unsigned INS_PROB_LOG2 = 7,
  parameter int unsigned THRESH        = THRESHOLD
) (
  input  logic       clk,
  input  logic       rst_n,
  // from the media controller
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  cmd_t       cmd,
  // to the media devices, per bank
  output logic       media_valid [BANKS],
  input  logic       media_ready [BANKS],
  output media_cmd_t media       [BANKS],
  // rewrites to the media controller's write queue, per bank
  output logic       rw_valid    [BANKS],
  input  logic       rw_ready    [BANKS],
  output addr_t      rw_addr     [BANKS],
  // reads served by the barrier buffers, per bank
  output logic       rsp_valid   [BANKS],
  output rd_rsp_t    rsp         [BANKS],
  // power-loss flush
  input  logic       flush_req,
  output logic       flush_done,
  // event pulses, per bank
  output plane_ev_t  ev          [BANKS]
);
  logic [BANKS-1:0] ready, done;

  for (genvar b = 0; b < BANKS; b++) begin : g_plane
    imdb_plane #(
      .MT_ENTRIES(MT_ENTRIES), .BB_ENTRIES(BB_ENTRIES), .GROUP_SIZE(GROUP_SIZE),
      .INS_PROB_LOG2(INS_PROB_LOG2), .THRESH(THRESH),
      .SEED(16'hACE1 + 16'(b) * 16'h1357)
    ) u_plane (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && 32'(cmd.bank) == b), .cmd_ready(ready[b]), .cmd,
      .media_valid(media_valid[b]), .media_ready(media_ready[b]), .media(media[b]),
      .rw_valid(rw_valid[b]), .rw_ready(rw_ready[b]), .rw_addr(rw_addr[b]),
      .rsp_valid(rsp_valid[b]), .rsp(rsp[b]),
      .flush_req, .flush_done(done[b]),
      .ev(ev[b])
    );
  end

  assign cmd_ready  = ready[cmd.bank];
  assign flush_done = &done;
endmodule

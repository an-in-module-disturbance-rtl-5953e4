// imdb_main_table: the main table of one IMDB plane.
//
// What it does: holds up to ENTRIES (256) tracked aggressor addresses. Each entry is
// a Row&Col tag (25 bits) in a content-addressable array plus a data word of
// RewriteCntr (8 bits), eight 9-bit ZeroFlipCntr sub-counters and MaxZFCIdx (3 bits),
// i.e. 108 bits per entry as in the published layout. The table is fully
// associative, as evaluated in the paper.
//
// How: the tag part is a CAM with one search port (lookup) whose match is
// combinational, so the plane knows hit/miss in the cycle a command arrives. The
// counter part is a dual-port SRAM: port B belongs to the control logic (one
// synchronous read, one write, shared write also updates tag and valid bit), port A
// is a synchronous read port used only by AppLE for its background victim search.
// Only the valid bits are reset; the SRAM contents are never read for an invalid
// entry except by AppLE, which receives the valid bit with the data and ranks
// invalid entries first.
//
// Timing: lookup is combinational; b_rd_* and a_rd_* return data one clock after the
// index is presented; a write takes effect at the clock edge. A write and a read of
// the same index in the same cycle return the old data (read-before-write).
module imdb_main_table
  import imdb_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned IW      = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // CAM search
  input  addr_t         lk_addr,
  output logic          lk_hit,
  output logic [IW-1:0] lk_idx,
  // port B: control logic
  input  logic [IW-1:0] b_rd_idx,
  output mt_entry_t     b_rd_entry,
  input  logic          b_we,
  input  logic [IW-1:0] b_wr_idx,
  input  logic          b_wr_valid,
  input  addr_t         b_wr_tag,
  input  mt_entry_t     b_wr_entry,
  // port A: AppLE
  input  logic [IW-1:0] a_rd_idx,
  output mt_entry_t     a_rd_entry,
  output logic          a_rd_valid,
  output logic [IW-1:0] a_rd_idx_q,
  // status
  output logic [IW:0]   occupancy
);
  addr_t        tag   [ENTRIES];
  mt_entry_t    mem   [ENTRIES];
  logic [ENTRIES-1:0] valid;

  // CAM match
  always_comb begin
    lk_hit = 1'b0;
    lk_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (valid[i] && tag[i] == lk_addr) begin
        lk_hit = 1'b1;
        lk_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (b_we) valid[b_wr_idx] <= b_wr_valid;
  end

  always_ff @(posedge clk) begin
    if (b_we) begin
      tag[b_wr_idx] <= b_wr_tag;
      mem[b_wr_idx] <= b_wr_entry;
    end
    b_rd_entry <= mem[b_rd_idx];
    a_rd_entry <= mem[a_rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rd_valid <= 1'b0;
      a_rd_idx_q <= '0;
    end else begin
      a_rd_valid <= valid[a_rd_idx];
      a_rd_idx_q <= a_rd_idx;
    end
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy = occupancy + (IW+1)'(valid[i]);
  end

  // A Row&Col may be held by at most one valid entry.
  a_no_dup: assert property (@(posedge clk) disable iff (!rst_n)
    b_we && b_wr_valid && lk_hit && lk_addr == b_wr_tag |-> lk_idx == b_wr_idx);
endmodule

// imdb_barrier_buffer: the barrier buffer of one IMDB plane.
//
// What it does: a small fully associative buffer (8 entries by default) of the most
// aggressive lines. An entry holds the Row&Col tag (25 bits), the RewriteCntr
// inherited from the main table (8 bits), the 64-byte line data and an 8-bit
// FreqCntr (553 bits with the tag, as in the published layout). Reads and writes
// that hit are served here, so the PCM cells of a buffered aggressor stop being
// programmed. When a promoted entry arrives and the buffer is full, the least
// frequently used entry (smallest FreqCntr) is the victim; its data must be written
// back to the media and its address demoted to the main table.
//
// How: tag CAM with a combinational match; data, RewriteCntr and FreqCntr are held
// per entry and read combinationally (the paper builds the buffer from a dual-port
// CAM and a dual-port SRAM; with 8 entries this design keeps them in registers).
// FreqCntr starts at 0 when an entry is inserted and counts every hit, saturating at
// 255 (the paper does not say what it counts exactly; hits are this design's choice).
// The victim is the lowest-numbered free slot, or, if none, the lowest-numbered entry
// with the smallest FreqCntr.
//
// Interface and timing: lookup, victim and the indexed read port are combinational.
// upd_en (a hit: FreqCntr+1, and the data replaced if upd_write), ins_en (fill a slot)
// and inv_en (free a slot) take effect at the clock edge; at most one of them is used
// per cycle by the plane.
module imdb_barrier_buffer
  import imdb_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned IW      = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // search
  input  addr_t            lk_addr,
  output logic             lk_hit,
  output logic [IW-1:0]    lk_idx,
  output line_t            lk_data,
  // hit update
  input  logic             upd_en,
  input  logic [IW-1:0]    upd_idx,
  input  logic             upd_write,
  input  line_t            upd_data,
  // replacement victim
  output logic             vic_full,
  output logic [IW-1:0]    vic_idx,
  output addr_t            vic_tag,
  output logic [RWC_W-1:0] vic_rwc,
  output line_t            vic_data,
  // insertion of a promoted entry
  input  logic             ins_en,
  input  logic [IW-1:0]    ins_idx,
  input  addr_t            ins_tag,
  input  logic [RWC_W-1:0] ins_rwc,
  input  line_t            ins_data,
  // invalidation (flush)
  input  logic             inv_en,
  input  logic [IW-1:0]    inv_idx,
  // indexed read (flush)
  input  logic [IW-1:0]    rd_idx,
  output logic             rd_valid,
  output addr_t            rd_tag,
  output line_t            rd_data,
  output logic [IW:0]      occupancy
);
  addr_t            tag   [ENTRIES];
  logic [RWC_W-1:0] rwc   [ENTRIES];
  logic [FRQ_W-1:0] freq  [ENTRIES];
  line_t            data  [ENTRIES];
  logic [ENTRIES-1:0] valid;

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
  assign lk_data = data[lk_idx];

  // Victim: first free slot, else least frequently used.
  always_comb begin
    logic             found_free;
    logic [FRQ_W-1:0] min_f;
    found_free = 1'b0;
    vic_idx    = '0;
    min_f      = '1;
    for (int i = 0; i < ENTRIES; i++) begin
      if (!valid[i] && !found_free) begin
        found_free = 1'b1;
        vic_idx    = IW'(i);
      end
    end
    if (!found_free) begin
      vic_idx = '0;
      min_f   = freq[0];
      for (int i = 1; i < ENTRIES; i++) begin
        if (freq[i] < min_f) begin
          min_f   = freq[i];
          vic_idx = IW'(i);
        end
      end
    end
    vic_full = !found_free;
  end
  assign vic_tag  = tag[vic_idx];
  assign vic_rwc  = rwc[vic_idx];
  assign vic_data = data[vic_idx];

  assign rd_valid = valid[rd_idx];
  assign rd_tag   = tag[rd_idx];
  assign rd_data  = data[rd_idx];

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy = occupancy + (IW+1)'(valid[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int i = 0; i < ENTRIES; i++) freq[i] <= '0;
    end else begin
      if (ins_en) begin
        valid[ins_idx] <= 1'b1;
        freq[ins_idx]  <= '0;
      end else if (inv_en) begin
        valid[inv_idx] <= 1'b0;
      end else if (upd_en && freq[upd_idx] != '1) begin
        freq[upd_idx] <= freq[upd_idx] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ins_en) begin
      tag[ins_idx]  <= ins_tag;
      rwc[ins_idx]  <= ins_rwc;
      data[ins_idx] <= ins_data;
    end else if (upd_en && upd_write) begin
      data[upd_idx] <= upd_data;
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({ins_en, inv_en, upd_en}));
  a_no_dup: assert property (@(posedge clk) disable iff (!rst_n)
    ins_en |-> !(lk_hit && lk_idx != ins_idx && lk_addr == ins_tag));
endmodule

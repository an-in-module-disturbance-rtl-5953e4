// imdb_apple: AppLE, the approximate lowest number estimator (practical, sequential form).
//
// What it does: finds an eviction candidate for the main table. The exact policy
// would pick the entry with the smallest ZeroFlipCntr (the least urgent aggressor),
// breaking ties by the smallest RewriteCntr, which needs all 256 entries read at
// once. AppLE instead binds GROUP_SIZE consecutive entries into a group (8 entries,
// 32 groups by default) and samples one random entry per group, so only one
// comparison per group is needed and a dual-port SRAM suffices.
//
// How (follows the published "practical AppLE"): a group counter walks over the
// groups; the SRAM address is group*GROUP_SIZE plus a random offset within the
// group; the entry read back is compared ("<") with the best entry so far held in a
// data register, which keeps the smaller. The compared key is, in order of weight:
// the valid bit (an empty slot is always taken first, this design's choice), the
// ZeroFlipCntr sub-counter selected by MaxZFCIdx (the 9-bit value the paper's area
// estimate gives one comparator for), then RewriteCntr. A tie keeps the earlier
// sample. A fresh random offset is drawn for every group (the paper does not say
// whether one number is shared).
//
// Interface and timing: a one-cycle pulse on start (re)starts a search. The search
// issues one read per cycle on the table's port A for NUM_GROUPS cycles and compares
// each result one cycle later, so the candidate (cand_idx, done=1) is ready
// NUM_GROUPS+1 cycles after start: 33 cycles at the defaults, inside the ~120-cycle
// idle window that follows every write to a bank. busy is high meanwhile.
module imdb_apple
  import imdb_pkg::*;
#(
  parameter int unsigned ENTRIES    = 256,
  parameter int unsigned GROUP_SIZE = 8,
  parameter logic [15:0] SEED       = 16'h1D2B,
  parameter int unsigned IW         = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [IW-1:0] cand_idx,
  // main table port A
  output logic [IW-1:0] rd_idx,
  input  mt_entry_t     rd_entry,
  input  logic          rd_valid,
  input  logic [IW-1:0] rd_idx_q
);
  localparam int unsigned NUM_GROUPS = ENTRIES / GROUP_SIZE;
  localparam int unsigned GW = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1;

  typedef struct packed {
    logic             valid;
    zfc_t             zfc;
    logic [RWC_W-1:0] rwc;
  } key_t;

  logic [15:0]   rnd;
  logic [GW-1:0] group_q;
  logic          issuing_q;   // a read is being issued this cycle
  logic          cmp_q;       // a read result arrives this cycle
  logic          last_q;      // the result arriving is the last group's
  logic          first_q;     // the result arriving is the first group's
  key_t          best_q, key_in;
  logic [IW-1:0] best_idx_q;

  imdb_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en(1'b1), .rnd);

  assign rd_idx = IW'(group_q * GROUP_SIZE) + IW'(rnd % GROUP_SIZE);

  assign key_in = '{valid: rd_valid, zfc: rd_entry.zfc[rd_entry.maxi], rwc: rd_entry.rwc};

  assign busy     = issuing_q | cmp_q;
  assign cand_idx = best_idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      group_q    <= '0;
      issuing_q  <= 1'b0;
      cmp_q      <= 1'b0;
      last_q     <= 1'b0;
      first_q    <= 1'b0;
      done       <= 1'b0;
      best_q     <= '0;
      best_idx_q <= '0;
    end else if (start) begin
      group_q   <= '0;
      issuing_q <= 1'b1;
      cmp_q     <= 1'b0;
      last_q    <= 1'b0;
      done      <= 1'b0;
    end else begin
      // issue stage
      cmp_q   <= issuing_q;
      first_q <= issuing_q && group_q == '0;
      last_q  <= issuing_q && 32'(group_q) == NUM_GROUPS - 1;
      if (issuing_q) begin
        if (32'(group_q) == NUM_GROUPS - 1) issuing_q <= 1'b0;
        else                                group_q   <= group_q + 1'b1;
      end
      // compare stage: data register keeps the smaller key
      if (cmp_q) begin
        if (first_q || key_in < best_q) begin
          best_q     <= key_in;
          best_idx_q <= rd_idx_q;
        end
        if (last_q) done <= 1'b1;
      end
    end
  end

endmodule

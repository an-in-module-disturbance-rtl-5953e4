// imdb_plane: one IMDB plane, the disturbance barrier of one PCM bank.
//
// What it does: every command the media controller sends to this bank passes
// through the plane on its way to the PCM devices.
//  * A read that hits the barrier buffer is answered from it; any other read goes on
//    to the media.
//  * A write that hits the barrier buffer updates the buffered line and goes no
//    further.
//  * A write that hits the main table (HIT) adds the 1-to-0 flips of each 64-bit
//    word, counted by eight integrated counters from the old data (pre-write read)
//    and the new data, to that word's ZeroFlipCntr and updates MaxZFCIdx. If the
//    largest count passes THRESH (511), two rewrites of the neighbouring wordlines
//    are sent out, RewriteCntr is incremented and the entry is promoted: the line
//    and its address move into the barrier buffer, taking a free slot or replacing
//    the LFU entry, whose data is written back to the media and whose address and
//    RewriteCntr are demoted into the main table slot just freed ("swap").
//    Otherwise the write goes to the media.
//  * A write that misses both tables (MISS) goes to the media and is inserted into
//    the main table with probability 1/2^INS_PROB_LOG2 (1/128). The new entry takes
//    the slot chosen by AppLE, with the zeros of each new word as prior knowledge
//    in its ZeroFlipCntr and RewriteCntr 0.
// AppLE searches for the next victim in the background after every write handled
// by the tables, hidden in the bank's write time; if an insertion finds the search
// still running, the plane stalls until it ends.
// On flush_req (power loss) the plane stops taking commands and writes every
// buffered line back; flush_done is high once the buffer is empty.
//
// Follows the paper: table contents and widths, integrated counters, threshold,
// insertion probability, promotion/demotion and the IDLE/HIT/MISS state machine.
// This design's own choices: the channel handshakes, the 2-cycle write latency
// (accept, then HIT or MISS; the paper quotes 1-3 cycles), a promoted write is kept
// dirty in the buffer rather than also written to the media, a demoted address
// re-enters the main table with zeroed ZeroFlipCntr, and the LFSR random source.
//
// Interface and timing: cmd is a valid-ready channel; a command is accepted in IDLE
// when the media output slot is empty and no rewrite is pending. Outputs: media
// (valid-ready, one registered slot), rw (rewrites, valid-ready), rsp (a one-cycle
// pulse the cycle after a read hit is accepted), ev (one-cycle event pulses).
// A write leaves on media 2 cycles after acceptance unless it is absorbed.
module imdb_plane
  import imdb_pkg::*;
#(
  parameter int unsigned MT_ENTRIES    = 256,
  parameter int unsigned BB_ENTRIES    = 8,
  parameter int unsigned GROUP_SIZE    = 8,
  parameter int unsigned INS_PROB_LOG2 = 7,
  parameter int unsigned THRESH        = THRESHOLD,
  parameter logic [15:0] SEED          = 16'hACE1
) (
  input  logic       clk,
  input  logic       rst_n,
  // commands from the media controller
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  cmd_t       cmd,
  // commands to the media devices
  output logic       media_valid,
  input  logic       media_ready,
  output media_cmd_t media,
  // rewrite commands to the media controller's write queue
  output logic       rw_valid,
  input  logic       rw_ready,
  output addr_t      rw_addr,
  // read data served by the barrier buffer
  output logic       rsp_valid,
  output rd_rsp_t    rsp,
  // power-loss flush
  input  logic       flush_req,
  output logic       flush_done,
  // events
  output plane_ev_t  ev
);
  localparam int unsigned MIW = $clog2(MT_ENTRIES);
  localparam int unsigned BIW = (BB_ENTRIES > 1) ? $clog2(BB_ENTRIES) : 1;
  localparam int unsigned SW  = ZFC_W + 1;   // a sub-counter plus one word's flips

  typedef enum logic [1:0] {S_IDLE, S_HIT, S_MISS} state_e;
  state_e state_q;

  cmd_t            cmd_q;
  logic [MIW-1:0]  hit_idx_q;
  logic            ins_q;
  logic            apple_start, apple_busy, apple_done, apple_kick_q;
  logic [MIW-1:0]  apple_cand;
  logic [15:0]     rnd;
  logic            media_valid_q;
  media_cmd_t      media_q;
  logic            rsp_valid_q;
  rd_rsp_t         rsp_q;
  logic [BIW-1:0]  fl_ptr_q;

  // ---- main table ------------------------------------------------------------
  logic            mt_hit;
  logic [MIW-1:0]  mt_idx;
  mt_entry_t       mt_rd, mt_a_rd;
  logic            mt_we, mt_wr_valid, mt_a_valid;
  logic [MIW-1:0]  mt_wr_idx, mt_a_idx, mt_a_idx_q;
  addr_t           mt_wr_tag;
  mt_entry_t       mt_wr;
  logic [MIW:0]    mt_occ;

  imdb_main_table #(.ENTRIES(MT_ENTRIES)) u_mt (
    .clk, .rst_n,
    .lk_addr(cmd.addr), .lk_hit(mt_hit), .lk_idx(mt_idx),
    .b_rd_idx(mt_idx), .b_rd_entry(mt_rd),
    .b_we(mt_we), .b_wr_idx(mt_wr_idx), .b_wr_valid(mt_wr_valid),
    .b_wr_tag(mt_wr_tag), .b_wr_entry(mt_wr),
    .a_rd_idx(mt_a_idx), .a_rd_entry(mt_a_rd), .a_rd_valid(mt_a_valid),
    .a_rd_idx_q(mt_a_idx_q), .occupancy(mt_occ)
  );

  imdb_apple #(.ENTRIES(MT_ENTRIES), .GROUP_SIZE(GROUP_SIZE), .SEED(SEED ^ 16'h5A5A)) u_apple (
    .clk, .rst_n, .start(apple_start), .busy(apple_busy), .done(apple_done),
    .cand_idx(apple_cand),
    .rd_idx(mt_a_idx), .rd_entry(mt_a_rd), .rd_valid(mt_a_valid), .rd_idx_q(mt_a_idx_q)
  );

  // ---- barrier buffer ----------------------------------------------------------
  logic             bb_hit, bb_vic_full, bb_upd, bb_upd_wr, bb_ins, bb_inv, bb_rd_valid;
  logic [BIW-1:0]   bb_idx, bb_vic_idx;
  line_t            bb_data, bb_vic_data, bb_rd_data;
  addr_t            bb_vic_tag, bb_rd_tag;
  logic [RWC_W-1:0] bb_vic_rwc, rwc_new;
  logic [BIW:0]     bb_occ;

  imdb_barrier_buffer #(.ENTRIES(BB_ENTRIES)) u_bb (
    .clk, .rst_n,
    .lk_addr(cmd.addr), .lk_hit(bb_hit), .lk_idx(bb_idx), .lk_data(bb_data),
    .upd_en(bb_upd), .upd_idx(bb_idx), .upd_write(bb_upd_wr), .upd_data(cmd.wdata),
    .vic_full(bb_vic_full), .vic_idx(bb_vic_idx), .vic_tag(bb_vic_tag),
    .vic_rwc(bb_vic_rwc), .vic_data(bb_vic_data),
    .ins_en(bb_ins), .ins_idx(bb_vic_idx), .ins_tag(cmd_q.addr), .ins_rwc(rwc_new),
    .ins_data(cmd_q.wdata),
    .inv_en(bb_inv), .inv_idx(fl_ptr_q),
    .rd_idx(fl_ptr_q), .rd_valid(bb_rd_valid), .rd_tag(bb_rd_tag), .rd_data(bb_rd_data),
    .occupancy(bb_occ)
  );

  // ---- rewrite generator -------------------------------------------------------
  logic rg_trig, rg_ready;
  imdb_rewrite_gen u_rg (
    .clk, .rst_n, .trig_valid(rg_trig), .trig_ready(rg_ready), .trig_addr(cmd_q.addr),
    .rw_valid, .rw_ready, .rw_addr
  );

  // ---- integrated counters (x8) ---------------------------------------------------
  logic [CNT_W-1:0] cnt [WORDS];
  for (genvar w = 0; w < WORDS; w++) begin : g_ic
    imdb_integrated_counter u_ic (
      .old_word(cmd_q.odata[w*WORD_W +: WORD_W]),
      .new_word(cmd_q.wdata[w*WORD_W +: WORD_W]),
      .newly_inserted(state_q == S_MISS),
      .count(cnt[w])
    );
  end

  // HIT: accumulate; MISS: prior knowledge. Then the largest sub-counter.
  logic [SW-1:0]    acc [WORDS];
  logic [SW-1:0]    acc_max;
  logic [IDX_W-1:0] acc_maxi;
  logic             over;
  always_comb begin
    for (int w = 0; w < WORDS; w++)
      acc[w] = (state_q == S_HIT) ? SW'(mt_rd.zfc[w]) + SW'(cnt[w]) : SW'(cnt[w]);
    acc_max  = acc[0];
    acc_maxi = '0;
    for (int w = 1; w < WORDS; w++) begin
      if (acc[w] > acc_max) begin
        acc_max  = acc[w];
        acc_maxi = IDX_W'(w);
      end
    end
    over    = (state_q == S_HIT) && (32'(acc_max) > THRESH);
    rwc_new = (mt_rd.rwc == '1) ? mt_rd.rwc : mt_rd.rwc + 1'b1;
  end

  imdb_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en(1'b1), .rnd);

  // ---- control ------------------------------------------------------------------
  logic accept, out_free, insert_now;
  assign out_free  = !media_valid_q;
  assign cmd_ready = (state_q == S_IDLE) && out_free && rg_ready && !flush_req;
  assign accept    = cmd_valid && cmd_ready;
  assign insert_now = (state_q == S_MISS) && ins_q && apple_done;

  always_comb begin
    mt_we       = 1'b0;
    mt_wr_idx   = hit_idx_q;
    mt_wr_valid = 1'b1;
    mt_wr_tag   = cmd_q.addr;
    mt_wr       = '0;
    bb_upd      = 1'b0;
    bb_upd_wr   = 1'b0;
    bb_ins      = 1'b0;
    bb_inv      = 1'b0;
    rg_trig     = 1'b0;
    apple_start = apple_kick_q;
    ev          = '0;
    unique case (state_q)
      S_IDLE: begin
        if (accept && bb_hit && cmd.op != CMD_WRITEBACK) begin
          bb_upd        = 1'b1;
          bb_upd_wr     = cmd.op == CMD_WRITE;
          ev.bb_wr_hit  = cmd.op == CMD_WRITE;
          ev.bb_rd_hit  = cmd.op == CMD_READ;
        end
        if (accept && cmd.op == CMD_WRITE && !bb_hit && !mt_hit) ev.mt_miss = 1'b1;
        if (flush_req && out_free && bb_rd_valid) begin
          bb_inv      = 1'b1;
          ev.flush_wb = 1'b1;
        end
      end
      S_HIT: begin
        mt_we     = 1'b1;
        mt_wr_idx = hit_idx_q;
        ev.mt_hit = 1'b1;
        apple_start = 1'b1;
        if (over) begin
          // rewrite + promotion (swap with the LFU buffer entry if the buffer is full)
          rg_trig     = 1'b1;
          bb_ins      = 1'b1;
          ev.rewrite  = 1'b1;
          ev.promote  = 1'b1;
          ev.demote   = bb_vic_full;
          mt_wr_valid = bb_vic_full;
          mt_wr_tag   = bb_vic_tag;
          mt_wr.rwc   = bb_vic_rwc;
        end else begin
          mt_wr.rwc  = mt_rd.rwc;
          mt_wr.maxi = acc_maxi;
          for (int w = 0; w < WORDS; w++) mt_wr.zfc[w] = ZFC_W'(acc[w]);
        end
      end
      S_MISS: begin
        if (ins_q && !insert_now) ev.stall = 1'b1;
        if (!ins_q) ev.filtered = 1'b1;
        if (insert_now) begin
          mt_we       = 1'b1;
          mt_wr_idx   = apple_cand;
          mt_wr.maxi  = acc_maxi;
          for (int w = 0; w < WORDS; w++) mt_wr.zfc[w] = ZFC_W'(acc[w]);
          apple_start = 1'b1;
          ev.insert   = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      cmd_q         <= '0;
      hit_idx_q     <= '0;
      ins_q         <= 1'b0;
      apple_kick_q  <= 1'b1;
      media_valid_q <= 1'b0;
      media_q       <= '0;
      rsp_valid_q   <= 1'b0;
      rsp_q         <= '0;
      fl_ptr_q      <= '0;
    end else begin
      apple_kick_q <= 1'b0;
      rsp_valid_q  <= 1'b0;
      if (media_valid_q && media_ready) media_valid_q <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (accept) begin
            cmd_q     <= cmd;
            hit_idx_q <= mt_idx;
            ins_q     <= (32'(rnd) & ((32'd1 << INS_PROB_LOG2) - 1)) == 0;
            if (cmd.op == CMD_READ) begin
              if (bb_hit) begin
                rsp_valid_q <= 1'b1;
                rsp_q       <= '{addr: cmd.addr, data: bb_data};
              end else begin
                media_valid_q <= 1'b1;
                media_q       <= '{op: CMD_READ, addr: cmd.addr, data: '0};
              end
            end else if (cmd.op == CMD_WRITE && !bb_hit) begin
              state_q <= mt_hit ? S_HIT : S_MISS;
            end else if (cmd.op == CMD_WRITEBACK) begin
              media_valid_q <= 1'b1;
              media_q       <= '{op: CMD_WRITEBACK, addr: cmd.addr, data: cmd.wdata};
            end
          end else if (flush_req && out_free) begin
            if (bb_rd_valid) begin
              media_valid_q <= 1'b1;
              media_q       <= '{op: CMD_WRITEBACK, addr: bb_rd_tag, data: bb_rd_data};
            end
            fl_ptr_q <= (32'(fl_ptr_q) == BB_ENTRIES - 1) ? '0 : fl_ptr_q + 1'b1;
          end
        end
        S_HIT: begin
          state_q <= S_IDLE;
          if (over) begin
            if (bb_vic_full) begin
              media_valid_q <= 1'b1;
              media_q       <= '{op: CMD_WRITEBACK, addr: bb_vic_tag, data: bb_vic_data};
            end
          end else begin
            media_valid_q <= 1'b1;
            media_q       <= '{op: CMD_WRITE, addr: cmd_q.addr, data: cmd_q.wdata};
          end
        end
        S_MISS: begin
          if (!ins_q || insert_now) begin
            state_q       <= S_IDLE;
            media_valid_q <= 1'b1;
            media_q       <= '{op: CMD_WRITE, addr: cmd_q.addr, data: cmd_q.wdata};
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign media_valid = media_valid_q;
  assign media       = media_q;
  assign rsp_valid   = rsp_valid_q;
  assign rsp         = rsp_q;
  assign flush_done  = flush_req && bb_occ == '0 && !media_valid_q && state_q == S_IDLE;

  // ---- protocol checks ------------------------------------------------------------
  // An offered media command stays offered, unchanged, until taken.
  a_media_hold: assert property (@(posedge clk) disable iff (!rst_n)
    media_valid && !media_ready |=> media_valid && $stable(media));
  // A promotion always finds the rewrite generator free (commands wait for it).
  a_rg_free: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_HIT && over |-> rg_ready);
  // AppLE reports a candidate only when its search has ended.
  a_apple: assert property (@(posedge clk) disable iff (!rst_n) !(apple_done && apple_busy));
  // The main table never holds more entries than it has.
  a_mt_occ: assert property (@(posedge clk) disable iff (!rst_n) 32'(mt_occ) <= MT_ENTRIES);
endmodule

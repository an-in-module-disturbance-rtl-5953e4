// tb_imdb_top: end-to-end test of the four-plane barrier at its default sizes.
//
// The top runs exactly as configured by default (256-entry main tables, 8-entry
// barrier buffers, AppLE group size 8, insertion probability 1/128, threshold 511).
// The testbench plays the media controller and the PCM devices:
//  * it sends random reads and writes to a hot set of lines in each of the four
//    banks, supplying the pre-write-read old data with each write, and alternates
//    each line between mostly-0 and mostly-1 data so that 1-to-0 flips pile up;
//  * it keeps a model of the media contents, updated by every write and write-back
//    the planes emit, and answers forwarded reads from it;
//  * it applies random back-pressure to the media and rewrite channels.
// Checks, computed independently of the design:
//  * every read returns the last data written to that line, whether the barrier
//    buffer or the media answers it;
//  * every rewrite targets row-1 or row+1 (same column, same bank) of a line that
//    was just promoted in that bank;
//  * the share of missed writes that were inserted is near 1/128;
//  * after the final flush the media holds exactly the data last written to every
//    line, so no write was lost in the barrier buffers;
//  * every mechanism happened at least once: main-table hit, miss, insertion,
//    filtered miss, AppLE stall, rewrite, promotion, LFU demotion with write-back,
//    write and read served by the buffer, forwarded read, flush write-back, and
//    back-pressure on both output channels.
module tb_imdb_top;
  import imdb_pkg::*;
  localparam int NB = 4, HOT = 12;
  localparam int NCMD = 24000;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, flush_req, flush_done;
  cmd_t cmd;
  logic       media_valid [NB], media_ready [NB], rw_valid [NB], rw_ready [NB], rsp_valid [NB];
  media_cmd_t media [NB];
  addr_t      rw_addr [NB];
  rd_rsp_t    rsp [NB];
  plane_ev_t  ev [NB];
  int checks = 0, failures = 0;

  imdb_top dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .media_valid, .media_ready, .media, .rw_valid, .rw_ready, .rw_addr,
    .rsp_valid, .rsp, .flush_req, .flush_done, .ev
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endfunction

  typedef logic [BANK_W+TAG_W-1:0] key_t;
  line_t golden [key_t];      // host view
  line_t pcm_mem [key_t];      // PCM contents
  addr_t promoted [NB][$];    // lines promoted, whose rewrites are due
  addr_t last_wr [NB];        // last write accepted per bank
  int n_hit, n_miss, n_ins, n_filt, n_stall, n_rw, n_prom, n_dem, n_bbw, n_bbr, n_fwd, n_flush;
  int n_mbp, n_rbp;

  function automatic key_t k(input int b, input addr_t a);
    return {BANK_W'(b), a};
  endfunction

  // Lines never written hold all ones, in the host's view and in the media.
  function automatic line_t gold(input key_t kk);
    return golden.exists(kk) ? golden[kk] : '1;
  endfunction
  function automatic line_t med(input key_t kk);
    return pcm_mem.exists(kk) ? pcm_mem[kk] : '1;
  endfunction

  // ---- media and rewrite sinks, event counters ----
  always @(posedge clk) begin
    if (rst_n) begin
      for (int b = 0; b < NB; b++) begin
        if (media_valid[b] && !media_ready[b]) n_mbp++;
        if (rw_valid[b] && !rw_ready[b]) n_rbp++;
        if (media_valid[b] && media_ready[b]) begin
          if (media[b].op == CMD_READ) begin
            n_fwd++;
            chk(med(k(b, media[b].addr)) == gold(k(b, media[b].addr)),
                "forwarded read finds the last written data in the media");
          end else pcm_mem[k(b, media[b].addr)] = media[b].data;
        end
        if (ev[b].promote) promoted[b].push_back(last_wr[b]);
        if (rw_valid[b] && rw_ready[b]) begin
          bit ok;
          ok = 0;
          foreach (promoted[b][i])
            if (promoted[b][i].col == rw_addr[b].col &&
                (promoted[b][i].row == rw_addr[b].row + 1'b1 || promoted[b][i].row == rw_addr[b].row - 1'b1))
              ok = 1;
          chk(ok, "rewrite targets a neighbour of a promoted line");
          n_rw++;
        end
        if (promoted[b].size() > 4) void'(promoted[b].pop_front());
        n_hit   += int'(ev[b].mt_hit);
        n_miss  += int'(ev[b].mt_miss);
        n_ins   += int'(ev[b].insert);
        n_filt  += int'(ev[b].filtered);
        n_stall += int'(ev[b].stall);
        n_prom  += int'(ev[b].promote);
        n_dem   += int'(ev[b].demote);
        n_bbw   += int'(ev[b].bb_wr_hit);
        n_bbr   += int'(ev[b].bb_rd_hit);
        n_flush += int'(ev[b].flush_wb);
      end
    end
  end

  // Responses are checked mid-cycle: the golden model then holds exactly the writes
  // accepted before the read, not one accepted at the edge the response appears.
  always @(negedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (rst_n && rsp_valid[b])
        chk(rsp[b].data == gold(k(b, rsp[b].addr)), "read served by the buffer is current");
      media_ready[b] = ($urandom % 8) != 0;
      rw_ready[b]    = ($urandom % 8) != 0;
    end
  end

  function automatic line_t rline(input int ones_pct);
    line_t l;
    for (int i = 0; i < LINE_W; i++) l[i] = ($urandom % 100) < ones_pct;
    return l;
  endfunction

  addr_t hot [NB][HOT];
  bit    phase [NB][HOT];

  initial begin
    {n_hit, n_miss, n_ins, n_filt, n_stall, n_rw, n_prom, n_dem, n_bbw, n_bbr, n_fwd, n_flush} = '0;
    {n_mbp, n_rbp} = '0;
    cmd_valid = 0; cmd = '0; flush_req = 0;
    for (int b = 0; b < NB; b++) begin
      for (int h = 0; h < HOT; h++) begin
        hot[b][h] = '{row: 16'(100 * h + 7 * b + 1), col: 9'(h * 3 + b)};
        phase[b][h] = 0;
      end
      last_wr[b] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NCMD; n++) begin
      int b, h;
      addr_t a;
      line_t nd, od;
      bit wr;
      b = $urandom % NB;
      h = $urandom % HOT;
      a = hot[b][h];
      wr = ($urandom % 10) < 8;
      od = gold(k(b, a));
      nd = phase[b][h] ? rline(95) : rline(5);
      @(negedge clk);
      cmd_valid = 1;
      cmd = '{op: wr ? CMD_WRITE : CMD_READ, bank: BANK_W'(b), addr: a, wdata: nd, odata: od};
      #1;  // let cmd_ready settle for the newly selected bank
      while (!cmd_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      if (wr) begin
        golden[k(b, a)] = nd;
        phase[b][h] = !phase[b][h];
        last_wr[b] = a;
      end
      #1 cmd_valid = 0;
    end
    repeat (50) @(posedge clk);
    // Flush all barrier buffers, then the media must hold every line's last data.
    @(negedge clk); flush_req = 1;
    begin
      int t;
      t = 0;
      while (!flush_done && t < 2000) begin @(posedge clk); t++; end
    end
    chk(flush_done, "flush completes");
    // flush_done promises that every plane is drained at this very edge, so the
    // media is compared now, before anything else can reach it.
    foreach (golden[kk]) chk(med(kk) == golden[kk], "media holds the last written data after flush");
    begin
      int nf;
      nf = n_flush;
      repeat (20) @(posedge clk);
      chk(n_flush == nf, "no write-back after flush_done");
    end
    @(negedge clk); flush_req = 0;
    // Insertion probability 1/128: accept 1/256 .. 1/64.
    chk(n_ins * 256 >= n_miss && n_ins * 64 <= n_miss, "insertion rate near 1/128");
    chk(n_hit > 0,   "main table hit happened");
    chk(n_miss > 0,  "miss happened");
    chk(n_ins > 0,   "insertion happened");
    chk(n_filt > 0,  "filtered miss happened");
    chk(n_stall > 0, "AppLE stall happened");
    chk(n_rw > 0,    "rewrite happened");
    chk(n_prom > 0,  "promotion happened");
    chk(n_dem > 0,   "demotion happened");
    chk(n_bbw > 0,   "buffer write hit happened");
    chk(n_bbr > 0,   "buffer read hit happened");
    chk(n_fwd > 0,   "forwarded read happened");
    chk(n_flush > 0, "flush write-back happened");
    chk(n_mbp > 0 && n_rbp > 0, "back-pressure happened");
    $display("top: hits=%0d misses=%0d inserts=%0d filtered=%0d stalls=%0d rewrites=%0d promotions=%0d demotions=%0d",
             n_hit, n_miss, n_ins, n_filt, n_stall, n_rw, n_prom, n_dem);
    $display("top: bb_wr=%0d bb_rd=%0d fwd_reads=%0d flush_wb=%0d media_bp=%0d rw_bp=%0d lines=%0d",
             n_bbw, n_bbr, n_fwd, n_flush, n_mbp, n_rbp, golden.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

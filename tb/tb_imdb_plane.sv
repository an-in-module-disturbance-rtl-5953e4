// tb_imdb_plane: self-checking test of one IMDB plane against a reference model.
//
// The plane runs with every missed write inserted (INS_PROB_LOG2 = 0, so insertion
// is deterministic) and a 2-entry barrier buffer (so the buffer fills and LFU
// demotion happens early); the main table keeps its 256 entries and the threshold
// its 511. Traffic goes to a handful of addresses, so no main-table eviction occurs
// and the model below can predict every output exactly:
//  * per tracked address: the eight ZeroFlipCntr values (prior knowledge = zeros of
//    the inserted line, then + 1-to-0 flips per word, counted here with $countones)
//    and RewriteCntr;
//  * the barrier buffer slots with data and FreqCntr, LFU victim choice included;
//  * the host's view of memory, which also supplies the pre-write-read old data.
// Checked: the exact sequence of media commands (write, forwarded read, write-back),
// the rewrite addresses (row-1, row+1), read data served by the buffer, the write
// latency of 2 cycles from acceptance to the media when AppLE is idle, that a miss
// arriving while AppLE searches stalls, and the flush that empties the buffer.
module tb_imdb_plane;
  import imdb_pkg::*;
  localparam int BB = 2;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, media_valid, media_ready, rw_valid, rw_ready, rsp_valid;
  logic flush_req, flush_done;
  cmd_t cmd;
  media_cmd_t media;
  addr_t rw_addr;
  rd_rsp_t rsp;
  plane_ev_t ev;
  int checks = 0, failures = 0;
  longint cyc = 0;

  imdb_plane #(.BB_ENTRIES(BB), .INS_PROB_LOG2(0)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .media_valid, .media_ready, .media,
    .rw_valid, .rw_ready, .rw_addr, .rsp_valid, .rsp, .flush_req, .flush_done, .ev
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endfunction

  // ---------------- reference model ----------------
  line_t  golden [addr_t];
  int     zfc    [addr_t][8];
  int     rwc    [addr_t];
  bit     in_mt  [addr_t];
  bit     s_val [BB];
  addr_t  s_tag [BB];
  line_t  s_dat [BB];
  int     s_frq [BB];
  int     s_rwc [BB];

  media_cmd_t exp_media [$], got_media [$];
  addr_t      exp_rw [$], got_rw [$];
  line_t      exp_rsp [$];
  longint     acc_cyc [$], out_cyc [$];
  int n_stall = 0, n_insert = 0, n_promote = 0, n_demote = 0, n_bbw = 0, n_bbr = 0, n_hit = 0;

  function automatic int bb_find(input addr_t a);
    for (int i = 0; i < BB; i++) if (s_val[i] && s_tag[i] == a) return i;
    return -1;
  endfunction

  function automatic line_t cur(input addr_t a);
    return golden.exists(a) ? golden[a] : '1;
  endfunction

  // Predict the effect of one write; returns 1 if the write should reach the media.
  function automatic bit model_write(input addr_t a, input line_t o, input line_t n);
    int b = bb_find(a);
    golden[a] = n;
    if (b >= 0) begin
      s_dat[b] = n;
      if (s_frq[b] < 255) s_frq[b]++;
      return 0;
    end
    if (!in_mt.exists(a) || !in_mt[a]) begin
      in_mt[a] = 1;
      rwc[a] = 0;
      for (int w = 0; w < 8; w++) zfc[a][w] = 64 - $countones(n[w*64 +: 64]);
      exp_media.push_back('{op: CMD_WRITE, addr: a, data: n});
      return 1;
    end else begin
      int mx = 0;
      int s [8];
      for (int w = 0; w < 8; w++) begin
        s[w] = zfc[a][w] + $countones(o[w*64 +: 64] & ~n[w*64 +: 64]);
        if (s[w] > mx) mx = s[w];
      end
      if (mx > THRESHOLD) begin
        int v = -1;
        if (a.row != 0)      exp_rw.push_back('{row: a.row - 1'b1, col: a.col});
        if (a.row != 16'hFFFF) exp_rw.push_back('{row: a.row + 1'b1, col: a.col});
        for (int i = BB - 1; i >= 0; i--) if (!s_val[i]) v = i;
        in_mt[a] = 0;
        if (v < 0) begin
          int mf = s_frq[0];
          v = 0;
          for (int i = 1; i < BB; i++) if (s_frq[i] < mf) begin mf = s_frq[i]; v = i; end
          exp_media.push_back('{op: CMD_WRITEBACK, addr: s_tag[v], data: s_dat[v]});
          in_mt[s_tag[v]] = 1;
          rwc[s_tag[v]] = s_rwc[v];
          for (int w = 0; w < 8; w++) zfc[s_tag[v]][w] = 0;
        end
        s_val[v] = 1; s_tag[v] = a; s_dat[v] = n; s_frq[v] = 0;
        s_rwc[v] = rwc[a] < 255 ? rwc[a] + 1 : 255;
        return 0;
      end
      for (int w = 0; w < 8; w++) zfc[a][w] = s[w];
      exp_media.push_back('{op: CMD_WRITE, addr: a, data: n});
      return 1;
    end
  endfunction

  // ---------------- monitors ----------------
  always @(posedge clk) begin
    if (rst_n) begin
      if (media_valid && media_ready) begin
        got_media.push_back(media);
        if (media.op == CMD_WRITE) out_cyc.push_back($time);
      end
      if (rw_valid && rw_ready) got_rw.push_back(rw_addr);
      if (rsp_valid) begin
        chk(exp_rsp.size() > 0 && rsp.data == exp_rsp[0], "read data served by the barrier buffer");
        if (exp_rsp.size() > 0) void'(exp_rsp.pop_front());
      end
      n_stall   += int'(ev.stall);
      n_insert  += int'(ev.insert);
      n_promote += int'(ev.promote);
      n_demote  += int'(ev.demote);
      n_bbw     += int'(ev.bb_wr_hit);
      n_bbr     += int'(ev.bb_rd_hit);
      n_hit     += int'(ev.mt_hit);
    end
  end

  // ---------------- driver ----------------
  task automatic send(input cmd_op_e op, input addr_t a, input line_t n);
    line_t o = cur(a);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.addr = a; cmd.wdata = n; cmd.odata = o; cmd.bank = '0;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    if (op == CMD_WRITE) begin
      if (model_write(a, o, n)) acc_cyc.push_back($time);
    end else if (op == CMD_READ) begin
      int b = bb_find(a);
      if (b >= 0) begin
        exp_rsp.push_back(s_dat[b]);
        if (s_frq[b] < 255) s_frq[b]++;
      end else exp_media.push_back('{op: CMD_READ, addr: a, data: '0});
    end
    #1 cmd_valid = 0;
  endtask

  function automatic line_t rline(input int ones_pct);
    line_t l;
    for (int i = 0; i < LINE_W; i++) l[i] = ($urandom % 100) < ones_pct;
    return l;
  endfunction

  addr_t addrs [6];

  initial begin
    int stall_before;
    cmd_valid = 0; cmd = '0; media_ready = 1; rw_ready = 1; flush_req = 0;
    for (int i = 0; i < BB; i++) begin s_val[i] = 0; s_frq[i] = 0; end
    addrs[0] = '{row: 16'h00BE, col: 9'h0EF};
    addrs[1] = '{row: 16'h00CA, col: 9'h0FE};
    addrs[2] = '{row: 16'h0000, col: 9'h001};   // first row: one neighbour
    addrs[3] = '{row: 16'hFFFF, col: 9'h1FF};   // last row: one neighbour
    addrs[4] = '{row: 16'h1234, col: 9'h055};
    addrs[5] = '{row: 16'h1235, col: 9'h055};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40) @(posedge clk);
    // Phase 1: spaced writes (AppLE always idle) and reads on a few hot lines.
    for (int k = 0; k < 900; k++) begin
      addr_t a;
      a = addrs[$urandom % 6];
      if ($urandom % 5 == 0) send(CMD_READ, a, '0);
      else send(CMD_WRITE, a, (k % 2) ? rline(90) : rline(10));
      repeat (40) @(posedge clk);
    end
    // Write latency: 2 cycles from acceptance to the media.
    chk(acc_cyc.size() == out_cyc.size(), "one media write per non-absorbed write");
    foreach (acc_cyc[i]) if (i < out_cyc.size()) chk(out_cyc[i] - acc_cyc[i] == 20, "write latency 2 cycles");
    // Phase 2: back-to-back writes to new lines: insertion must wait for AppLE.
    stall_before = n_stall;
    for (int k = 0; k < 4; k++) send(CMD_WRITE, '{row: 16'h4000 + 16'(k), col: 9'h010}, rline(50));
    repeat (40) @(posedge clk);
    chk(n_stall > stall_before, "insertion stalled while AppLE was searching");
    // Phase 3: back-pressure on the media and rewrite channels.
    for (int k = 0; k < 300; k++) begin
      addr_t a;
      a = addrs[$urandom % 6];
      fork
        send(CMD_WRITE, a, (k % 2) ? rline(95) : rline(5));
        repeat (8) begin @(negedge clk); media_ready = 1'($urandom); rw_ready = 1'($urandom); end
      join
      @(negedge clk); media_ready = 1; rw_ready = 1;
      repeat (40) @(posedge clk);
    end
    // Phase 4: flush. Every buffered line must come back as a write-back.
    @(negedge clk); flush_req = 1;
    for (int i = 0; i < BB; i++) if (s_val[i])
      exp_media.push_back('{op: CMD_WRITEBACK, addr: s_tag[i], data: s_dat[i]});
    begin
      int t;
      t = 0;
      while (!flush_done && t < 100) begin @(posedge clk); t++; end
      chk(flush_done, "flush completes");
    end
    @(negedge clk); flush_req = 0;
    repeat (5) @(posedge clk);
    // Compare the media command streams. The flush order is the slot order from the
    // flush pointer's position, so the last entries are compared as a set.
    chk(got_media.size() == exp_media.size(), "number of media commands");
    for (int i = 0; i < exp_media.size() && i < got_media.size(); i++) begin
      bit ok;
      ok = got_media[i] == exp_media[i];
      if (!ok && i >= exp_media.size() - BB) begin
        for (int j = exp_media.size() - BB; j < exp_media.size(); j++)
          if (got_media[i] == exp_media[j]) ok = 1;
      end
      chk(ok, $sformatf("media command %0d", i));
      if (!ok) $display("  dx=%h got op=%0d row=%h col=%h  exp op=%0d row=%h col=%h", got_media[i].data ^ exp_media[i].data, got_media[i].op,
        got_media[i].addr.row, got_media[i].addr.col, exp_media[i].op, exp_media[i].addr.row, exp_media[i].addr.col);
    end
    chk(got_rw.size() == exp_rw.size(), "number of rewrites");
    for (int i = 0; i < exp_rw.size() && i < got_rw.size(); i++) chk(got_rw[i] == exp_rw[i], "rewrite address");
    chk(exp_rsp.size() == 0, "every buffered read answered");
    chk(n_insert > 0 && n_hit > 0 && n_promote > 0 && n_demote > 0 && n_bbw > 0 && n_bbr > 0,
        "every mechanism exercised");
    $display("plane: inserts=%0d hits=%0d promotions=%0d demotions=%0d bb_wr=%0d bb_rd=%0d stalls=%0d rewrites=%0d",
             n_insert, n_hit, n_promote, n_demote, n_bbw, n_bbr, n_stall, got_rw.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_imdb_system: the barrier together with the media controller's write queues.
//
// Four imdb_mc_wq write queues (one per bank, default 64 entries) feed one imdb_top at
// its default sizes. The test supplies what the paper leaves to the rest of the
// controller and to the devices:
//  * the host: random writes to a few hot lines per bank, alternating mostly-0 and
//    mostly-1 data so that aggressors form, plus writes to their neighbouring rows
//    (where rewrites land, so that rewrites meet queued writes) and to colder lines;
//  * a round-robin arbiter that gives the barrier's single command port to one bank
//    per cycle, taking that bank's pre-write read (as a read) before its write;
//  * the PCM: it stores every write and write-back, and answers a forwarded
//    pre-write read two cycles after accepting it, with random back-pressure.
// The barrier's rewrites go straight back into the write queue of their bank.
// Checks:
//  * every write that reaches the barrier carries as old data exactly what the
//    barrier last accepted for that line, whether the pre-write read was answered
//    by the barrier buffer or by the PCM;
//  * a lone rewrite writes the line back unchanged;
//  * after the queues drain and the buffers are flushed, the PCM holds the last
//    data the host wrote to every line;
//  * rewrites, merges of a rewrite with a queued write, promotions and pre-write
//    reads answered by the buffer all happened.
module tb_imdb_system;
  import imdb_pkg::*;
  localparam int NB = 4, HOT = 6, NW = 40000;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // barrier
  logic       t_valid, t_ready, flush_req, flush_done;
  cmd_t       t_cmd;
  logic       media_valid [NB], media_ready [NB], rw_valid [NB], rw_ready [NB], rsp_valid [NB];
  media_cmd_t media [NB];
  addr_t      rw_addr [NB];
  rd_rsp_t    rsp [NB];
  plane_ev_t  ev [NB];

  imdb_top u_top (
    .clk, .rst_n, .cmd_valid(t_valid), .cmd_ready(t_ready), .cmd(t_cmd),
    .media_valid, .media_ready, .media, .rw_valid, .rw_ready, .rw_addr,
    .rsp_valid, .rsp, .flush_req, .flush_done, .ev
  );

  // write queues
  logic  wr_valid [NB], wr_ready [NB], pr_valid [NB], pr_ready [NB], pr_rsp_valid [NB];
  logic  q_valid [NB], q_ready [NB], q_rewrite [NB], merged [NB];
  addr_t wr_addr [NB], pr_addr [NB];
  line_t wr_data [NB], pr_rsp_data [NB];
  cmd_t  q_cmd [NB];
  logic [6:0] count [NB];

  for (genvar b = 0; b < NB; b++) begin : g_wq
    imdb_mc_wq #(.BANK(b)) u_wq (
      .clk, .rst_n,
      .wr_valid(wr_valid[b]), .wr_ready(wr_ready[b]), .wr_addr(wr_addr[b]), .wr_data(wr_data[b]),
      .rw_valid(rw_valid[b]), .rw_ready(rw_ready[b]), .rw_addr(rw_addr[b]),
      .rd_pending(1'b0),
      .pr_valid(pr_valid[b]), .pr_ready(pr_ready[b]), .pr_addr(pr_addr[b]),
      .pr_rsp_valid(pr_rsp_valid[b]), .pr_rsp_data(pr_rsp_data[b]),
      .cmd_valid(q_valid[b]), .cmd_ready(q_ready[b]), .cmd(q_cmd[b]), .cmd_rewrite(q_rewrite[b]),
      .count(count[b]), .merged(merged[b])
    );
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NW * 40 + 50000) @(posedge clk);
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
  line_t host_v [key_t];   // last data the host wrote
  line_t bar_v  [key_t];   // last data the barrier accepted
  line_t pcm_v  [key_t];   // PCM contents
  function automatic key_t k(input int b, input addr_t a);
    return {BANK_W'(b), a};
  endfunction
  function automatic line_t get_bar(input key_t kk);
    return bar_v.exists(kk) ? bar_v[kk] : '1;
  endfunction
  function automatic line_t get_pcm(input key_t kk);
    return pcm_v.exists(kk) ? pcm_v[kk] : '1;
  endfunction

  // ---- arbiter: one bank per cycle, its pre-write read before its write ----
  logic [BANK_W-1:0] rr_q;
  logic              use_pr;
  always_comb begin
    use_pr  = pr_valid[rr_q];
    t_valid = pr_valid[rr_q] || q_valid[rr_q];
    t_cmd   = q_cmd[rr_q];
    if (use_pr) t_cmd = '{op: CMD_READ, bank: rr_q, addr: pr_addr[rr_q], wdata: '0, odata: '0};
    for (int b = 0; b < NB; b++) begin
      pr_ready[b] = (BANK_W'(b) == rr_q) && use_pr && t_ready;
      q_ready[b]  = (BANK_W'(b) == rr_q) && !use_pr && t_ready;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_q <= '0;
    else        rr_q <= rr_q + 1'b1;
  end

  // ---- PCM: answers forwarded pre-write reads two cycles later ----
  logic  rd_pend [NB][2];
  addr_t rd_a    [NB][2];
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      pr_rsp_valid[b] = rsp_valid[b] || rd_pend[b][1];
      pr_rsp_data[b]  = rsp_valid[b] ? rsp[b].data : get_pcm(k(b, rd_a[b][1]));
    end
  end

  int n_rw, n_merge, n_prom, n_bbr, n_lone, n_pr_media, n_wr;

  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      rd_pend[b][1] <= rd_pend[b][0];
      rd_a[b][1]    <= rd_a[b][0];
      rd_pend[b][0] <= 1'b0;
    end
    if (rst_n) begin
      for (int b = 0; b < NB; b++) begin
        if (media_valid[b] && media_ready[b]) begin
          if (media[b].op == CMD_READ) begin
            rd_pend[b][0] <= 1'b1;
            rd_a[b][0]    <= media[b].addr;
            n_pr_media++;
          end else pcm_v[k(b, media[b].addr)] = media[b].data;
        end
        chk(!(rsp_valid[b] && rd_pend[b][1]), "one pre-write read answer at a time");
        n_rw    += int'(rw_valid[b] && rw_ready[b]);
        n_merge += int'(merged[b]);
        n_prom  += int'(ev[b].promote);
        n_bbr   += int'(ev[b].bb_rd_hit);
      end
      if (t_valid && t_ready && t_cmd.op == CMD_WRITE) begin
        key_t kk;
        kk = k(int'(t_cmd.bank), t_cmd.addr);
        chk(t_cmd.odata == get_bar(kk), "old data of a write is the line's current contents");
        if (q_rewrite[t_cmd.bank] && !host_v.exists(kk)) begin
          chk(t_cmd.wdata == t_cmd.odata, "a lone rewrite writes the line back unchanged");
          n_lone++;
        end
        bar_v[kk] = t_cmd.wdata;
        n_wr++;
      end
    end
  end

  always @(negedge clk)
    for (int b = 0; b < NB; b++) media_ready[b] = ($urandom % 6) != 0;

  // ---- host ----
  function automatic line_t rline(input int ones_pct);
    line_t l;
    for (int i = 0; i < LINE_W; i++) l[i] = ($urandom % 100) < ones_pct;
    return l;
  endfunction

  addr_t hot   [NB][HOT];
  bit    phase [NB][HOT];

  initial begin
    {n_rw, n_merge, n_prom, n_bbr, n_lone, n_pr_media, n_wr} = '0;
    flush_req = 0;
    for (int b = 0; b < NB; b++) begin
      wr_valid[b] = 0; wr_addr[b] = '0; wr_data[b] = '0;
      for (int h = 0; h < HOT; h++) begin
        hot[b][h]   = '{row: 16'(50 * h + 3 * b + 2), col: 9'(5 * h + b)};
        phase[b][h] = 0;
      end
      for (int s = 0; s < 2; s++) begin rd_pend[b][s] = 0; rd_a[b][s] = '0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NW; n++) begin
      int b, h;
      addr_t a;
      line_t d;
      b = $urandom % NB;
      if ($urandom % 4 != 0) begin
        h = $urandom % HOT;
        a = hot[b][h];
        d = phase[b][h] ? rline(95) : rline(5);
        phase[b][h] = !phase[b][h];
      end else if ($urandom % 4 != 0) begin
        // a neighbour of a hot line: the line its rewrites go to
        h = $urandom % HOT;
        a = hot[b][h];
        a.row = ($urandom % 2) ? a.row - 1'b1 : a.row + 1'b1;
        d = rline(50);
      end else begin
        a.row = 16'(1000 + $urandom % 64);
        a.col = 9'($urandom % 8);
        d = rline(50);
      end
      @(negedge clk);
      wr_valid[b] = 1;
      wr_addr[b]  = a;
      wr_data[b]  = d;
      #1;
      while (!wr_ready[b]) begin @(negedge clk); #1; end
      @(posedge clk);
      host_v[k(b, a)] = d;
      #1 wr_valid[b] = 0;
      repeat ($urandom % 3) @(posedge clk);
    end
    // let the queues drain (rewrites can still arrive), then flush the buffers
    begin
      int t;
      bit empty;
      t = 0;
      do begin
        @(posedge clk);
        t++;
        empty = 1;
        for (int b = 0; b < NB; b++) if (count[b] != 0 || rw_valid[b]) empty = 0;
      end while (!empty && t < 20000);
      chk(empty, "write queues drain");
    end
    repeat (20) @(posedge clk);
    @(negedge clk); flush_req = 1;
    begin
      int t;
      t = 0;
      while (!flush_done && t < 2000) begin @(posedge clk); t++; end
    end
    chk(flush_done, "flush completes");
    foreach (host_v[kk]) chk(get_pcm(kk) == host_v[kk], "PCM holds the host's last data after flush");
    @(negedge clk); flush_req = 0;
    chk(n_rw > 0,    "rewrites happened");
    chk(n_merge > 0, "rewrite merged with a queued write");
    chk(n_prom > 0,  "promotions happened");
    chk(n_bbr > 0,   "pre-write reads answered by the barrier buffer");
    chk(n_pr_media > 0, "pre-write reads answered by the PCM");
    $display("system: writes_to_barrier=%0d rewrites=%0d merges=%0d lone_rewrites=%0d promotions=%0d",
             n_wr, n_rw, n_merge, n_lone, n_prom);
    $display("system: pre_reads_from_buffer=%0d pre_reads_from_pcm=%0d lines=%0d",
             n_bbr, n_pr_media, host_v.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

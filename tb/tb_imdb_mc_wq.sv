// tb_imdb_mc_wq: self-checking test of the media controller's write queue.
//
// The test plays the host (random writes, half of them to a small set of lines, so
// that writes to a queued line are common), the barrier (random rewrites of the same lines and
// random back-pressure on cmd), the read queue (rd_pending high in random bursts,
// long enough to fill the queue) and the PCM (pre-write reads answered after 1-4
// cycles from a model of the line contents). It keeps its own list of pending
// entries in arrival order, with the rules: a write to a queued line replaces its
// data; a rewrite of a queued line (or of the line written in the same cycle)
// merges into it; anything else is appended, write before rewrite; the head
// leaving in a cycle takes no part in that cycle's merges.
// Checks at every issued command: address, data (host data, or the old data for a
// lone rewrite), old data equal to the line's current contents, and the rewrite
// flag; the merged pulse; the count; that no pre-write read is requested while a
// normal read waits; that writes leave while reads wait only when the queue is
// full. At the end the queue drains completely.
module tb_imdb_mc_wq;
  import imdb_pkg::*;
  localparam int DEPTH = 64, NCYC = 60000, NLINES = 40;
  logic clk = 0, rst_n = 0;
  logic  wr_valid, wr_ready, rw_valid, rw_ready, rd_pending;
  addr_t wr_addr, rw_addr, pr_addr;
  line_t wr_data, pr_rsp_data;
  logic  pr_valid, pr_ready, pr_rsp_valid, cmd_valid, cmd_ready, cmd_rewrite, merged;
  cmd_t  cmd;
  logic [6:0] count;
  int checks = 0, failures = 0;

  imdb_mc_wq dut (
    .clk, .rst_n, .wr_valid, .wr_ready, .wr_addr, .wr_data, .rw_valid, .rw_ready, .rw_addr,
    .rd_pending, .pr_valid, .pr_ready, .pr_addr, .pr_rsp_valid, .pr_rsp_data,
    .cmd_valid, .cmd_ready, .cmd, .cmd_rewrite, .count, .merged
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NCYC + 20000) @(posedge clk);
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

  typedef struct {
    addr_t a;
    bit    host;
    line_t d;
    bit    rw;
  } ent_t;
  ent_t  q [$];
  line_t mem [addr_t];
  int    n_issue, n_merge, n_lone_rw, n_full_drain, n_pr;

  function automatic line_t cur(input addr_t a);
    return mem.exists(a) ? mem[a] : '1;
  endfunction

  function automatic int find(input addr_t a);
    foreach (q[i]) if (q[i].a == a) return i;
    return -1;
  endfunction

  function automatic addr_t rnd_addr();
    addr_t a;
    int l;
    // half hot lines (merges), half from a large set (so the queue can fill)
    l = ($urandom % 2) ? $urandom % NLINES : NLINES + $urandom % 4000;
    a.row = 16'(10 + l / 4);
    a.col = 9'(l % 4);
    return a;
  endfunction

  // pre-write read responder
  int    pr_wait;
  bit    pr_out;
  addr_t pr_a;


  always @(posedge clk) begin
    if (rst_n) begin
      bit exp_merge;
      int i;
      // rules on the outputs, on pre-edge values
      if (rd_pending) chk(!pr_valid, "no pre-write read while a normal read waits");
      if (cmd_valid && rd_pending) chk(count >= 7'(DEPTH - 1), "writes leave during reads only when full");
      chk(int'(count) == q.size(), "count matches the model");
      // pre-write read handshake and response
      if (pr_rsp_valid) pr_out = 0;
      if (pr_valid && pr_ready) begin
        chk(!pr_out, "one pre-write read at a time");
        pr_out  = 1;
        pr_a    = pr_addr;
        pr_wait = 1 + $urandom % 4;
        n_pr++;
        i = find(pr_addr);
        chk(i >= 0, "pre-write read of a queued line");
      end
      // leaving command
      if (cmd_valid && cmd_ready) begin
        chk(q.size() > 0, "issue from a non-empty queue");
        if (q.size() > 0) begin
          chk(cmd.op == CMD_WRITE && cmd.addr == q[0].a, "issued address is the oldest entry");
          chk(cmd.odata == cur(cmd.addr), "old data is the line's current contents");
          chk(cmd.wdata == (q[0].host ? q[0].d : cur(cmd.addr)), "issued data");
          chk(cmd_rewrite == q[0].rw, "rewrite flag");
          if (!q[0].host) n_lone_rw++;
          if (rd_pending) n_full_drain++;
          mem[cmd.addr] = cmd.wdata;
          void'(q.pop_front());
          n_issue++;
        end
      end
      // entering commands
      exp_merge = 0;
      if (wr_valid && wr_ready) begin
        i = find(wr_addr);
        if (i >= 0) begin
          q[i].d    = wr_data;
          q[i].host = 1;
        end else q.push_back('{a: wr_addr, host: 1, d: wr_data, rw: 0});
      end
      if (rw_valid && rw_ready) begin
        i = find(rw_addr);
        if (i >= 0) begin
          exp_merge = q[i].host;
          q[i].rw   = 1;
        end else q.push_back('{a: rw_addr, host: 0, d: '0, rw: 1});
      end
      chk(merged == exp_merge, "merged pulse");
      n_merge += int'(exp_merge);
    end
  end

  // pre-write read data: the line contents when the answer is given
  always @(negedge clk) begin
    pr_rsp_valid = 0;
    if (pr_out) begin
      pr_wait--;
      if (pr_wait == 0) begin
        pr_rsp_valid = 1;
        pr_rsp_data  = cur(pr_a);
      end
    end
  end

  function automatic line_t rline();
    line_t l;
    for (int k = 0; k < LINE_W / 32; k++) l[k*32 +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    int burst;
    {n_issue, n_merge, n_lone_rw, n_full_drain, n_pr} = '0;
    pr_out = 0; pr_wait = 0; pr_a = '0;
    wr_valid = 0; rw_valid = 0; rd_pending = 0; pr_ready = 0; cmd_ready = 0;
    wr_addr = '0; rw_addr = '0; wr_data = '0; pr_rsp_valid = 0; pr_rsp_data = '0;
    burst = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NCYC; n++) begin
      @(negedge clk);
      wr_valid  = ($urandom % 100) < 45;
      wr_addr   = rnd_addr();
      wr_data   = rline();
      rw_valid  = ($urandom % 100) < 10;
      rw_addr   = ($urandom % 4 == 0) ? wr_addr : rnd_addr();
      pr_ready  = ($urandom % 4) != 0;
      cmd_ready = ($urandom % 4) != 0;
      if (burst > 0) burst--;
      else if ($urandom % 400 == 0) burst = 100 + $urandom % 200;
      rd_pending = burst > 0 || ($urandom % 10 == 0);
    end
    @(negedge clk);
    wr_valid = 0; rw_valid = 0; rd_pending = 0; pr_ready = 1; cmd_ready = 1;
    repeat (2000) @(posedge clk);
    chk(count == 0 && q.size() == 0, "queue drains");
    chk(n_merge > 0, "merges happened");
    chk(n_lone_rw > 0, "lone rewrites happened");
    chk(n_full_drain > 0, "full-queue drain during reads happened");
    $display("wq: issued=%0d merges=%0d lone_rewrites=%0d full_drains=%0d pre_reads=%0d",
             n_issue, n_merge, n_lone_rw, n_full_drain, n_pr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_imdb_group_size: AppLE group-size configurations under the bank's write timing.
//
// The barrier hides AppLE's sequential victim search in the time a PCM bank stays
// busy after a write (about 120 controller cycles). This test builds three complete
// four-bank barriers that differ only in AppLE's group size:
//   g8  (IMDB e256b8g8, 32 groups, search 33 cycles),
//   g4  (IMDB e256b8g4, 64 groups, search 65 cycles),
//   g1  (no AppLE: every one of the 256 entries compared, search 257 cycles).
// The same command stream goes to all three: writes to random lines of bank 0
// (32 lines: enough misses for insertions at probability 1/128, and enough hits
// on inserted lines to restart the search often), a command
// every 120 cycles, with the pre-write-read old data supplied by the test.
// Checks:
//  * with g8 and g4 no insertion ever waits for AppLE (zero stall cycles), while
//    with g1 insertions do wait, never longer than one whole search (257+1 cycles:
//    a command that follows a stalled insertion meets a search that just began);
//  * all three insert at least once, and every write that was not absorbed by a
//    barrier buffer reaches the media with the right data; after a final flush the
//    media of every configuration holds the last data written to each line.
module tb_imdb_group_size;
  import imdb_pkg::*;
  localparam int NB = 4, NCFG = 3, GAP = 120, NCMD = 3000, NLINES = 32;
  localparam int GS [NCFG] = '{8, 4, 1};
  logic clk = 0, rst_n = 0;
  logic cmd_valid, flush_req;
  cmd_t cmd;
  logic       cmd_ready [NCFG], flush_done [NCFG];
  logic       media_valid [NCFG][NB], rw_valid [NCFG][NB], rsp_valid [NCFG][NB];
  logic       media_ready [NB], rw_ready [NB];
  media_cmd_t media [NCFG][NB];
  addr_t      rw_addr [NCFG][NB];
  rd_rsp_t    rsp [NCFG][NB];
  plane_ev_t  ev [NCFG][NB];
  int checks = 0, failures = 0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    imdb_top #(.GROUP_SIZE(GS[c])) dut (
      .clk, .rst_n, .cmd_valid, .cmd_ready(cmd_ready[c]), .cmd,
      .media_valid(media_valid[c]), .media_ready, .media(media[c]),
      .rw_valid(rw_valid[c]), .rw_ready, .rw_addr(rw_addr[c]),
      .rsp_valid(rsp_valid[c]), .rsp(rsp[c]), .flush_req, .flush_done(flush_done[c]),
      .ev(ev[c])
    );
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NCMD * (GAP + 300) + 20000) @(posedge clk);
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

  line_t golden [addr_t];
  line_t pcm0 [addr_t];
  line_t pcm1 [addr_t];
  line_t pcm2 [addr_t];
  int stall_cyc [NCFG], max_run [NCFG], run [NCFG], inserts [NCFG];

  function automatic line_t gold(input addr_t a);
    return golden.exists(a) ? golden[a] : '1;
  endfunction
  function automatic line_t pcm(input int c, input addr_t a);
    case (c)
      0:       return pcm0.exists(a) ? pcm0[a] : '1;
      1:       return pcm1.exists(a) ? pcm1[a] : '1;
      default: return pcm2.exists(a) ? pcm2[a] : '1;
    endcase
  endfunction

  // Media of bank 0 of each configuration; the other banks stay unused.
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NCFG; c++) begin
        if (media_valid[c][0] && media_ready[0] && media[c][0].op != CMD_READ) begin
          case (c)
            0:       pcm0[media[c][0].addr] = media[c][0].data;
            1:       pcm1[media[c][0].addr] = media[c][0].data;
            default: pcm2[media[c][0].addr] = media[c][0].data;
          endcase
        end
        for (int b = 1; b < NB; b++)
          if (media_valid[c][b] || rw_valid[c][b]) chk(1'b0, "idle bank stays idle");
        if (ev[c][0].stall) begin
          stall_cyc[c]++;
          run[c]++;
          if (run[c] > max_run[c]) max_run[c] = run[c];
        end else run[c] = 0;
        inserts[c] += int'(ev[c][0].insert);
      end
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      media_ready[b] = 1'b1;
      rw_ready[b]    = 1'b1;
    end
  end

  function automatic line_t rline(input int ones_pct);
    line_t l;
    for (int i = 0; i < LINE_W; i++) l[i] = ($urandom % 100) < ones_pct;
    return l;
  endfunction

  function automatic bit all_ready();
    bit r;
    r = 1;
    for (int c = 0; c < NCFG; c++) r &= cmd_ready[c];
    return r;
  endfunction

  function automatic bit all_done();
    bit r;
    r = 1;
    for (int c = 0; c < NCFG; c++) r &= flush_done[c];
    return r;
  endfunction

  initial begin
    for (int c = 0; c < NCFG; c++) begin
      stall_cyc[c] = 0;
      max_run[c]   = 0;
      run[c]       = 0;
      inserts[c]   = 0;
    end
    cmd_valid = 0; cmd = '0; flush_req = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NCMD; n++) begin
      addr_t a;
      line_t nd;
      int ln;
      ln = $urandom % NLINES;
      a.row = 16'(1 + 2 * (ln / 8));
      a.col = 9'(ln % 8);
      nd = rline(($urandom % 2) ? 90 : 10);
      @(negedge clk);
      cmd_valid = 1;
      cmd = '{op: CMD_WRITE, bank: '0, addr: a, wdata: nd, odata: gold(a)};
      #1;
      while (!all_ready()) begin @(negedge clk); #1; end
      @(posedge clk);
      golden[a] = nd;
      #1 cmd_valid = 0;
      repeat (GAP - 1) @(posedge clk);
    end
    repeat (300) @(posedge clk);
    @(negedge clk); flush_req = 1;
    begin
      int t;
      t = 0;
      while (!all_done() && t < 2000) begin @(posedge clk); t++; end
    end
    chk(all_done(), "flush completes");
    foreach (golden[a])
      for (int c = 0; c < NCFG; c++)
        chk(pcm(c, a) == golden[a], "media holds the last written data after flush");
    @(negedge clk); flush_req = 0;
    chk(stall_cyc[0] == 0, "g8: AppLE search hidden in the write time");
    chk(stall_cyc[1] == 0, "g4: AppLE search hidden in the write time");
    chk(stall_cyc[2] > 0, "g1: comparing all 256 entries cannot be hidden");
    chk(max_run[2] <= 257 + 1, "g1: a stall never lasts longer than one full search");
    for (int c = 0; c < NCFG; c++) chk(inserts[c] > 0, "insertions happened");
    for (int c = 0; c < NCFG; c++)
      $display("group size %0d: inserts=%0d stall_cycles=%0d longest_stall=%0d",
               GS[c], inserts[c], stall_cyc[c], max_run[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

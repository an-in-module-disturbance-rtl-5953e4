// tb_imdb_apple: self-checking test of AppLE, the sampled victim search.
//
// A behavioural model of the main table's read port A (one-cycle synchronous read)
// is filled with random entries whose keys collide often (small counter values), with
// some slots invalid. For each search the test records every index AppLE reads,
// checks that read k falls in group k (one sample per group, groups in order), and
// computes the expected candidate independently: the sample with the smallest
// (valid, ZeroFlipCntr[MaxZFCIdx], RewriteCntr), the earlier sample on a tie. It
// also checks the search time: done rises NUM_GROUPS+1 = 33 clock edges after start.
// Some searches are restarted half-way to check that start aborts a running search.
module tb_imdb_apple;
  import imdb_pkg::*;
  localparam int N = 256, GS = 8, NG = N / GS;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, rd_valid;
  logic [7:0] cand, rd_idx, rd_idx_q;
  mt_entry_t rd_entry;
  int checks = 0, failures = 0;

  mt_entry_t m_ent [N];
  logic      m_val [N];

  imdb_apple dut (
    .clk, .rst_n, .start, .busy, .done, .cand_idx(cand),
    .rd_idx, .rd_entry, .rd_valid, .rd_idx_q
  );

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    rd_entry <= m_ent[rd_idx];
    rd_valid <= m_val[rd_idx];
    rd_idx_q <= rd_idx;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endfunction

  function automatic logic [17:0] key(input int i);
    return {m_val[i], m_ent[i].zfc[m_ent[i].maxi], m_ent[i].rwc};
  endfunction

  task automatic fill();
    for (int i = 0; i < N; i++) begin
      m_val[i] = ($urandom % 16) != 0;
      m_ent[i] = '0;
      m_ent[i].maxi = 3'($urandom);
      for (int w = 0; w < WORDS; w++) m_ent[i].zfc[w] = zfc_t'($urandom % 4);
      m_ent[i].rwc = 8'($urandom % 3);
    end
  endtask

  initial begin
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 300; s++) begin
      int best, samples [NG];
      bit abort;
      fill();
      abort = (s % 5) == 4;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;           // start seen at the edge in between (P0)
      if (abort) begin
        repeat (10) @(negedge clk);
        start = 1; @(negedge clk); start = 0;
      end
      for (int k = 0; k < NG; k++) begin
        chk(busy && !done, "busy while searching");
        samples[k] = rd_idx;
        chk(rd_idx / GS == k, "one sample per group, in order");
        @(negedge clk);
      end
      chk(!done, "not done one edge early");
      @(negedge clk);
      chk(done && !busy, "done 33 edges after start");
      best = samples[0];
      for (int k = 1; k < NG; k++) if (key(samples[k]) < key(best)) best = samples[k];
      chk(32'(cand) == best, "candidate is the smallest sample");
      if (32'(cand) != best)
        $display("  cand=%0d key=%h exp=%0d key=%h", cand, key(cand), best, key(best));
      repeat ($urandom % 4) @(negedge clk);
      chk(done && 32'(cand) == best, "candidate held after the search");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_imdb_barrier_buffer: self-checking test of the barrier buffer.
//
// Keeps a reference copy of every entry (valid, tag, RewriteCntr, data, FreqCntr)
// and applies one random operation per cycle, as the plane does: insert a new tag at
// the victim slot the buffer proposes, invalidate a slot, or update a hit (read hit:
// FreqCntr+1; write hit: FreqCntr+1 and new data). Every cycle it checks the CAM
// search, the proposed victim (lowest free slot, else lowest-numbered least
// frequently used entry) with its tag, RewriteCntr and data, the indexed read port
// and the occupancy. FreqCntr saturation at 255 is reached by a long run of hits.
module tb_imdb_barrier_buffer;
  import imdb_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  addr_t lk_addr, vic_tag, ins_tag, rd_tag;
  logic  lk_hit, upd_en, upd_write, vic_full, ins_en, inv_en, rd_valid;
  logic [2:0] lk_idx, vic_idx, ins_idx, inv_idx, rd_idx;
  line_t lk_data, upd_data, vic_data, ins_data, rd_data;
  logic [7:0] vic_rwc, ins_rwc;
  logic [3:0] occ;
  int checks = 0, failures = 0;

  imdb_barrier_buffer dut (
    .clk, .rst_n, .lk_addr, .lk_hit, .lk_idx, .lk_data,
    .upd_en, .upd_idx(lk_idx), .upd_write, .upd_data,
    .vic_full, .vic_idx, .vic_tag, .vic_rwc, .vic_data,
    .ins_en, .ins_idx, .ins_tag, .ins_rwc, .ins_data,
    .inv_en, .inv_idx, .rd_idx, .rd_valid, .rd_tag, .rd_data, .occupancy(occ)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit    m_val [N];
  addr_t m_tag [N];
  line_t m_dat [N];
  int    m_rwc [N], m_frq [N];

  function automatic void chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endfunction

  function automatic line_t rline();
    line_t l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  function automatic int find(input addr_t a);
    for (int i = 0; i < N; i++) if (m_val[i] && m_tag[i] == a) return i;
    return -1;
  endfunction

  initial begin
    int hi, ev, occ_e, minf;
    bit full_e, sat_seen;
    int hot_k = 0;
    sat_seen = 0;
    for (int i = 0; i < N; i++) begin m_val[i] = 0; m_frq[i] = 0; end
    {upd_en, ins_en, inv_en, upd_write} = '0;
    lk_addr = '0; ins_idx = 0; inv_idx = 0; rd_idx = 0; ins_tag = '0; ins_rwc = 0;
    upd_data = '0; ins_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      int op, hot;
      @(negedge clk);
      // long hit runs on one entry during part of the test to reach saturation
      hot = (cyc >= 4000 && cyc < 4600);
      if (cyc == 4000) for (int i = N - 1; i >= 0; i--) if (m_val[i]) hot_k = i;
      op = hot ? 9 : $urandom % 10;
      {upd_en, ins_en, inv_en} = '0;
      if (($urandom % 2) || hot) begin
        int k = hot ? hot_k : $urandom % N;
        lk_addr = m_tag[k];
      end else lk_addr = addr_t'($urandom);
      upd_write = 1'($urandom);
      upd_data = rline();
      rd_idx = 3'($urandom);
      inv_idx = 3'($urandom);
      #1;
      // expected victim
      full_e = 1; ev = 0;
      for (int i = N - 1; i >= 0; i--) if (!m_val[i]) begin full_e = 0; ev = i; end
      if (full_e) begin
        minf = m_frq[0]; ev = 0;
        for (int i = 1; i < N; i++) if (m_frq[i] < minf) begin minf = m_frq[i]; ev = i; end
      end
      hi = find(lk_addr);
      occ_e = 0;
      for (int i = 0; i < N; i++) occ_e += int'(m_val[i]);
      chk(lk_hit == (hi >= 0), "search hit");
      if (hi >= 0) chk(32'(lk_idx) == hi && lk_data == m_dat[hi], "search index and data");
      chk(vic_full == full_e && 32'(vic_idx) == ev, "victim choice");
      if (m_val[ev]) chk(vic_tag == m_tag[ev] && 32'(vic_rwc) == m_rwc[ev] && vic_data == m_dat[ev],
                         "victim contents");
      chk(rd_valid == m_val[rd_idx], "read port valid");
      if (m_val[rd_idx]) chk(rd_tag == m_tag[rd_idx] && rd_data == m_dat[rd_idx], "read port data");
      chk(32'(occ) == occ_e, "occupancy");
      if (cyc == 4600) chk(sat_seen, "a FreqCntr reached 255");
      if (hot && m_frq[hot_k] == 255) sat_seen = 1;
      // choose and apply one operation
      if (op < 3) begin
        do ins_tag = addr_t'($urandom); while (find(ins_tag) >= 0);
        ins_en = 1; ins_idx = vic_idx; ins_rwc = 8'($urandom); ins_data = rline();
        m_val[ev] = 1; m_tag[ev] = ins_tag; m_rwc[ev] = ins_rwc; m_dat[ev] = ins_data; m_frq[ev] = 0;
      end else if (op == 3) begin
        inv_en = 1;
        m_val[inv_idx] = 0;
      end else if (hi >= 0) begin
        upd_en = 1;
        if (m_frq[hi] < 255) m_frq[hi]++;
        if (upd_write) m_dat[hi] = upd_data;
      end
    end
    @(negedge clk);
    {upd_en, ins_en, inv_en} = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

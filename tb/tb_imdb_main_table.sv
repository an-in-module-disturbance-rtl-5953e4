// tb_imdb_main_table: self-checking test of the main table (CAM + dual-port SRAM).
//
// A reference copy of tags, valid bits and entries is kept here. Each cycle the test
// may write or invalidate a random entry through port B (tags kept unique, as the
// plane guarantees), searches the CAM for a stored or a random address, and reads
// random indices on ports B and A. The CAM result is checked in the same cycle, the
// port reads one cycle later (their latency), and the occupancy count every cycle.
module tb_imdb_main_table;
  import imdb_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  addr_t     lk_addr, wr_tag;
  logic      lk_hit, we, wr_valid, a_valid;
  logic [7:0] lk_idx, b_idx, wr_idx, a_idx, a_idx_q;
  mt_entry_t b_ent, a_ent, wr_ent;
  logic [8:0] occ;
  int checks = 0, failures = 0;

  imdb_main_table dut (
    .clk, .rst_n, .lk_addr, .lk_hit, .lk_idx, .b_rd_idx(b_idx), .b_rd_entry(b_ent),
    .b_we(we), .b_wr_idx(wr_idx), .b_wr_valid(wr_valid), .b_wr_tag(wr_tag), .b_wr_entry(wr_ent),
    .a_rd_idx(a_idx), .a_rd_entry(a_ent), .a_rd_valid(a_valid), .a_rd_idx_q(a_idx_q),
    .occupancy(occ)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t     m_tag [N];
  bit        written [N];
  logic      m_val [N];
  mt_entry_t m_ent [N];

  function automatic void chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endfunction

  function automatic bit tag_used(input addr_t t);
    for (int i = 0; i < N; i++) if (m_val[i] && m_tag[i] == t) return 1;
    return 0;
  endfunction

  initial begin
    int exp_occ, hit_i;
    bit exp_hit;
    logic [7:0] pb, pa;
    mt_entry_t eb, ea;
    bit va, kb;
    for (int i = 0; i < N; i++) begin m_val[i] = 0; written[i] = 0; end
    we = 0; wr_idx = 0; wr_valid = 0; wr_tag = '0; wr_ent = '0; lk_addr = '0; b_idx = 0; a_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int cyc = 0; cyc < 6000; cyc++) begin
      // drive at negedge
      we = ($urandom % 3) != 0;
      wr_idx = 8'($urandom);
      wr_valid = ($urandom % 8) != 0;
      do wr_tag = addr_t'($urandom); while (tag_used(wr_tag) && !(m_val[wr_idx] && m_tag[wr_idx] == wr_tag));
      wr_ent = mt_entry_t'({$urandom, $urandom, $urandom});
      if ($urandom % 2) begin
        int k = $urandom % N;
        lk_addr = m_tag[k];
      end else lk_addr = addr_t'($urandom);
      b_idx = 8'($urandom);
      a_idx = 8'($urandom);
      // CAM check (combinational, state before this cycle's write)
      #1;
      exp_hit = 0; hit_i = 0;
      for (int i = 0; i < N; i++) if (m_val[i] && m_tag[i] == lk_addr) begin exp_hit = 1; hit_i = i; end
      chk(lk_hit == exp_hit, "cam hit");
      if (exp_hit) chk(32'(lk_idx) == hit_i, "cam index");
      exp_occ = 0;
      for (int i = 0; i < N; i++) exp_occ += int'(m_val[i]);
      chk(32'(occ) == exp_occ, "occupancy");
      pb = b_idx; pa = a_idx; eb = m_ent[pb]; ea = m_ent[pa]; va = m_val[pa]; kb = written[pb];
      @(posedge clk);
      if (we) begin
        m_val[wr_idx] = wr_valid;
        m_tag[wr_idx] = wr_tag;
        m_ent[wr_idx] = wr_ent;
        written[wr_idx] = 1;
      end
      #1;
      if (kb) chk(b_ent == eb, "port B read data");
      chk(a_idx_q == pa, "port A index");
      chk(a_valid == va, "port A valid");
      if (va) chk(a_ent == ea, "port A read data");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_imdb_rewrite_gen: self-checking test of the rewrite generator.
//
// Triggers aggressor addresses (random rows, plus the first and the last row) under
// random back-pressure on the rewrite channel. For each trigger it expects, in order,
// a rewrite of row-1 and one of row+1 in the same column (only the one that exists
// at the array edges), the first offered the cycle after the trigger, and no
// trigger accepted while rewrites are pending.
module tb_imdb_rewrite_gen;
  import imdb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic trig_valid, trig_ready, rw_valid, rw_ready;
  addr_t trig_addr, rw_addr;
  int checks = 0, failures = 0;

  imdb_rewrite_gen dut (.clk, .rst_n, .trig_valid, .trig_ready, .trig_addr, .rw_valid, .rw_ready, .rw_addr);

  always #5 clk = ~clk;

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

  initial begin
    trig_valid = 0; rw_ready = 0; trig_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      addr_t a, exp [$];
      @(negedge clk);
      a = addr_t'($urandom);
      if (t % 7 == 1) a.row = '0;
      if (t % 7 == 2) a.row = '1;
      chk(trig_ready && !rw_valid, "idle before trigger");
      trig_valid = 1; trig_addr = a;
      if (a.row != '0) exp.push_back('{row: a.row - 1'b1, col: a.col});
      if (a.row != '1) exp.push_back('{row: a.row + 1'b1, col: a.col});
      @(negedge clk);
      trig_valid = 0; trig_addr = addr_t'($urandom);
      chk(rw_valid, "first rewrite offered the cycle after the trigger");
      while (exp.size() > 0) begin
        rw_ready = 1'($urandom);
        #1;
        chk(rw_valid && rw_addr == exp[0], "rewrite address and order");
        chk(!trig_ready, "no trigger taken while rewrites pending");
        if (rw_ready) void'(exp.pop_front());
        @(negedge clk);
      end
      rw_ready = 0;
      chk(!rw_valid, "exactly the expected rewrites");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

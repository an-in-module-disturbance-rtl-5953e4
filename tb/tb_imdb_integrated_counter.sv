// tb_imdb_integrated_counter: self-checking test of one integrated counter block.
//
// Drives random and corner-case 64-bit old/new word pairs and checks the count against
// a reference computed here with $countones: 1-to-0 flips (old=1, new=0) when
// newly_inserted is 0, zeros of the new word when it is 1. The block is
// combinational; a clock only paces the stimulus and the watchdog.
module tb_imdb_integrated_counter;
  logic        clk = 0;
  logic [63:0] old_w, new_w;
  logic        ins;
  logic [6:0]  count;
  int checks = 0, failures = 0;

  imdb_integrated_counter dut (.old_word(old_w), .new_word(new_w), .newly_inserted(ins), .count);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [63:0] o, input logic [63:0] n, input logic i);
    int exp;
    old_w = o; new_w = n; ins = i;
    @(posedge clk);
    exp = i ? 64 - $countones(n) : $countones(o & ~n);
    checks++;
    if (32'(count) != exp) begin
      failures++;
      $display("FAIL old=%h new=%h ins=%0d count=%0d exp=%0d", o, n, i, count, exp);
    end
  endtask

  initial begin
    check('1, '0, 0);            // all 64 bits flip
    check('0, '1, 0);            // only 0-to-1 flips: none counted
    check('1, '1, 0);
    check('0, '0, 0);
    check('1, '0, 1);            // inserted all-zero word: 64 zeros
    check('0, '1, 1);
    check(64'hFFFF_0000_FFFF_0000, 64'h0F0F_0F0F_0F0F_0F0F, 0);
    for (int k = 0; k < 2000; k++)
      check({$urandom, $urandom}, {$urandom, $urandom}, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_imdb_lfsr: checks the random-number source against an independent model.
//
// The model steps the same polynomial written as a Fibonacci-free bit-serial
// equation: the new state is the old state shifted right by one, with the bits
// at positions 15, 13, 12 and 10 inverted when the bit shifted out is 1
// (x^16+x^14+x^13+x^11+1 in Galois form). Checked: the reset value is SEED, the
// state follows the model on every enabled cycle, it holds while en is low, it
// never becomes zero, and it returns to SEED after exactly 65535 steps
// (maximal length), not earlier.
module tb_imdb_lfsr;
  localparam logic [15:0] SEED = 16'hACE1;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] rnd;
  int checks = 0, failures = 0;

  imdb_lfsr dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  function automatic logic [15:0] step(input logic [15:0] s);
    logic [15:0] n;
    n = s >> 1;
    if (s[0]) begin
      n[15] = ~n[15];
      n[13] = ~n[13];
      n[12] = ~n[12];
      n[10] = ~n[10];
    end
    return n;
  endfunction

  initial begin
    logic [15:0] model;
    int period;
    repeat (2) @(posedge clk);
    #1 chk(rnd == SEED, "reset value is SEED");
    @(negedge clk) rst_n = 1;
    model = SEED;
    period = 0;
    for (int n = 0; n < 90000 && period == 0; n++) begin
      @(negedge clk);
      en = (n % 5) != 3;
      @(posedge clk);
      #1;
      if (en) model = step(model);
      chk(rnd == model, "state follows the model");
      chk(rnd != 16'h0, "state never zero");
      if (en && rnd == SEED) period = 1;
    end
    chk(period == 1, "sequence returns to SEED");
    // count the enabled steps of one full period
    begin
      int steps;
      steps = 0;
      en = 1;
      do begin
        @(posedge clk);
        #1 steps++;
      end while (rnd != SEED && steps < 70000);
      chk(steps == 65535, "period is 65535");
      $display("period=%0d", steps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

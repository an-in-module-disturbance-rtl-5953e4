// imdb_integrated_counter: one integrated counter block (one 64-bit word of a line).
//
// What it does: for a write to a tracked address it counts the 1-to-0 bit flips
// between the old word (read by the pre-write read) and the new word; for a line
// that is being newly inserted into the main table it instead counts the zeros of
// the new word, which seed the ZeroFlipCntr as "prior knowledge".
//
// How: a per-bit flip vector is formed that is 0 exactly where old=1 and new=0,
// a 2:1 multiplexer selects it or the raw new word (select = newly_inserted), and a
// "bit-0 counter" counts the zeros of the selected 64 bits. This is the structure of
// the published counter block. The published block labels the count output 6 bits
// wide; a 64-bit word can have 64 zeros, so this design makes the output 7 bits
// (0..64) to stay exact.
//
// Interface: purely combinational. old_word/new_word 64 bits, newly_inserted 1 bit,
// count 7 bits. Eight of these run in parallel, one per 64-bit word of a 64B line.
module imdb_integrated_counter
  import imdb_pkg::*;
#(
  parameter int unsigned W     = WORD_W,
  parameter int unsigned CW    = $clog2(W + 1)
) (
  input  logic [W-1:0]  old_word,
  input  logic [W-1:0]  new_word,
  input  logic          newly_inserted,
  output logic [CW-1:0] count
);
  logic [W-1:0] flip_n;   // 0 where a 1-to-0 flip happens
  logic [W-1:0] sel;

  assign flip_n = ~old_word | new_word;
  assign sel    = newly_inserted ? new_word : flip_n;

  // Bit-0 counter: number of zeros in sel.
  always_comb begin
    count = '0;
    for (int i = 0; i < W; i++) count = count + CW'(!sel[i]);
  end
endmodule

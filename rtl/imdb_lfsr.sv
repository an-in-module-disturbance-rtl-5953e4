// imdb_lfsr: 16-bit Galois LFSR used as the random-number source of a plane.
//
// The barrier needs random numbers in two places: the probabilistic insertion of a
// missed address into the main table (probability 1/128) and AppLE's choice of one
// sampled entry per group. The paper does not say how these numbers are made; this
// design uses a maximal-length 16-bit Galois LFSR (taps x^16+x^14+x^13+x^11+1,
// period 65535). Its state advances by one step in every cycle en is high. SEED must
// be non-zero. Output: the current 16-bit state.
module imdb_lfsr #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] rnd
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= {1'b0, rnd[15:1]} ^ (rnd[0] ? 16'hB400 : 16'h0000);
  end
endmodule

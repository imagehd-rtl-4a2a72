// lfsr32 -- 32-bit linear feedback shift register, the random source of the
// merge unit (centroid sampling) and of the learning unit (tie breaking when
// two binary HVs are bundled).
//
// Galois form of the maximal-length polynomial x^32 + x^22 + x^2 + x + 1:
// when the bit shifted out is 1 the state is XORed with 0x80200003. It steps
// once per cycle while en is high, never reaches the all-zero state from a
// non-zero seed and repeats after 2^32 - 1 steps. rnd is the current state.
// The paper gives the 32-bit width and the use; the polynomial and seed are
// this design's choice.
module lfsr32 #(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= (SEED == 32'd0) ? 32'd1 : SEED;
    else if (en) rnd <= rnd[0] ? ((rnd >> 1) ^ 32'h8020_0003) : (rnd >> 1);
  end
endmodule

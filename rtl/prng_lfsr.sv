// prng_lfsr: pseudo-random number source for the moving-target response.
//
// A 32-bit Galois LFSR with the maximal-length polynomial
// x^32 + x^22 + x^2 + x + 1 advances one step per cycle in which next is high
// and presents its state on rnd. seed_load loads a new non-zero seed (a zero
// seed is replaced by 1, since the all-zero state would lock the LFSR). The
// described design only asks for a seeded one-time PRNG; the LFSR and its
// polynomial are this design's choice.
//
// Timing: rnd changes on the clock edge after next or seed_load.
module prng_lfsr #(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        next,
  output logic [31:0] rnd
);
  localparam logic [31:0] POLY = 32'h8020_0003;

  always_ff @(posedge clk) begin
    if (rst)            rnd <= (SEED == '0) ? 32'd1 : SEED;
    else if (seed_load) rnd <= (seed == '0) ? 32'd1 : seed;
    else if (next)      rnd <= rnd[0] ? ((rnd >> 1) ^ POLY) : (rnd >> 1);
  end
endmodule

// pr_rng: Parisi-Rapuano pseudo-random generator producing NOUT 32-bit numbers
// per clock.
//
// The generator keeps a wheel of 62 32-bit words I(k-62)..I(k-1). Each new word
// is I(k) = I(k-24) + I(k-55) (mod 2^32) and the number delivered is
// r(k) = I(k) xor I(k-61): one addition and one XOR per number. To deliver NOUT
// numbers in one clock the recurrence is unrolled into a combinational cascade:
// numbers past the 24th of a clock depend on words produced earlier in the same
// clock. The 62 newest words become the next state.
//
// Interface: when `en` is high, `rnd[n]` (n = 0..NOUT-1, in sequence order) is
// consumed and the wheel advances by NOUT at the clock edge. `rnd` is valid
// combinationally from the current state. Seeds are loaded one register at a
// time through `seed_we/seed_idx/seed_data` (index 0 is the oldest word). There
// is no reset: the wheel must be seeded before use, as on the original machine
// where the host supplies the seeds.
//
// Follows the paper: 32-bit words, 62 seed registers, one sum and one XOR per
// number, 80 numbers per clock per generator. The lags 24/55/61 are the
// standard ones of this generator (not stated in the text).
module pr_rng
  import janus_pkg::*;
#(
  parameter int unsigned NOUT = 80
) (
  input  logic                         clk,
  input  logic                         en,
  input  logic                         seed_we,
  input  logic [5:0]                   seed_idx,
  input  logic [RAND_W-1:0]            seed_data,
  output logic [NOUT-1:0][RAND_W-1:0]  rnd
);

  logic [RAND_W-1:0] wheel [PR_LEN];
  logic [RAND_W-1:0] ext   [PR_LEN + NOUT];

  always_comb begin
    for (int i = 0; i < int'(PR_LEN); i++) ext[i] = wheel[i];
    for (int n = 0; n < int'(NOUT); n++) begin
      ext[PR_LEN + n] = ext[PR_LEN + n - PR_A] + ext[PR_LEN + n - PR_B];
      rnd[n]          = ext[PR_LEN + n] ^ ext[PR_LEN + n - PR_C];
    end
  end

  always_ff @(posedge clk) begin
    if (seed_we) begin
      wheel[seed_idx] <= seed_data;
    end else if (en) begin
      for (int i = 0; i < int'(PR_LEN); i++) wheel[i] <= ext[NOUT + i];
    end
  end

endmodule

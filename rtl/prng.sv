// prng: source of fresh initialisation vectors for initBB.
//
// A 128-bit xorshift generator (state words x, y, z, w). `iv` shows 80 bits of
// the current state, {y[15:0], z, w}; `next` advances the state by one
// xorshift step once the IV has been used. seed_valid XORs an external entropy
// word into the state (a zero result is replaced by the reset constant so the
// generator cannot stall at zero). The architecture only names a PRNG fed by a
// secure random source; the xorshift construction is this design's simple stand-in
// and is not cryptographically strong.
// Timing: iv changes the cycle after next or seed_valid.
module prng
  import polen_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              seed_valid,
  input  logic [SEED_W-1:0] seed,
  input  logic              next,
  output logic [IV_W-1:0]   iv
);

  localparam logic [SEED_W-1:0] RESET_STATE = 128'h3c6ef372_a54ff53a_510e527f_9b05688c;

  logic [SEED_W-1:0] s_q, s_step, s_d;

  // xorshift128: t = x ^ (x << 11); x,y,z <- y,z,w; w <- w ^ (w >> 19) ^ t ^ (t >> 8)
  always_comb begin
    logic [31:0] x, y, z, w, t;
    {x, y, z, w} = s_q;
    t      = x ^ (x << 11);
    s_step = {y, z, w, w ^ (w >> 19) ^ t ^ (t >> 8)};
  end

  always_comb begin
    s_d = s_q;
    if (next)       s_d = s_step;
    if (seed_valid) s_d = s_d ^ seed;
    if (s_d == '0)  s_d = RESET_STATE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s_q <= RESET_STATE;
    else        s_q <= s_d;
  end

  assign iv = {s_q[79:64], s_q[63:32], s_q[31:0]};

endmodule

// egc_key_schedule -- on-the-fly round-key generator of EGC128.
//
// The 128-bit master key splits as K = K_high || K_low. On `load` the LFSR is seeded with K_high
// (1 if K_high is zero) and K_low is captured in a 64-bit register. The round key for the round
// number presented on `round_idx` is the three-way XOR RK_r = K_low ^ S_r ^ RC_r, formed
// combinationally from the current LFSR state S_r, so no round key is ever stored. `fwd` moves
// the LFSR from S_r to S_r+1 (encryption order), `bwd` from S_r+1 back to S_r (decryption
// order). The caller must keep `round_idx` in step with the LFSR position. The split, the LFSR and
// the XOR follow the specification; the K_low register and the fwd/bwd controls are this design's
// choice for a core whose key input need not stay stable during a block.
module egc_key_schedule
  import egc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  key_t       key,
  input  logic       fwd,
  input  logic       bwd,
  input  round_idx_t round_idx,
  output half_t      rk
);

  half_t k_low_q;
  half_t s;
  half_t rc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    k_low_q <= '0;
    else if (load) k_low_q <= key[HALF_BITS-1:0];
  end

  egc_lfsr64 u_lfsr (
    .clk  (clk),
    .rst_n(rst_n),
    .load (load),
    .seed (key[KEY_BITS-1:HALF_BITS]),
    .fwd  (fwd),
    .bwd  (bwd),
    .state(s)
  );

  egc_round_const u_rc (
    .round_idx(round_idx),
    .rc       (rc)
  );

  always_comb rk = k_low_q ^ s ^ rc;

endmodule

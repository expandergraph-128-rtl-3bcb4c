// egc_lfsr64 -- 64-bit Fibonacci LFSR of the EGC128 key schedule, steppable in both directions.
//
// Forward step (the specification's update): S' = (S >> 1) | ((s0 ^ s1 ^ s3 ^ s4) << 63), the
// feedback polynomial x^64 + x^4 + x^3 + x + 1 with taps {0,1,3,4}. Backward step (inverse of the
// forward step, used to replay round keys in reverse order for decryption): bits 1..63 of the
// previous state are bits 0..62 of the current one, and its bit 0 is recovered from the feedback
// equation, s0 = t63 ^ t0 ^ t2 ^ t3. Loading takes the seed K_high, or 1 when K_high is zero, so
// the register never holds the all-zero state (specification). Priority: load, then fwd, then
// bwd; with none asserted the register holds. The inverse step is named by the specification
// ("an inverse-LFSR step"); its equation is derived here. Synchronous, active-low async reset to 1.
module egc_lfsr64
  import egc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  half_t seed,
  input  logic  fwd,
  input  logic  bwd,
  output half_t state
);

  function automatic half_t step_fwd(half_t s);
    return {s[0] ^ s[1] ^ s[3] ^ s[4], s[63:1]};
  endfunction

  function automatic half_t step_bwd(half_t t);
    return {t[62:0], t[63] ^ t[0] ^ t[2] ^ t[3]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= half_t'(1);
    else if (load) state <= (seed == '0) ? half_t'(1) : seed;
    else if (fwd)  state <= step_fwd(state);
    else if (bwd)  state <= step_bwd(state);
  end

  // The register can only reach zero through a broken update.
  a_never_zero: assert property (@(posedge clk) disable iff (!rst_n) state != '0);

endmodule

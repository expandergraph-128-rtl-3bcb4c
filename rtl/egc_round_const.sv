// egc_round_const -- round-constant table RC_r of the EGC128 key schedule.
//
// A 20-entry, 64-bit read-only table addressed by the round number r (0..19); out-of-range
// addresses read zero. The contents are the successive 64-bit words of pi's hexadecimal fraction,
// held in egc_pkg::ROUND_CONST (see there for how they relate to the values printed in the
// specification). Combinational: the constant for round r is available in the same cycle.
module egc_round_const
  import egc_pkg::*;
(
  input  round_idx_t round_idx,
  output half_t      rc
);

  always_comb begin
    rc = '0;
    if (round_idx < round_idx_t'(ROUNDS)) rc = ROUND_CONST[round_idx];
  end

endmodule

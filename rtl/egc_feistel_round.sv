// egc_feistel_round -- one balanced Feistel round of EGC128 (combinational).
//
// (L', R') = (R, L ^ F_core(R) ^ RK). The branch swap and the two XORs follow the
// specification's round diagram; F_core is egc_fcore. The same round serves decryption when the
// engine feeds it the swapped halves of the ciphertext and the round keys in reverse order.
// l_out is a plain wire from r_in: that is the branch swap itself, not an unused output.
module egc_feistel_round
  import egc_pkg::*;
(
  input  half_t l_in,
  input  half_t r_in,
  input  half_t rk,
  output half_t l_out,
  output half_t r_out
);

  half_t f_out;

  egc_fcore u_fcore (
    .x(r_in),
    .y(f_out)
  );

  always_comb begin
    l_out = r_in;
    r_out = l_in ^ f_out ^ rk;
  end

endmodule

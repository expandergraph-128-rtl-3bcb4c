// egc128_engine -- unified encryption/decryption core for the ExpanderGraph-128 block cipher.
//
// An iterative datapath: one 128-bit state register (L || R), one Feistel round (F_core plus the
// XOR network) evaluated once per clock, and an on-the-fly key schedule (64-bit LFSR, K_low
// register, round-constant table) that never stores round keys. A mode bit selects the
// direction. For decryption the ciphertext halves are loaded swapped, the round keys are replayed
// in reverse order with the inverse LFSR step, and the result is swapped back on output: by the
// Feistel structure this equals the specification's decryption algorithm without inverting F_core.
//
// Interface: assert `start` for one cycle in idle with `mode` (0 encrypt, 1 decrypt), `key` and
// `din` valid; they are captured on that edge and need not be held. `busy` is high while the block
// runs; `done` pulses for one cycle 49 clock edges after the accepting edge, together with the
// result on `dout`, which holds until the next block ends. A `start` while busy is ignored; one
// held through the last cycle of a block is accepted there, so back-to-back blocks complete every
// 49 cycles (261 Mbit/s at 100 MHz).
// Bit 0 of every word is its least significant bit; the plaintext is P = L_0 || R_0 with L_0 in
// bits 127:64. Single clock, active-low asynchronous reset.
//
// The unified engine, its shared single F_core, the inverse-LFSR decryption and the 49-cycle
// latency follow the specification; the handshake, the swap-based decryption and the register
// for `dout` are this design's choices.
module egc128_engine
  import egc_pkg::*;
#(
  parameter int unsigned SETUP_CYCLES = 28
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   mode,
  input  key_t   key,
  input  block_t din,
  output logic   busy,
  output logic   done,
  output block_t dout
);

  function automatic block_t swap_halves(block_t b);
    return {b[HALF_BITS-1:0], b[BLOCK_BITS-1:HALF_BITS]};
  endfunction

  logic       load, ks_fwd, ks_bwd, round_en, finalize;
  mode_e      mode_q;
  round_idx_t round_idx;
  half_t      rk, l_next, r_next;
  block_t     state_q;

  egc_controller #(
    .NROUNDS     (ROUNDS),
    .SETUP_CYCLES(SETUP_CYCLES)
  ) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .mode_in  (mode_e'(mode)),
    .load     (load),
    .mode     (mode_q),
    .ks_fwd   (ks_fwd),
    .ks_bwd   (ks_bwd),
    .round_en (round_en),
    .round_idx(round_idx),
    .finalize (finalize),
    .busy     (busy),
    .done     (done)
  );

  egc_key_schedule u_ks (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (load),
    .key      (key),
    .fwd      (ks_fwd),
    .bwd      (ks_bwd),
    .round_idx(round_idx),
    .rk       (rk)
  );

  egc_feistel_round u_round (
    .l_in (state_q[BLOCK_BITS-1:HALF_BITS]),
    .r_in (state_q[HALF_BITS-1:0]),
    .rk   (rk),
    .l_out(l_next),
    .r_out(r_next)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        state_q <= '0;
    else if (load)     state_q <= (mode_e'(mode) == MODE_DEC) ? swap_halves(din) : din;
    else if (round_en) state_q <= {l_next, r_next};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        dout <= '0;
    else if (finalize) dout <= (mode_q == MODE_DEC) ? swap_halves(state_q) : state_q;
  end

endmodule

// egc_pkg -- shared constants and types of the ExpanderGraph-128 (EGC128) cipher core.
//
// EGC128 is a 128-bit block cipher with a 128-bit key: a balanced Feistel network of 20 rounds
// whose round function F_core evaluates one 4-input Boolean function ("Rule-A") on every vertex
// of a 3-regular graph over the 64 bits of the right half. This package holds the numbers that
// the datapath modules share: block/half/key widths, the round count, Rule-A's truth table, the
// long-range neighbour offset, the encrypt/decrypt mode encoding and the 20 round constants.
//
// Round constants: RC_r is the r-th 64-bit word of the hexadecimal fraction of pi
// (pi = 3.243F6A8885A308D3...), i.e. hex digits 16r .. 16r+15 after the point. RC_0, RC_1, RC_2
// are the values printed by the cipher's specification. It elides RC_3..RC_18 and prints
// RC_19 = 0x3707344a40938220, which is not a pi word and does not reproduce the published test
// vectors; the 20-word rule below reproduces them, so it is used for every constant.
// The mode encoding (0 = encrypt, 1 = decrypt) is this design's own choice.
package egc_pkg;

  localparam int unsigned BLOCK_BITS = 128;
  localparam int unsigned HALF_BITS  = 64;
  localparam int unsigned KEY_BITS   = 128;
  localparam int unsigned ROUNDS     = 20;
  localparam int unsigned ROUND_IDX_W = 5;   // enough for round numbers 0..ROUNDS-1

  // Rule-A: f(x0,x1,x2,x3) = TT[{x3,x2,x1,x0}]
  //        = 1 ^ x2 ^ x0x2 ^ x1x2 ^ x1x3 ^ x0x2x3
  localparam logic [15:0] RULE_A_TT = 16'h036F;

  // Graph offsets: vertex i reads i-1, i+1 and i+FAR_OFFSET (all mod 64).
  localparam int unsigned FAR_OFFSET = 16;

  typedef logic [HALF_BITS-1:0]  half_t;
  typedef logic [BLOCK_BITS-1:0] block_t;
  typedef logic [KEY_BITS-1:0]   key_t;
  typedef logic [ROUND_IDX_W-1:0] round_idx_t;

  typedef enum logic {
    MODE_ENC = 1'b0,
    MODE_DEC = 1'b1
  } mode_e;

  // RC_r = hex digits 16r..16r+15 of the fractional part of pi.
  localparam half_t ROUND_CONST [ROUNDS] = '{
    64'h243F6A8885A308D3, 64'h13198A2E03707344, 64'hA4093822299F31D0, 64'h082EFA98EC4E6C89,
    64'h452821E638D01377, 64'hBE5466CF34E90C6C, 64'hC0AC29B7C97C50DD, 64'h3F84D5B5B5470917,
    64'h9216D5D98979FB1B, 64'hD1310BA698DFB5AC, 64'h2FFD72DBD01ADFB7, 64'hB8E1AFED6A267E96,
    64'hBA7C9045F12C7F99, 64'h24A19947B3916CF7, 64'h0801F2E2858EFC16, 64'h636920D871574E69,
    64'hA458FEA3F4933D7E, 64'h0D95748F728EB658, 64'h718BCD5882154AEE, 64'h7B54A41DC25A59B5
  };

endpackage

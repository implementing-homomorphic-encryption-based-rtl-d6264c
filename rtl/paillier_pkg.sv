// paillier_pkg: types and constants shared by the encrypted-control datapath.
//
// All Montgomery arithmetic in the design uses 16-bit words and one common
// radix R = 2^(16*(w+1)), where w is the number of 16-bit words needed to
// hold the largest modulus, N^2 + 2.  For a KEY_BITS-bit public key N this is
// w = KEY_BITS/8 (because N^2 + 2 < 2^(2*KEY_BITS)), so every operand register
// is 16*(w+1) bits wide.  Three moduli are ever used (N^2 for ciphertexts,
// N^2 + 2 for the exact division by N inside decryption, and N for the final
// multiplication by mu); mod_sel_t picks one of them.
//
// The default key length of 256 bits is the configuration the experiment
// uses; the word size of 16 bits is the one of the modified CIOS multiplier.
package paillier_pkg;

  localparam int unsigned WORD_BITS        = 16;   // CIOS word size
  localparam int unsigned DEFAULT_KEY_BITS = 256;  // Paillier key length
  localparam int unsigned DEFAULT_NPRIME   = 32;   // n': plaintext ring Z_2^n'
  localparam int unsigned DEFAULT_MFRAC    = 7;    // m: fractional bits

  // Number of 16-bit words w such that N^2 + 2 < 2^(16 w).
  function automatic int unsigned words_for_key(int unsigned key_bits);
    return (2 * key_bits + WORD_BITS - 1) / WORD_BITS;
  endfunction

  // Width of every Montgomery operand: 16 (w + 1) bits, i.e. log2(R).
  function automatic int unsigned opw_for_key(int unsigned key_bits);
    return WORD_BITS * (words_for_key(key_bits) + 1);
  endfunction

  // Modulus selector of the Montgomery multipliers.
  typedef enum logic [1:0] {
    MOD_N2   = 2'd0,   // N^2      : ciphertext arithmetic
    MOD_N2P2 = 2'd1,   // N^2 + 2  : exact division by N in decryption
    MOD_N    = 2'd2    // N        : multiplication by mu in decryption
  } mod_sel_t;

  localparam int unsigned NUM_MODS = 3;

  // Task kinds accepted by a multiplication-and-exponentiation resource.
  typedef enum logic {
    OP_MULT = 1'b0,    // one Montgomery product a * b * R^-1 mod M
    OP_EXP  = 1'b1     // Montgomery power a^e (Montgomery form, mod N^2)
  } op_t;

endpackage

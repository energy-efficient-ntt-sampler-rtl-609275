// sampntt_pkg -- constants and types shared by the Modified SampleNTT sampler.
//
// The sampler turns a byte stream from the Kyber XOF (SHAKE-128) into the
// n = 256 coefficients of one polynomial of R_q, q = 3329, by rejection
// sampling of 12-bit values. Kyber fixes q, n and the 12-bit candidate width;
// the 336-byte seed buffer depth is the figure given for the modified sampler
// (two SHAKE-128 squeezes of 168 bytes).
package sampntt_pkg;

  localparam int unsigned KYBER_Q     = 3329;  // modulus q
  localparam int unsigned KYBER_N     = 256;   // coefficients per polynomial
  localparam int unsigned COEFF_W     = 12;    // candidate width (mask 4095)
  localparam int unsigned BYTE_W      = 8;
  localparam int unsigned SEED_DEPTH  = 336;   // bytes held by the seed buffer

  typedef logic [BYTE_W-1:0]  byte_t;
  typedef logic [COEFF_W-1:0] coeff_t;

  // Select which candidate of a (d1, d2) pair the rejecter is looking at.
  typedef enum logic {SEL_D1 = 1'b0, SEL_D2 = 1'b1} dsel_e;

endpackage

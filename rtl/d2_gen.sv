// d2_gen -- D2 Generator of the Modified SampleNTT.
//
// What it does: forms the second 12-bit candidate of a pair from the same two
// bytes with their roles swapped,
//   d2 = (beta_i+1 | 256 * beta_i) & 4095,
// i.e. beta_i+1 in bits 7:0 and the low nibble of beta_i in bits 11:8.
//
// How it works: as in the paper, the multiplication by 256 is a left shift
// of beta_i by 8 and the mask with 4095 a truncation to 12 bits; the result is
// registered when en (D2_Gen_en from CTRL) is high and held otherwise, so it
// stays valid for the rejecter's second cycle on the pair.
//
// Interface and timing: one cycle from en to a valid d2; synchronous
// active-high rst clears d2 (reset behaviour is not given by the paper).
module d2_gen
  import sampntt_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   en,
  input  byte_t  beta_i,
  input  byte_t  beta_i1,
  output coeff_t d2
);

  coeff_t word;   // (lo | hi << 8) truncated to 12 bits, i.e. & 4095
  assign word = COEFF_W'({beta_i, BYTE_W'(0)} | {BYTE_W'(0), beta_i1});

  always_ff @(posedge clk) begin
    if (rst)     d2 <= '0;
    else if (en) d2 <= word;
  end

endmodule

// d1_gen -- D1 Generator of the Modified SampleNTT.
//
// What it does: forms the first 12-bit candidate of a pair,
//   d1 = (beta_i | 256 * beta_i+1) & 4095,
// i.e. beta_i in bits 7:0 and the low nibble of beta_i+1 in bits 11:8.
//
// How it works: following the paper, the multiplication by 256 is a left
// shift of beta_i+1 by 8 and the mask with 4095 is a truncation to 12 bits, so
// the function is pure wiring; the result is registered when en (D1_Gen_en
// from CTRL) is high and held otherwise.
//
// Interface and timing: one cycle from en to a valid d1; synchronous
// active-high rst clears d1 (reset behaviour is not given by the paper).
module d1_gen
  import sampntt_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   en,
  input  byte_t  beta_i,
  input  byte_t  beta_i1,
  output coeff_t d1
);

  coeff_t word;   // (lo | hi << 8) truncated to 12 bits, i.e. & 4095
  assign word = COEFF_W'({beta_i1, BYTE_W'(0)} | {BYTE_W'(0), beta_i});

  always_ff @(posedge clk) begin
    if (rst)     d1 <= '0;
    else if (en) d1 <= word;
  end

endmodule

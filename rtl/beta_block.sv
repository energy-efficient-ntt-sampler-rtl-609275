// beta_block -- the beta_i and beta_i+1 byte latches of the sampler.
//
// What it does: holds one byte of the stream B for the D1/D2 generators. The
// sampler instantiates it twice: the beta_i block takes bytes 0, 2, 4, ... and
// the beta_i+1 block bytes 1, 3, 5, ..., each when its enable from CTRL is
// high (the paper's beta_i_en and beta_i+1_en).
//
// How it works and timing: an 8-bit register loaded from din on the clock
// edge where en is high, held otherwise; the value is visible from the next
// cycle. rst (synchronous, active high) clears it to 0; the paper does not say
// how the blocks are reset, and the clear keeps a two-state simulation
// deterministic.
module beta_block
  import sampntt_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  byte_t din,
  output byte_t q
);

  always_ff @(posedge clk) begin
    if (rst)     q <= '0;
    else if (en) q <= din;
  end

endmodule

// rejecter -- Rejecter Block of the Modified SampleNTT.
//
// What it does: the rejection step of the sampler. Each candidate below
// q = 3329 becomes the next coefficient a_j of the polynomial; a candidate of
// q or more is dropped. After n = 256 coefficients the block stops and raises
// done, so a d2 that follows the 256th coefficient is dropped, as the
// algorithm's "d2 < q and j < n" requires.
//
// How it works: when rej_en is high the candidate chosen by sel (d1 in the
// first cycle of a pair, d2 in the second) is compared with Q; if it is smaller
// and fewer than N coefficients have been emitted, it is registered on coeff
// with a one-cycle valid strobe, and the coefficient count j is incremented.
// clr (from CTRL at the start of a polynomial) zeroes j.
//
// Interface and timing: one coefficient per clock at most; coeff/valid appear
// the cycle after the candidate is examined; index gives j of the coefficient
// on coeff. The paper gives the comparison with q and the valid and a-hat
// outputs; the coefficient counter, index and done are this design's own, the
// paper leaving open where j is counted.
module rejecter
  import sampntt_pkg::*;
#(
  parameter int unsigned Q = KYBER_Q,
  parameter int unsigned N = KYBER_N
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   clr,
  input  logic                   rej_en,
  input  dsel_e                  sel,
  input  coeff_t                 d1,
  input  coeff_t                 d2,
  output coeff_t                 coeff,
  output logic                   valid,
  output logic [$clog2(N+1)-1:0] index,
  output logic                   done
);

  localparam int unsigned JW = $clog2(N + 1);

  logic [JW-1:0] j;
  coeff_t        cand;
  logic          accept;

  assign cand   = (sel == SEL_D2) ? d2 : d1;
  assign accept = rej_en && !done && (cand < COEFF_W'(Q));
  assign done   = (j == JW'(N));

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      j     <= '0;
      valid <= 1'b0;
      coeff <= '0;
      index <= '0;
    end else begin
      valid <= accept;
      if (accept) begin
        coeff <= cand;
        index <= j;
        j     <= j + 1'b1;
      end
    end
  end

  a_coeff_in_range : assert property (@(posedge clk) disable iff (rst) valid |-> coeff < COEFF_W'(Q))
    else $error("rejecter: coefficient out of range");

endmodule

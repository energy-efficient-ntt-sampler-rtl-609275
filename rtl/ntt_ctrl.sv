// ntt_ctrl -- CTRL, the sequencer of the Modified SampleNTT datapath.
//
// What it does: starts and stops one polynomial, and times the enables of the
// datapath: beta_i_en, beta_i1_en (the beta_i+1 block), d1_gen_en, d2_gen_en
// and rej_en, plus en and clr for SeedMem_ctrl. Because the modified sampler
// takes two bytes per (d1, d2) pair, there is no beta_i+2 block to control.
//
// How it works: a three-state machine (IDLE, RUN, FLUSH). The rejecter's
// coefficient count is held at zero in IDLE; start enters RUN, where SeedMem_ctrl is
// enabled. A phase bit follows the byte stream: each byte that arrives
// (byte_valid) goes to the beta_i block if it is the first of a pair and to the
// beta_i+1 block if it is the second. The cycle after the second byte is
// latched, both generators are enabled together; the rejecter then sees d1 in
// the next cycle and d2 in the cycle after (rej_sel). With a steady byte stream
// this gives the paper's timing: addr 0 read in cycle 0, beta0 on B in cycle 1,
// beta_i loaded in cycle 2, beta_i+1 in cycle 3, d1/d2 registered in cycle 4,
// the rejecter busy on d1 in cycle 4 and on d2 in cycle 5, with no idle cycle
// between pairs. When the rejecter reports the 256th coefficient (rej_done) the
// machine spends one cycle in FLUSH, which clears the seed buffer of the bytes
// left over from this polynomial, pulses done and returns to IDLE.
//
// Interface and timing: clk, synchronous active-high rst. beta_i_en and
// beta_i1_en follow byte_valid in the same cycle; every other output is a
// register or decoded from registers only. The paper gives
// which enables CTRL produces and the timing diagram; the state machine, the
// phase bit, the flush step and enabling d1_gen and d2_gen in the same cycle
// (the paper shows D2 one cycle after D1, which here is the rejecter's second
// cycle on the pair) are this design's choices.
module ntt_ctrl
  import sampntt_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  start,
  input  logic  byte_valid,   // SeedMem dout holds a new byte
  input  logic  rej_done,     // rejecter has emitted n coefficients
  // to SeedMem_ctrl
  output logic  smc_en,
  output logic  smc_clr,
  // datapath enables
  output logic  beta_i_en,
  output logic  beta_i1_en,
  output logic  d1_gen_en,
  output logic  d2_gen_en,
  output logic  rej_en,
  output dsel_e rej_sel,
  output logic  rej_clr,
  // status
  output logic  busy,
  output logic  done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;

  state_e state;
  logic   phase;       // 0: next byte is beta_i, 1: next byte is beta_i+1
  logic   gen_q;       // generators enabled last cycle -> rejecter on d1
  logic   gen_qq;      // ... two cycles ago            -> rejecter on d2

  wire running = (state == S_RUN);

  assign beta_i_en  = running && byte_valid && !phase;
  assign beta_i1_en = running && byte_valid &&  phase;
  assign smc_en     = running && !rej_done;
  assign busy       = (state != S_IDLE);
  assign rej_en     = running && (gen_q || gen_qq);
  assign rej_sel    = gen_qq ? SEL_D2 : SEL_D1;
  assign rej_clr    = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      phase     <= 1'b0;
      d1_gen_en <= 1'b0;
      d2_gen_en <= 1'b0;
      gen_q     <= 1'b0;
      gen_qq    <= 1'b0;
      smc_clr   <= 1'b1;
      done      <= 1'b0;
    end else begin
      smc_clr   <= 1'b0;
      done      <= 1'b0;
      d1_gen_en <= beta_i1_en;
      d2_gen_en <= beta_i1_en;
      gen_q     <= d1_gen_en && running;
      gen_qq    <= gen_q && running;
      if (byte_valid && running) phase <= ~phase;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          phase   <= 1'b0;
        end
        S_RUN: if (rej_done) begin
          state   <= S_FLUSH;
          smc_clr <= 1'b1;
        end
        S_FLUSH: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A pair needs two bytes, so the two rejecter slots of consecutive pairs
  // never overlap.
  a_no_overlap : assert property (@(posedge clk) disable iff (rst) !(gen_q && gen_qq))
    else $error("ntt_ctrl: rejecter slots overlap");

endmodule

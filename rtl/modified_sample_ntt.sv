// modified_sample_ntt -- the Modified SampleNTT sampler for Kyber (top level).
//
// What it does: turns the SHAKE-128 byte stream B = beta0, beta1, ... into the
// 256 coefficients of one polynomial of R_q (q = 3329) in the NTT domain, by
// rejection sampling. Each pair of bytes (beta_i, beta_i+1) yields two 12-bit
// candidates,
//   d1 = beta_i   | (beta_i+1 mod 16) << 8
//   d2 = beta_i+1 | (beta_i   mod 16) << 8,
// and each candidate below q becomes the next coefficient. Kyber's standard
// sampler needs three bytes per pair; the modified one needs two, so about
// 316 bytes (two 168-byte SHAKE-128 squeezes of 336 bytes in nearly all
// cases) instead of about 474 bytes per polynomial.
//
// How it works: the blocks of the paper's architecture are wired as in its
// block diagram. SHAKE-128 writes bytes into SeedMem (seed_mem, a dual-clock
// FIFO) through SeedMem_ctrl, which also reads one byte per sampler clock onto
// the bus B. CTRL (ntt_ctrl) steers even bytes into the beta_i block and odd
// bytes into the beta_i+1 block, then enables D1_Gen and D2_Gen together; the
// Rejecter examines d1 and d2 in two consecutive cycles and emits accepted
// ones on coeff with coeff_valid. One candidate is examined per clock with no
// idle cycle, so a polynomial takes about 316 sampler cycles once the buffer
// holds enough bytes; if the buffer runs dry the sampler stalls until
// SHAKE-128 delivers more.
//
// Interface and timing: clk is the sampler clock, clk_xof the SHAKE-128 clock
// (they may be the same clock). rst is synchronous to clk, active high. The
// XOF side is a valid/ready handshake in the clk_xof domain: a byte is taken
// on a clk_xof edge where xof_valid and xof_ready are both high. A one-cycle
// start pulse (accepted while busy is low) begins a polynomial; coefficient
// index j appears on coeff with coeff_valid for one cycle, in order
// j = 0..255; done pulses for one cycle after the last coefficient, at which
// point bytes left in the buffer are discarded. The bytes of the next
// polynomial's stream should only be offered after done. The handshake,
// start/done/busy and the discarding of left-over bytes are this design's
// choices; the paper gives the blocks, their connections and the dataflow
// timing.
module modified_sample_ntt
  import sampntt_pkg::*;
#(
  parameter int unsigned DEPTH = SEED_DEPTH,
  parameter int unsigned Q     = KYBER_Q,
  parameter int unsigned N     = KYBER_N
) (
  input  logic                   clk,
  input  logic                   rst,
  // SHAKE-128 byte stream (clk_xof domain)
  input  logic                   clk_xof,
  input  logic                   xof_valid,
  input  byte_t                  xof_byte,
  output logic                   xof_ready,
  // control
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // sampled polynomial
  output coeff_t                 coeff,
  output logic                   coeff_valid,
  output logic [$clog2(N+1)-1:0] coeff_index,
  // observation: bytes read from the seed buffer in this polynomial
  output logic [15:0]            bytes_read
);

  // SeedMem <-> SeedMem_ctrl
  logic  sm_rd_en, sm_wr_en, sm_rst, sm_full, sm_empty;
  byte_t b_bus;                       // the paper's bus B
  logic  byte_valid;

  // CTRL outputs
  logic  smc_en, smc_clr;
  logic  beta_i_en, beta_i1_en, d1_gen_en, d2_gen_en;
  logic  rej_en, rej_clr, rej_done;
  dsel_e rej_sel;

  // datapath
  byte_t  beta_i, beta_i1;
  coeff_t d1, d2;

  seed_mem #(.DEPTH(DEPTH), .W(BYTE_W)) u_seed_mem (
    .clk_wr (clk_xof),
    .clk_rd (clk),
    .rst    (sm_rst),
    .wr_en  (sm_wr_en),
    .din    (xof_byte),
    .rd_en  (sm_rd_en),
    .dout   (b_bus),
    .full   (sm_full),
    .empty  (sm_empty)
  );

  seed_mem_ctrl #(.AW(16)) u_seed_mem_ctrl (
    .clk        (clk),
    .rst        (rst),
    .en         (smc_en),
    .clr        (smc_clr),
    .empty      (sm_empty),
    .full       (sm_full),
    .xof_valid  (xof_valid),
    .xof_ready  (xof_ready),
    .rd_en      (sm_rd_en),
    .wr_en      (sm_wr_en),
    .mem_rst    (sm_rst),
    .byte_valid (byte_valid),
    .addr       (bytes_read)
  );

  ntt_ctrl u_ctrl (
    .clk        (clk),
    .rst        (rst),
    .start      (start),
    .byte_valid (byte_valid),
    .rej_done   (rej_done),
    .smc_en     (smc_en),
    .smc_clr    (smc_clr),
    .beta_i_en  (beta_i_en),
    .beta_i1_en (beta_i1_en),
    .d1_gen_en  (d1_gen_en),
    .d2_gen_en  (d2_gen_en),
    .rej_en     (rej_en),
    .rej_sel    (rej_sel),
    .rej_clr    (rej_clr),
    .busy       (busy),
    .done       (done)
  );

  beta_block u_beta_i  (.clk(clk), .rst(rst), .en(beta_i_en),  .din(b_bus), .q(beta_i));
  beta_block u_beta_i1 (.clk(clk), .rst(rst), .en(beta_i1_en), .din(b_bus), .q(beta_i1));

  d1_gen u_d1_gen (.clk(clk), .rst(rst), .en(d1_gen_en), .beta_i(beta_i), .beta_i1(beta_i1), .d1(d1));
  d2_gen u_d2_gen (.clk(clk), .rst(rst), .en(d2_gen_en), .beta_i(beta_i), .beta_i1(beta_i1), .d2(d2));

  rejecter #(.Q(Q), .N(N)) u_rejecter (
    .clk    (clk),
    .rst    (rst),
    .clr    (rej_clr),
    .rej_en (rej_en),
    .sel    (rej_sel),
    .d1     (d1),
    .d2     (d2),
    .coeff  (coeff),
    .valid  (coeff_valid),
    .index  (coeff_index),
    .done   (rej_done)
  );

endmodule

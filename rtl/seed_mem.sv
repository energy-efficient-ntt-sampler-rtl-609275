// seed_mem -- SeedMem, the dual-clock byte FIFO between SHAKE-128 and the sampler.
//
// What it does: buffers the XOF byte stream B = beta0, beta1, ... written on
// clk_wr (the SHAKE-128 clock) and hands it, in order, to the sampler that
// reads it on clk_rd. The default depth of 336 bytes is what the modified
// sampler needs for one polynomial in practice (two 168-byte squeezes).
//
// How it works: a DEPTH-entry byte array, written on clk_wr and read on
// clk_rd. Each side keeps a free-running CW-bit byte counter (CW chosen so that
// 2**CW > DEPTH) and a separate array index that wraps at DEPTH, so DEPTH need
// not be a power of two. The counters cross domains in Gray code through two
// flip-flops each; the fill level is the difference of the two counters modulo
// 2**CW. A write is taken when wr_en is high and the buffer is not full; a
// read when rd_en is high and it is not empty. Writes and reads that would
// overflow or underflow are ignored (and flagged by assertions).
//
// Interface and timing: the seven ports of the paper's SeedMem (clk_rd, clk_wr,
// rd_en, wr_en, rst, din, dout) plus two status flags, full (clk_wr domain)
// and empty (clk_rd domain), which the paper does not list and which this
// design adds so that the controller can pace the two sides. dout is
// registered: the byte appears one clk_rd cycle after the rd_en that read it,
// as in the paper's timing diagram (addr 0, then beta0 on B one cycle later).
// A write becomes visible to the reader 2-3 clk_rd cycles later. rst is an
// asynchronous clear of both sides (active high).
module seed_mem #(
  parameter int unsigned DEPTH = sampntt_pkg::SEED_DEPTH,
  parameter int unsigned W     = sampntt_pkg::BYTE_W
) (
  input  logic         clk_wr,
  input  logic         clk_rd,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] din,
  input  logic         rd_en,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty
);

  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef logic [CW-1:0] cnt_t;
  typedef logic [AW-1:0] idx_t;

  function automatic cnt_t bin2gray(input cnt_t b);
    return b ^ (b >> 1);
  endfunction

  function automatic cnt_t gray2bin(input cnt_t g);
    cnt_t b;
    b[CW-1] = g[CW-1];
    for (int i = CW - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  function automatic idx_t next_idx(input idx_t i);
    return (i == idx_t'(DEPTH - 1)) ? '0 : i + 1'b1;
  endfunction

  logic [W-1:0] mem [DEPTH];

  cnt_t wr_cnt, wr_gray, rd_gray_s1, rd_gray_s2;   // write-clock domain
  idx_t wr_idx;
  logic do_wr;
  cnt_t rd_cnt, rd_gray, wr_gray_s1, wr_gray_s2;   // read-clock domain
  idx_t rd_idx;
  logic do_rd;

  // ---------------- write side (clk_wr) ----------------

  assign full  = cnt_t'(wr_cnt - gray2bin(rd_gray_s2)) == cnt_t'(DEPTH);
  assign do_wr = wr_en && !full;

  always_ff @(posedge clk_wr or posedge rst) begin
    if (rst) begin
      wr_cnt     <= '0;
      wr_gray    <= '0;
      wr_idx     <= '0;
      rd_gray_s1 <= '0;
      rd_gray_s2 <= '0;
    end else begin
      rd_gray_s1 <= rd_gray;
      rd_gray_s2 <= rd_gray_s1;
      if (do_wr) begin
        wr_cnt  <= wr_cnt + 1'b1;
        wr_gray <= bin2gray(wr_cnt + 1'b1);
        wr_idx  <= next_idx(wr_idx);
      end
    end
  end

  always_ff @(posedge clk_wr) begin
    if (do_wr) mem[wr_idx] <= din;
  end

  // ---------------- read side (clk_rd) ----------------

  assign empty = gray2bin(wr_gray_s2) == rd_cnt;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk_rd or posedge rst) begin
    if (rst) begin
      rd_cnt     <= '0;
      rd_gray    <= '0;
      rd_idx     <= '0;
      wr_gray_s1 <= '0;
      wr_gray_s2 <= '0;
      dout       <= '0;
    end else begin
      wr_gray_s1 <= wr_gray;
      wr_gray_s2 <= wr_gray_s1;
      if (do_rd) begin
        rd_cnt  <= rd_cnt + 1'b1;
        rd_gray <= bin2gray(rd_cnt + 1'b1);
        rd_idx  <= next_idx(rd_idx);
        dout    <= mem[rd_idx];
      end
    end
  end

  // A correct controller never writes a full or reads an empty buffer. (While
  // rst holds the buffer clear, full is low and empty high, so the rules hold.)
  a_no_overflow : assert property (@(posedge clk_wr) wr_en |-> !full)
    else $error("seed_mem: write while full");
  a_no_underflow : assert property (@(posedge clk_rd) rd_en |-> !empty)
    else $error("seed_mem: read while empty");

endmodule

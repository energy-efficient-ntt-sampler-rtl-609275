// seed_mem_ctrl -- SeedMem_ctrl, the control side of the seed buffer.
//
// What it does: drives the rd_en, wr_en and rst pins of seed_mem. While the
// controller (ntt_ctrl) holds en high it reads one byte of B per clock, the
// paper's "reads bytes from SeedMem on each rising clock edge", and counts the
// read address (the addr row of the timing diagram: 0, 1, 2, ...).
//
// How it works: rd_en = en & ~empty, so a byte is read every cycle unless the
// buffer has run dry, in which case the sampler simply waits (a stall). The
// registered copy of rd_en, byte_valid, tells the controller that dout holds a
// fresh byte. addr restarts at 0 when en rises, so after a polynomial it
// holds the number of bytes that polynomial consumed. wr_en = xof_valid & ~full passes SHAKE-128 bytes into the buffer
// whenever there is room; xof_ready tells the producer that a byte is taken.
// mem_rst, the buffer's clear, is the registered OR of the global reset and the
// controller's clr request, so it is glitch-free when it reaches the buffer's
// asynchronous clear.
//
// Interface and timing: clk is the sampler (read) clock; rst is synchronous,
// active high. The paper names only rd_en, wr_en and rst as outputs; the
// valid/ready handshake with the XOF, the stall on empty, byte_valid and the
// address counter width are this design's choices. wr_en and xof_ready are
// combinational from full, which lives in the write-clock domain.
module seed_mem_ctrl #(
  parameter int unsigned AW    = 16   // width of the read-address counter
) (
  input  logic          clk,
  input  logic          rst,
  // from CTRL
  input  logic          en,
  input  logic          clr,
  // status from SeedMem
  input  logic          empty,
  input  logic          full,
  // XOF side (write domain of SeedMem)
  input  logic          xof_valid,
  output logic          xof_ready,
  // control of SeedMem
  output logic          rd_en,
  output logic          wr_en,
  output logic          mem_rst,
  // to CTRL / observation
  output logic          byte_valid,
  output logic [AW-1:0] addr
);

  logic en_q;

  assign rd_en     = en && !empty && !mem_rst;
  assign xof_ready = !full && !mem_rst;
  assign wr_en     = xof_valid && xof_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      mem_rst    <= 1'b1;
      byte_valid <= 1'b0;
      en_q       <= 1'b0;
      addr       <= '0;
    end else begin
      mem_rst    <= clr;
      byte_valid <= rd_en;
      en_q       <= en;
      if (en && !en_q) addr <= AW'(rd_en);      // first cycle of a polynomial
      else if (rd_en)  addr <= addr + 1'b1;
    end
  end

endmodule

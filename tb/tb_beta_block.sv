// tb_beta_block -- self-checking test of the beta_i / beta_i+1 byte latch.
// Drives random bytes with a random enable and checks after every clock that
// the register holds the last byte offered with en high (0 after reset).
`timescale 1ns/1ps
module tb_beta_block;
  import sampntt_pkg::*;

  logic  clk = 0, rst, en;
  byte_t din, q;
  always #5 clk = ~clk;

  beta_block dut (.clk, .rst, .en, .din, .q);

  int checks = 0, failures = 0;
  byte_t model;

  initial begin
    rst = 1; en = 0; din = 8'hA5;
    @(posedge clk); #1;
    checks++; if (q !== 8'h00) begin failures++; $display("FAIL: reset value %h", q); end
    rst = 0; model = 8'h00;
    for (int k = 0; k < 500; k++) begin
      en  = ($urandom_range(2) == 0);
      din = byte_t'($urandom);
      @(posedge clk);
      if (en) model = din;
      #1;
      checks++;
      if (q !== model) begin failures++; $display("FAIL: step %0d q=%h expected %h", k, q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_d2_gen -- self-checking test of the D2 generator.
// Reference: line 8 of the modified algorithm written arithmetically,
//   d2 = (beta_i+1 + 256 * (beta_i mod 16)) mod 4096,
// computed in integers rather than with shifts. All 65536 byte pairs are
// applied; random cycles with en low check that d2 holds.
`timescale 1ns/1ps
module tb_d2_gen;
  import sampntt_pkg::*;

  logic   clk = 0, rst, en;
  byte_t  bi, bi1;
  coeff_t d2;
  always #5 clk = ~clk;

  d2_gen dut (.clk, .rst, .en, .beta_i(bi), .beta_i1(bi1), .d2);

  int checks = 0, failures = 0;
  int model;

  initial begin
    rst = 1; en = 0; bi = 0; bi1 = 0;
    @(posedge clk); #1 rst = 0;
    model = 0;
    for (int a = 0; a < 256; a++) begin
      for (int b = 0; b < 256; b++) begin
        en  = ($urandom_range(7) != 0);
        bi  = byte_t'(a);
        bi1 = byte_t'(b);
        @(posedge clk);
        if (en) model = (b + 256 * (a % 16)) % 4096;
        #1;
        checks++;
        if (int'(d2) != model) begin
          failures++;
          if (failures < 10) $display("FAIL: bi=%0d bi1=%0d d2=%0d expected %0d", a, b, d2, model);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

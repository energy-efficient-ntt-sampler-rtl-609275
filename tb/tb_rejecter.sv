// tb_rejecter -- self-checking test of the Rejecter block.
// Feeds random (d1, d2) pairs in the sampler's pattern (rej_en high for two
// cycles, sel = D1 then D2, with random idle gaps), with values drawn near q
// as well as uniformly so that both sides of the comparison are hit
// (q - 1, q, q + 1, 4095, 0). A model keeps the accepted values until 256
// have been kept; the test checks every emitted coefficient and index, that
// done rises after exactly 256, that nothing is emitted after done, and that
// clr restarts the count. Two polynomials are run.
`timescale 1ns/1ps
module tb_rejecter;
  import sampntt_pkg::*;

  logic   clk = 0, rst, clr, rej_en, valid, done;
  dsel_e  sel;
  coeff_t d1, d2, coeff;
  logic [8:0] index;
  always #5 clk = ~clk;

  rejecter dut (.clk, .rst, .clr, .rej_en, .sel, .d1, .d2, .coeff, .valid, .index, .done);

  int checks = 0, failures = 0;
  coeff_t expq[$];
  int n_out = 0, n_rej = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s (n_out %0d)", $time, msg, n_out); end
  endtask

  function automatic coeff_t pick();
    case ($urandom_range(9))
      0: return coeff_t'(KYBER_Q - 1);
      1: return coeff_t'(KYBER_Q);
      2: return coeff_t'(KYBER_Q + 1);
      3: return 12'hFFF;
      4: return 12'h000;
      default: return coeff_t'($urandom);
    endcase
  endfunction

  always @(posedge clk) begin
    if (valid && !rst) begin
      coeff_t e;
      check(expq.size() > 0, "coefficient emitted that the model rejected");
      if (expq.size() > 0) begin
        e = expq.pop_front();
        check(coeff == e, $sformatf("coeff %0d expected %0d", coeff, e));
      end
      check(int'(index) == n_out, $sformatf("index %0d expected %0d", index, n_out));
      n_out++;
    end
  end

  task automatic run_poly();
    int kept = 0;
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    n_out = 0;
    check(!done, "done high after clr");
    while (kept < KYBER_N + 10) begin
      coeff_t a = pick(), b = pick();
      repeat ($urandom_range(2)) @(negedge clk);
      d1 = a; d2 = b; rej_en = 1; sel = SEL_D1;
      if (kept < KYBER_N) begin
        if (a < KYBER_Q) begin expq.push_back(a); kept++; end else n_rej++;
      end else kept++;
      @(negedge clk) sel = SEL_D2;
      if (kept < KYBER_N) begin
        if (b < KYBER_Q) begin expq.push_back(b); kept++; end else n_rej++;
      end else kept++;
      @(negedge clk) rej_en = 0;
    end
    repeat (3) @(negedge clk);
    check(n_out == KYBER_N, $sformatf("%0d coefficients emitted, expected %0d", n_out, KYBER_N));
    check(done, "done not high after 256 coefficients");
    check(expq.size() == 0, "model values left over");
  endtask

  initial begin
    rst = 1; clr = 0; rej_en = 0; sel = SEL_D1; d1 = 0; d2 = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    run_poly();
    run_poly();
    check(n_rej > 0, "no candidate rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

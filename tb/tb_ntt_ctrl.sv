// tb_ntt_ctrl -- self-checking test of CTRL, the sampler's sequencer.
// A cycle model of the intended behaviour runs next to the block: bytes
// alternate between the beta_i and beta_i+1 blocks, both generators are
// enabled the cycle after a beta_i+1 byte is latched, the rejecter sees d1 one
// cycle later and d2 the cycle after that, SeedMem_ctrl is enabled only while
// running, and after rej_done one FLUSH cycle clears the buffer before done.
// The byte stream has random gaps (stalls); three polynomials are run, the
// last one starting in the cycle after done. Every output is compared in
// every cycle.
`timescale 1ns/1ps
module tb_ntt_ctrl;
  import sampntt_pkg::*;

  logic  clk = 0, rst, start, byte_valid, rej_done;
  logic  smc_en, smc_clr, beta_i_en, beta_i1_en, d1_gen_en, d2_gen_en, rej_en, rej_clr, busy, done;
  dsel_e rej_sel;
  always #5 clk = ~clk;

  ntt_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // model state
  typedef enum int {I, R, F} st_e;
  st_e st;
  bit  ph, b1_d1, b1_d2, b1_d3, m_done, m_smc_clr;
  int  pairs;

  task automatic compare();
    bit run, e_bi, e_bi1;
    #1;
    run = (st == R);
    e_bi  = run && byte_valid && !ph;
    e_bi1 = run && byte_valid && ph;
    check(beta_i_en  == e_bi,  "beta_i_en");
    check(beta_i1_en == e_bi1, "beta_i1_en");
    check(d1_gen_en  == b1_d1, "d1_gen_en");
    check(d2_gen_en  == b1_d1, "d2_gen_en");
    check(rej_en == (run && (b1_d2 || b1_d3)), "rej_en");
    if (rej_en) check(rej_sel == (b1_d3 ? SEL_D2 : SEL_D1), "rej_sel");
    check(smc_en  == (run && !rej_done), "smc_en");
    check(smc_clr == m_smc_clr, "smc_clr");
    check(rej_clr == (st == I), "rej_clr");
    check(busy    == (st != I), "busy");
    check(done    == m_done, "done");
  endtask

  task automatic step();
    bit run = (st == R);
    bit e_bi1 = run && byte_valid && ph;
    @(posedge clk);
    b1_d3 = b1_d2 && run;
    b1_d2 = b1_d1 && run;
    b1_d1 = e_bi1;
    if (e_bi1) pairs++;
    if (run && byte_valid) ph = !ph;
    m_done = 0; m_smc_clr = 0;
    case (st)
      I: if (start) begin st = R; ph = 0; end
      R: if (rej_done) begin st = F; m_smc_clr = 1; end
      F: begin st = I; m_done = 1; end
    endcase
    @(negedge clk);
  endtask

  int n_stall = 0, n_polys = 0;

  task automatic run_poly(input int npairs, input int idle_before);
    start = 0; byte_valid = 0; rej_done = 0;
    repeat (idle_before) begin compare(); step(); end
    start = 1; compare(); step(); start = 0;
    pairs = 0;
    while (pairs < npairs) begin
      byte_valid = ($urandom_range(3) != 0);
      if (!byte_valid) n_stall++;
      compare(); step();
    end
    byte_valid = 0;
    repeat (3) begin compare(); step(); end
    rej_done = 1;                       // rejecter reports n coefficients
    compare(); step();
    compare(); step();                  // FLUSH
    rej_done = 0;
    compare(); step();                  // done pulse
    n_polys++;
  endtask

  initial begin
    rst = 1; start = 0; byte_valid = 0; rej_done = 0;
    @(negedge clk);
    @(negedge clk) rst = 0;
    st = I; ph = 0; b1_d1 = 0; b1_d2 = 0; b1_d3 = 0; m_done = 0; m_smc_clr = 1;
    run_poly(20, 3);
    run_poly(7, 1);
    run_poly(12, 0);
    check(n_stall > 0, "no stall cycle exercised");
    check(n_polys == 3, "not all polynomials ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

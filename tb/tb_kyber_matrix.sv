// tb_kyber_matrix -- workload test: sampling the public matrix A-hat of
// Kyber512, Kyber768 and Kyber1024 (k x k polynomials, k = 2, 3, 4, so 4, 9
// and 16 polynomials; 29 in all) with the sampler at its default parameters.
//
// For every polynomial a behavioural XOF, clocked at 3.264 ns against the
// sampler's 10 ns, streams fresh random bytes while the sampler runs (the
// SHAKE-128 and the sampler working in parallel), the sampler is started, and
// its 256 coefficients are checked against a software model of the modified
// algorithm on the bytes it accepted. The test reports, and checks against
// the paper's figures with a tolerance for the random input:
//   * bytes used per polynomial (paper: ~2523.8 bits = ~315.5 bytes), and
//   * sampler cycles from start to done per polynomial (paper: ~316),
// and how many polynomials fitted in 336 bytes (paper: 99.16 %).
// Random bytes stand in for SHAKE-128 output, which is outside this design.
`timescale 1ns/1ps
module tb_kyber_matrix;
  import sampntt_pkg::*;

  logic clk = 0, clk_xof = 0;
  always #5 clk = ~clk;
  always #1.632 clk_xof = ~clk_xof;

  logic   rst, start, busy, done;
  logic   xof_valid, xof_ready;
  byte_t  xof_byte;
  coeff_t coeff;
  logic   coeff_valid;
  logic [8:0]  coeff_index;
  logic [15:0] bytes_read;

  modified_sample_ntt dut (
    .clk, .rst, .clk_xof, .xof_valid, .xof_byte, .xof_ready,
    .start, .busy, .done, .coeff, .coeff_valid, .coeff_index, .bytes_read
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  byte_t stream[$];
  bit    xof_on = 0;
  always @(posedge clk_xof) begin
    if (xof_valid && xof_ready) stream.push_back(xof_byte);
    if (xof_on) begin
      if (!(xof_valid && !xof_ready)) begin
        xof_valid <= 1'b1;
        xof_byte  <= (xof_valid && xof_ready) ? byte_t'($urandom) : xof_byte;
      end
    end else xof_valid <= 1'b0;
  end

  coeff_t got[$];
  always @(posedge clk) if (coeff_valid) got.push_back(coeff);

  int total_bytes = 0, total_cycles = 0, n_poly = 0, n_fit = 0;

  task automatic sample_poly(input string tag);
    coeff_t exp_c[$];
    int i = 0, cycles = 0;
    stream.delete();
    got.delete();
    xof_on = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    xof_on = 0;
    while (exp_c.size() < KYBER_N && i + 1 < stream.size()) begin
      coeff_t a1 = {stream[i+1][3:0], stream[i]};
      coeff_t a2 = {stream[i][3:0], stream[i+1]};
      if (a1 < KYBER_Q) exp_c.push_back(a1);
      if (a2 < KYBER_Q && exp_c.size() < KYBER_N) exp_c.push_back(a2);
      i += 2;
    end
    check(got.size() == KYBER_N, {tag, ": wrong number of coefficients"});
    check(exp_c.size() == KYBER_N, {tag, ": reference ran out of bytes"});
    for (int k = 0; k < KYBER_N && k < got.size() && k < exp_c.size(); k++)
      check(got[k] == exp_c[k], $sformatf("%s: coeff %0d got %0d expected %0d", tag, k, got[k], exp_c[k]));
    total_bytes  += i;
    total_cycles += cycles;
    n_poly++;
    if (i <= SEED_DEPTH) n_fit++;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    rst = 1; start = 0; xof_valid = 0; xof_byte = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (4) @(negedge clk);
    for (int k = 2; k <= 4; k++) begin
      int b0, c0, p0;
      b0 = total_bytes; c0 = total_cycles; p0 = n_poly;
      for (int r = 0; r < k; r++)
        for (int c = 0; c < k; c++)
          sample_poly($sformatf("Kyber%0d A[%0d][%0d]", 256 * k, r, c));
      $display("Kyber%0d: %0d polynomials, %.1f bytes and %.1f cycles per polynomial",
               256 * k, n_poly - p0, real'(total_bytes - b0) / (n_poly - p0),
               real'(total_cycles - c0) / (n_poly - p0));
    end
    $display("overall: %0d polynomials, %.1f bytes (%.1f bits) and %.1f cycles each, %0d of them within 336 bytes",
             n_poly, real'(total_bytes) / n_poly, 8.0 * total_bytes / n_poly,
             real'(total_cycles) / n_poly, n_fit);
    check(n_poly == 29, "not all 29 polynomials sampled");
    check(real'(total_bytes) / n_poly > 305.0 && real'(total_bytes) / n_poly < 326.0,
          "average bytes per polynomial far from ~315.5");
    check(real'(total_cycles) / n_poly > 305.0 && real'(total_cycles) / n_poly < 340.0,
          "average cycles per polynomial far from ~316");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

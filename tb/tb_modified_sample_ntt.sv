// tb_modified_sample_ntt -- end-to-end test of the Modified SampleNTT sampler
// at its default parameters (q = 3329, n = 256, 336-byte seed buffer).
//
// A behavioural XOF in its own clock domain (3.264 ns, the SHAKE-128 clock of
// the FPGA build; the sampler runs at 10 ns) feeds random bytes through the
// valid/ready handshake and records every byte the sampler accepts. After each
// polynomial the 256 coefficients are compared with a software model of the
// modified algorithm run on the recorded stream:
//   d1 = b[i] | (b[i+1] & 15) << 8,  d2 = b[i+1] | (b[i] & 15) << 8,
//   keep each value below q until 256 are kept, i += 2.
// Polynomials are run in four modes, so that each mechanism of the design
// occurs and is counted:
//   PRELOAD  XOF fills the buffer before start (buffer-full back-pressure),
//            and the latency is checked exactly: with a full buffer the k-th
//            candidate is examined k cycles after the first read, the
//            coefficient appears 5 cycles after that read (paper's timing:
//            read, B, beta_i, beta_i+1, D1/D2, then the registered output).
//   SLOW     XOF slower than the sampler: the sampler stalls on an empty buffer.
//   LONG     a stream that starts with 0xFF bytes, so that more than 336 bytes
//            are needed and the buffer wraps while being refilled.
//   BACK2BACK  start right after done while leftover bytes are discarded.
// Also counted: rejected d1, rejected d2, and a d2 dropped because the 256th
// coefficient came from d1 of the same pair.
`timescale 1ns/1ps
module tb_modified_sample_ntt;
  import sampntt_pkg::*;

  localparam int NPOLY_PER_MODE = 3;
  localparam int LAT = 5;

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
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- XOF model (clk_xof domain) ----------------
  typedef enum int {M_PRELOAD, M_SLOW, M_LONG, M_BACK2BACK} mode_e;
  byte_t stream[$];       // bytes accepted by the sampler, in order
  bit    xof_on = 0;
  int    xof_rate = 100;  // percent of clk_xof cycles with a byte offered
  int    ff_prefix = 0;   // number of leading 0xFF bytes

  function automatic byte_t next_byte();
    if (stream.size() < ff_prefix) return 8'hFF;
    return byte_t'($urandom);
  endfunction

  always @(posedge clk_xof) begin
    if (xof_valid && xof_ready) stream.push_back(xof_byte);
    if (xof_on) begin
      if (!(xof_valid && !xof_ready)) begin           // hold an offered byte
        xof_valid <= ($urandom_range(99) < xof_rate);
        xof_byte  <= (xof_valid && xof_ready) ? next_byte() : xof_byte;
      end
    end else begin
      xof_valid <= 1'b0;
    end
  end

  // ---------------- output capture and mechanism counters ----------------
  coeff_t got[$];
  realtime t_start;       // clock edge that sampled start
  int last_valid_cyc;     // cycle (0 = first cycle after start) of last coeff
  int n_full = 0, n_stall = 0, n_wrap = 0, n_rej_d1 = 0, n_rej_d2 = 0,
      n_cutoff = 0, n_b2b = 0, n_flush = 0;

  always @(posedge clk) begin
    if (coeff_valid) begin
      got.push_back(coeff);
      last_valid_cyc = int'(($realtime - t_start) / 10.0) - 1;
      check(coeff_index == 9'(got.size() - 1), "coefficient index out of order");
    end
    if (!rst && dut.u_seed_mem.full) n_full++;
    if (!rst && dut.smc_en && dut.sm_empty && !dut.sm_rst) n_stall++;
  end

  // ---------------- reference model ----------------
  task automatic check_poly(input string tag, input bit check_latency);
    coeff_t exp_c[$];
    int i = 0, last_c = -1, need_bytes;
    bit cut = 0;
    while (exp_c.size() < KYBER_N) begin
      coeff_t a1, a2;
      if (i + 1 >= stream.size()) break;
      a1 = {stream[i+1][3:0], stream[i]};
      a2 = {stream[i][3:0], stream[i+1]};
      if (a1 < KYBER_Q) begin exp_c.push_back(a1); last_c = i; end
      else n_rej_d1++;
      if (exp_c.size() < KYBER_N) begin
        if (a2 < KYBER_Q) begin exp_c.push_back(a2); last_c = i + 1; end
        else n_rej_d2++;
      end else if (a2 < KYBER_Q) begin
        cut = 1;
      end
      i += 2;
    end
    need_bytes = i;
    if (cut) n_cutoff++;
    if (need_bytes > SEED_DEPTH) n_wrap++;
    check(exp_c.size() == KYBER_N, {tag, ": reference ran out of stream bytes"});
    check(got.size() == KYBER_N, $sformatf("%s: %0d coefficients instead of %0d", tag, got.size(), KYBER_N));
    for (int k = 0; k < KYBER_N && k < got.size() && k < exp_c.size(); k++)
      check(got[k] == exp_c[k], $sformatf("%s: coeff %0d got %0d expected %0d", tag, k, got[k], exp_c[k]));
    check(bytes_read >= 16'(need_bytes) && bytes_read <= 16'(need_bytes + 4),
          $sformatf("%s: read %0d bytes, algorithm needs %0d", tag, bytes_read, need_bytes));
    if (check_latency)
      check(last_valid_cyc == last_c + LAT,
            $sformatf("%s: last coefficient at cycle %0d, expected %0d", tag, last_valid_cyc, last_c + LAT));
    $display("%s: %0d bytes used, last coefficient at cycle %0d", tag, need_bytes, last_valid_cyc);
  endtask

  task automatic run_poly(input mode_e mode, input int idx);
    string tag = $sformatf("%s#%0d", mode.name(), idx);
    stream.delete();
    got.delete();
    ff_prefix = (mode == M_LONG) ? 120 : 0;
    xof_rate  = (mode == M_SLOW) ? 20 : 100;
    xof_on    = 1;
    if (mode == M_PRELOAD || mode == M_LONG) begin
      // let the XOF fill the buffer until it pushes back
      wait (stream.size() >= SEED_DEPTH);
      repeat (10) @(posedge clk);
    end
    @(negedge clk);
    if (mode == M_BACK2BACK) n_b2b++;
    start = 1;
    @(posedge clk);
    t_start = $realtime;
    @(negedge clk);
    start = 0;
    check(busy, {tag, ": busy not raised after start"});
    fork
      begin
        wait (got.size() == KYBER_N);
        xof_on = 0;
      end
    join_none
    @(posedge done);
    n_flush++;
    @(negedge clk);
    check(!busy, {tag, ": busy still high after done"});
    check_poly(tag, mode == M_PRELOAD);
  endtask

  initial begin
    rst = 1; start = 0; xof_valid = 0; xof_byte = 8'h00;
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (3) @(posedge clk);
    for (int k = 0; k < NPOLY_PER_MODE; k++) run_poly(M_PRELOAD, k);
    for (int k = 0; k < NPOLY_PER_MODE; k++) run_poly(M_SLOW, k);
    for (int k = 0; k < 2; k++)              run_poly(M_LONG, k);
    for (int k = 0; k < NPOLY_PER_MODE; k++) run_poly(M_BACK2BACK, k);

    $display("mechanisms: buffer-full %0d, empty-stall %0d, >336-byte polynomials %0d, d1 rejected %0d, d2 rejected %0d, d2 cut at n %0d, back-to-back %0d, flush %0d",
             n_full, n_stall, n_wrap, n_rej_d1, n_rej_d2, n_cutoff, n_b2b, n_flush);
    check(n_full   > 0, "buffer-full back-pressure never happened");
    check(n_stall  > 0, "empty-buffer stall never happened");
    check(n_wrap   > 0, "no polynomial needed more than the buffer depth");
    check(n_rej_d1 > 0, "no d1 rejected");
    check(n_rej_d2 > 0, "no d2 rejected");
    check(n_cutoff > 0, "d2 never dropped at j = n");
    check(n_b2b    > 0, "no back-to-back polynomial");
    check(n_flush  > 0, "no flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_seed_mem_ctrl -- self-checking test of SeedMem_ctrl.
// Random en, clr, empty, full and xof_valid are applied; each cycle the test
// checks rd_en = en & ~empty & ~mem_rst, xof_ready = ~full & ~mem_rst,
// wr_en = xof_valid & xof_ready, byte_valid = rd_en of the previous cycle,
// mem_rst = clr of the previous cycle (and high after reset), and that addr
// restarts at 0 when en rises and counts the reads.
`timescale 1ns/1ps
module tb_seed_mem_ctrl;

  logic clk = 0, rst, en, clr, empty, full, xof_valid;
  logic xof_ready, rd_en, wr_en, mem_rst, byte_valid;
  logic [15:0] addr;
  always #5 clk = ~clk;

  seed_mem_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  bit m_mem_rst, m_bv, m_en_q, e_rd;
  int m_addr, n_reads = 0, n_restarts = 0;

  initial begin
    rst = 1; en = 0; clr = 0; empty = 1; full = 0; xof_valid = 0;
    @(negedge clk);
    @(negedge clk) rst = 0;
    m_mem_rst = 1; m_bv = 0; m_en_q = 0; m_addr = 0;
    for (int k = 0; k < 2000; k++) begin
      // en is held for long runs, like a polynomial
      if ($urandom_range(40) == 0) en = !en;
      clr       = ($urandom_range(30) == 0);
      empty     = ($urandom_range(4) == 0);
      full      = ($urandom_range(4) == 0);
      xof_valid = ($urandom_range(1) == 0);
      #1;
      e_rd = en && !empty && !m_mem_rst;
      check(mem_rst    == m_mem_rst, "mem_rst");
      check(byte_valid == m_bv, "byte_valid");
      check(rd_en      == e_rd, "rd_en");
      check(xof_ready  == (!full && !m_mem_rst), "xof_ready");
      check(wr_en      == (xof_valid && !full && !m_mem_rst), "wr_en");
      check(int'(addr) == m_addr, $sformatf("addr %0d expected %0d", addr, m_addr));
      @(posedge clk);
      if (e_rd) n_reads++;
      if (en && !m_en_q) begin m_addr = e_rd ? 1 : 0; n_restarts++; end
      else if (e_rd) m_addr++;
      m_mem_rst = clr; m_bv = e_rd; m_en_q = en;
      @(negedge clk);
    end
    check(n_reads > 100, "too few reads exercised");
    check(n_restarts > 5, "too few address restarts exercised");
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

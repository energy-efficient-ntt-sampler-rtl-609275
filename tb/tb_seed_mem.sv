// tb_seed_mem -- self-checking test of SeedMem, the dual-clock byte FIFO.
// Write clock 3.264 ns, read clock 10 ns (unrelated phases). Checks:
//   * fill with reads stopped: exactly DEPTH bytes are taken before full;
//   * drain with writes stopped: exactly those bytes come out, in order,
//     dout one read-clock cycle after rd_en, then empty;
//   * random concurrent traffic over several wraps of the array: every byte
//     read equals the next byte written, and the fill level never exceeds
//     DEPTH;
//   * rst empties the buffer; data written afterwards comes out first.
`timescale 1ns/1ps
module tb_seed_mem;
  import sampntt_pkg::*;

  localparam int DEPTH = SEED_DEPTH;

  logic  clk_wr = 0, clk_rd = 0, rst, wr_en, rd_en, full, empty;
  byte_t din, dout;
  always #1.632 clk_wr = ~clk_wr;
  always #5     clk_rd = ~clk_rd;

  seed_mem dut (.clk_wr, .clk_rd, .rst, .wr_en, .din, .rd_en, .dout, .full, .empty);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  byte_t model[$];
  bit wr_go = 0, rd_go = 0;
  int wr_rate = 100, rd_rate = 100;
  int n_written = 0, n_read = 0, max_level = 0;

  // writer
  always @(posedge clk_wr) begin
    if (wr_en) begin model.push_back(din); n_written++; end
    if (model.size() > max_level) max_level = model.size();
    check(model.size() <= DEPTH, "fill level above DEPTH");
  end
  always @(negedge clk_wr) begin
    wr_en = wr_go && !full && ($urandom_range(99) < wr_rate);
    din   = byte_t'($urandom);
  end

  // reader
  bit    pend = 0;
  byte_t exp_b;
  always @(posedge clk_rd) begin
    if (pend) begin
      check(dout == exp_b, $sformatf("dout %h expected %h", dout, exp_b));
      n_read++;
    end
    pend = 0;
    if (rd_en) begin
      check(model.size() > 0, "read of a byte never written");
      if (model.size() > 0) begin exp_b = model.pop_front(); pend = 1; end
    end
  end
  always @(negedge clk_rd) rd_en = rd_go && !empty && ($urandom_range(99) < rd_rate);

  initial begin
    rst = 1; wr_en = 0; rd_en = 0; din = 0;
    #30 rst = 0;
    #20;
    check(empty, "not empty after reset");
    check(!full, "full after reset");

    // 1. fill
    wr_go = 1;
    wait (full);
    #20 wr_go = 0;
    #20;
    check(model.size() == DEPTH, $sformatf("full at %0d bytes, expected %0d", model.size(), DEPTH));

    // 2. drain
    rd_go = 1;
    wait (empty);
    #100;
    check(model.size() == 0, "empty with bytes still unread");
    check(n_read == DEPTH, $sformatf("%0d bytes read, expected %0d", n_read, DEPTH));
    rd_go = 0;

    // 3. concurrent random traffic
    wr_rate = 40; rd_rate = 70;
    wr_go = 1; rd_go = 1;
    wait (n_written > 4 * DEPTH);
    wr_rate = 100; rd_rate = 30;        // make it fill up while reading
    wait (n_written > 7 * DEPTH);
    wr_go = 0;
    wait (empty);
    #100;
    check(model.size() == 0, "bytes lost in concurrent traffic");
    rd_go = 0;

    // 4. reset with data inside
    wr_go = 1;
    #300 wr_go = 0;
    #20;
    check(!empty, "no data before reset test");
    @(negedge clk_rd) rst = 1;
    model.delete();
    #20 rst = 0;
    #20;
    check(empty, "not empty after rst with data inside");
    wr_go = 1; rd_go = 1;
    #2000 wr_go = 0;
    wait (empty);
    #100;
    check(model.size() == 0, "bytes lost after rst");
    check(max_level == DEPTH, "never completely full");
    $display("written %0d, read %0d", n_written, n_read);
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

// tb_stride_prefetcher: self-checking test of the commit-trained stride
// prefetcher: a load PC striding by +3 lines produces prefetches of the next
// line in its stride once confidence reaches 2; a second PC with stride -2 is
// tracked in its own table entry; an irregular PC produces none; back-pressure
// on the output drops prefetches instead of blocking training.
module tb_stride_prefetcher;
  import gm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic tr_valid, pf_valid, pf_ready;
  pc_t tr_pc;
  laddr_t tr_addr, pf_addr;

  stride_prefetcher #(.ENTRIES(64)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic train(input int pc, input int a, input logic expect_pf, input int expect_addr = 0);
    tr_valid = 1'b1; tr_pc = pc_t'(pc); tr_addr = laddr_t'(a);
    @(posedge clk); #1; tr_valid = 1'b0;
    check(pf_valid == expect_pf, $sformatf("pc %0h addr %0h: prefetch %0b", pc, a, pf_valid));
    if (expect_pf) check(pf_addr == laddr_t'(expect_addr), $sformatf("prefetch addr %0h", pf_addr));
    pf_ready = 1'b1; @(posedge clk); #1; pf_ready = 1'b0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tr_valid = 0; tr_pc = '0; tr_addr = '0; pf_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // PC 0x400100, stride +3: allocate, learn stride, conf 1, conf 2 -> fire
    train('h400100, 100, 0);
    train('h400100, 103, 0);
    train('h400100, 106, 0);
    train('h400100, 109, 1, 112);
    train('h400100, 112, 1, 115);
    // PC 0x400104 (next entry), stride -2
    train('h400104, 500, 0);
    train('h400104, 498, 0);
    train('h400104, 496, 0);
    train('h400104, 494, 1, 492);
    // the first PC still remembered
    train('h400100, 115, 1, 118);
    // irregular PC
    train('h400280, 7, 0);
    train('h400280, 9, 0);
    train('h400280, 30, 0);
    train('h400280, 31, 0);
    // output full: the second prefetch is dropped, training continues
    tr_valid = 1'b1; tr_pc = 'h400100; tr_addr = 118; @(posedge clk); #1;
    check(pf_valid && pf_addr == 121, "first prefetch held");
    tr_addr = 121; @(posedge clk); #1; tr_valid = 1'b0;
    check(pf_valid && pf_addr == 121, "second prefetch dropped while output full");
    pf_ready = 1'b1; @(posedge clk); #1; pf_ready = 1'b0;
    check(!pf_valid, "output drained");
    train('h400100, 124, 1, 127);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

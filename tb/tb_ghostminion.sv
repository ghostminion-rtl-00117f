// tb_ghostminion: self-checking test of the GhostMinion cache, built around
// the examples of the TimeGuarding, free-slotting and commit figures: two sets
// of four ways (set = lowest line-address bit), lines 0x14/TS22, 0x16/TS25
// in the even set and 0x23/TS14, 0x37/TS11, 0x17/TS26, 0x15/TS27 in the odd
// set. Checks TimeGuarded reads, fills into free slots, eviction of the newest
// allowed line, dropped fills, commit-and-free, the squash wipe, coherence
// invalidation and the non-coherent flag. Expected values are written out by
// hand from the rules, not computed by the block.
module tb_ghostminion;
  import gm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic   rd_valid, fill_valid, fill_nc, cm_valid, sq_valid, inv_valid;
  laddr_t rd_addr, fill_addr, cm_addr, inv_addr;
  ts_t    rd_ts, fill_ts, cm_ts, sq_ts;
  line_t  fill_data, rd_data, cm_data;
  level_e fill_level, rd_level, cm_level;
  logic   rd_hit, rd_guarded, fill_ok, cm_hit, cm_nc;
  logic [3:0] occupancy;

  ghostminion #(.SIZE_BYTES(512), .WAYS(4), .COHERENT(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic line_t pattern(laddr_t a);
    return {16{32'hC0DE0000 ^ 32'(a)}};
  endfunction

  task automatic fill(input int a, input int t, input logic expect_ok, input logic nc = 1'b0);
    fill_valid = 1'b1; fill_addr = laddr_t'(a); fill_ts = ts_t'(t);
    fill_data = pattern(laddr_t'(a)); fill_level = LVL_MEM; fill_nc = nc;
    #1;
    check(fill_ok == expect_ok, $sformatf("fill 0x%0h TS%0d ok=%0b", a, t, fill_ok));
    @(posedge clk); #1;
    fill_valid = 1'b0;
  endtask

  task automatic read(input int a, input int t, input logic expect_hit, input logic expect_guard);
    rd_valid = 1'b1; rd_addr = laddr_t'(a); rd_ts = ts_t'(t);
    #1;
    check(rd_hit == expect_hit, $sformatf("read 0x%0h TS%0d hit=%0b", a, t, rd_hit));
    check(rd_guarded == expect_guard, $sformatf("read 0x%0h TS%0d guarded=%0b", a, t, rd_guarded));
    if (expect_hit) check(rd_data == pattern(laddr_t'(a)), $sformatf("read 0x%0h data", a));
    rd_valid = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_valid = 0; fill_valid = 0; cm_valid = 0; sq_valid = 0; inv_valid = 0;
    rd_addr = '0; fill_addr = '0; cm_addr = '0; inv_addr = '0;
    rd_ts = '0; fill_ts = '0; cm_ts = '0; sq_ts = '0; fill_nc = 0;
    fill_data = '0; fill_level = LVL_MEM;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(occupancy == 0, "empty after reset");

    // the figures' starting contents
    fill('h14, 22, 1); fill('h16, 25, 1);
    fill('h23, 14, 1); fill('h37, 11, 1); fill('h17, 26, 1); fill('h15, 27, 1);
    check(occupancy == 6, "six lines");

    // TimeGuarded reads (Fig. 4a)
    read('h14, 21, 0, 1);   // older reader must not see a newer line
    read('h15, 28, 1, 0);   // newer reader may
    read('h14, 22, 1, 0);   // equal timestamp may
    read('h16, 24, 0, 1);
    read('h40, 99, 0, 0);   // plain miss

    // fills (Fig. 4b): free slots first
    fill('h22, 24, 1);
    fill('h20, 30, 1);      // even set now full: 14/22 16/25 22/24 20/30
    check(occupancy == 8, "eight lines");
    // no free slot: evict the newest line not older than the filler (0x20/30)
    fill('h24, 24, 1);
    read('h20, 40, 0, 0);
    read('h24, 40, 1, 0);
    read('h16, 40, 1, 0);
    // odd set full of older lines (14, 11, 26, 27): a fill at TS 28 is dropped
    fill('h19, 28, 0);
    read('h19, 50, 0, 0);
    // equal timestamp may be overwritten: 0x21 at TS 27 replaces 0x15/27
    fill('h21, 27, 1);
    read('h15, 50, 0, 0);
    read('h21, 50, 1, 0);

    // commit (Fig. 3): 0x14/TS22 leaves for the L1 and frees its slot
    cm_valid = 1'b1; cm_addr = 'h14; cm_ts = 22; #1;
    check(cm_hit == 1'b1, "commit finds 0x14");
    check(cm_data == pattern('h14), "commit data");
    check(cm_level == LVL_MEM, "commit level");
    check(cm_nc == 1'b0, "commit coherent");
    @(posedge clk); #1; cm_valid = 1'b0;
    read('h14, 40, 0, 0);
    check(occupancy == 7, "slot freed");
    // a commit cannot pick a line newer than itself
    cm_valid = 1'b1; cm_addr = 'h16; cm_ts = 23; #1;
    check(cm_hit == 1'b0, "commit TS23 cannot take 0x16/TS25");
    @(posedge clk); #1; cm_valid = 1'b0;
    // the freed slot takes a fill even from a newer instruction
    fill('h26, 60, 1);

    // squash at TS 25: lines newer than 25 vanish in one cycle
    sq_valid = 1'b1; sq_ts = 25;
    @(posedge clk); #1; sq_valid = 1'b0;
    read('h16, 40, 1, 0);   // TS 25 stays
    read('h24, 40, 1, 0);   // TS 24 stays
    read('h17, 40, 0, 0);   // TS 26 gone
    read('h21, 40, 0, 0);   // TS 27 gone
    read('h26, 70, 0, 0);   // TS 60 gone
    read('h23, 40, 1, 0);
    check(occupancy == 5, "after squash");

    // coherence invalidation ignores timestamps
    inv_valid = 1'b1; inv_addr = 'h23;
    @(posedge clk); #1; inv_valid = 1'b0;
    read('h23, 40, 0, 0);

    // non-coherent copy: committed load must replay
    fill('h31, 30, 1, 1'b1);
    cm_valid = 1'b1; cm_addr = 'h31; cm_ts = 31; #1;
    check(cm_hit && cm_nc, "non-coherent copy flagged at commit");
    @(posedge clk); #1; cm_valid = 1'b0;

    // a fill from an instruction squashed in the same cycle is dropped
    sq_valid = 1'b1; sq_ts = 35; fill('h33, 36, 0); sq_valid = 1'b0;

    // timestamp wrap-around: TS 380 is older than TS 5 (window of 384)
    fill('h41, 380, 1);
    read('h41, 5, 1, 0);
    read('h41, 379, 0, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fu_timeguard: self-checking test of in-order issue to a non-pipelined
// unit. A behavioural divider in the testbench stays busy for 8 cycles per
// operation. Operations are dispatched in program order with operands that
// become ready in a scrambled order; the test checks that they issue strictly
// in dispatch order, never while the unit is busy, that a ready younger
// operation waits behind an unready older one (held), that nothing issues
// before its operands are ready, and that a squash drops
// the newer queued operations.
module tb_fu_timeguard;
  import gm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic disp_valid, disp_ready, disp_rdy, wake_valid, unit_busy, iss_valid, sq_valid, held;
  ts_t disp_ts, iss_ts, sq_ts;
  logic [7:0] disp_tag, wake_tag, iss_tag;

  fu_timeguard #(.DEPTH(16), .TAG_W(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // behavioural non-pipelined divider: 8 cycles per operation
  int busy_cnt = 0;
  assign unit_busy = busy_cnt != 0;
  int issued [$];
  int held_cycles = 0;
  always @(posedge clk) begin
    if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
    if (iss_valid) begin
      issued.push_back(int'(iss_tag));
      busy_cnt <= 8;
    end
    if (held) held_cycles++;
  end
  // operands known ready: dispatched ready or woken (a wake counts in its own cycle)
  bit ready_tag [256];
  always @(posedge clk) begin
    if (disp_valid && disp_ready && disp_rdy) ready_tag[disp_tag] <= 1'b1;
    if (wake_valid) ready_tag[wake_tag] <= 1'b1;
  end
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (iss_valid && unit_busy) begin failures++; $display("FAIL: issue while busy"); end
    if (iss_valid && !ready_tag[iss_tag] && !(wake_valid && wake_tag == iss_tag)) begin
      failures++; $display("FAIL: tag %0d issued before its operands were ready", iss_tag);
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int order [6] = '{3, 0, 5, 1, 4, 2};
  initial begin
    disp_valid = 0; disp_ts = '0; disp_tag = '0; disp_rdy = 0; wake_valid = 0; wake_tag = '0;
    sq_valid = 0; sq_ts = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // six divisions at TS 100..105 with tags 10..15, operands not ready
    for (int i = 0; i < 6; i++) begin
      disp_valid = 1'b1; disp_ts = ts_t'(100 + i); disp_tag = 8'(10 + i); disp_rdy = 1'b0;
      @(posedge clk); #1;
    end
    disp_valid = 1'b0;
    // operands arrive in scrambled order
    foreach (order[k]) begin
      wake_valid = 1'b1; wake_tag = 8'(10 + order[k]);
      @(posedge clk); #1;
      wake_valid = 1'b0;
      repeat (3) @(posedge clk); #1;
    end
    repeat (60) @(posedge clk); #1;
    check(issued.size() == 6, $sformatf("six issued (%0d)", issued.size()));
    for (int i = 0; i < 6 && i < issued.size(); i++)
      check(issued[i] == 10 + i, $sformatf("issue %0d is tag %0d", i, issued[i]));
    check(held_cycles > 0, "a ready younger operation waited");
    // squash: three queued, the two newer than TS 201 vanish
    issued.delete();
    for (int i = 0; i < 3; i++) begin
      disp_valid = 1'b1; disp_ts = ts_t'(200 + i); disp_tag = 8'(20 + i); disp_rdy = 1'b0;
      @(posedge clk); #1;
    end
    disp_valid = 1'b0;
    sq_valid = 1'b1; sq_ts = 200; @(posedge clk); #1; sq_valid = 1'b0;
    for (int i = 0; i < 3; i++) begin
      wake_valid = 1'b1; wake_tag = 8'(20 + i); @(posedge clk); #1;
    end
    wake_valid = 1'b0;
    repeat (40) @(posedge clk); #1;
    check(issued.size() == 1 && issued[0] == 20, "only the unsquashed operation issues");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

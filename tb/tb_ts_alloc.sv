// tb_ts_alloc: self-checking test of the timestamp allocator: dispatch groups
// of varying size get consecutive timestamps, the counter wraps at
// 2*ROB_ENTRIES (384), and a squash rewinds it to one past the squashed
// instruction. A reference counter in the testbench gives the expected values.
module tb_ts_alloc;
  import gm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] disp_cnt;
  logic sq_valid;
  ts_t sq_ts, next_ts;
  ts_t ts_out [8];

  ts_alloc #(.WIDTH(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_next, n, wraps;
  initial begin
    disp_cnt = '0; sq_valid = 0; sq_ts = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    ref_next = 0; wraps = 0;
    for (int c = 0; c < 400; c++) begin
      n = $urandom_range(0, 8);
      disp_cnt = 4'(n);
      if (c % 97 == 50) begin
        sq_valid = 1'b1; sq_ts = ts_t'($urandom_range(0, 383));
      end
      #1;
      check(next_ts == ts_t'(ref_next), $sformatf("next %0d vs %0d", next_ts, ref_next));
      for (int i = 0; i < 8; i++)
        check(ts_out[i] == ts_t'((ref_next + i) % 384), "slot timestamp");
      @(posedge clk); #1;
      if (sq_valid) ref_next = (int'(sq_ts) + 1) % 384;
      else begin
        if (ref_next + n >= 384) wraps++;
        ref_next = (ref_next + n) % 384;
      end
      sq_valid = 1'b0;
    end
    check(wraps > 0, "counter wrapped around");
    check(ts_lt(ts_t'(383), ts_t'(2)), "383 is older than 2 across the wrap");
    check(!ts_lt(ts_t'(2), ts_t'(383)), "2 is newer than 383");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ts_arbiter: self-checking test of the oldest-first arbiter with four
// requesters and random timestamps in a live window: the grant must go to a
// non-speculative requester if any (lowest index first), otherwise to the
// requester whose timestamp is oldest in modular order. The reference picks
// the winner by comparing unwrapped ages.
module tb_ts_arbiter;
  import gm_pkg::*;

  logic [3:0] req, spec, gnt;
  ts_t ts [4];
  logic [1:0] gnt_idx;
  logic gnt_valid;

  ts_arbiter #(.N(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int base, age [4], best, nonspec;
  initial begin
    for (int k = 0; k < 2000; k++) begin
      base = $urandom_range(0, 383);
      for (int i = 0; i < 4; i++) begin
        req[i]  = ($urandom_range(0, 3) != 0);
        spec[i] = ($urandom_range(0, 5) != 0);
        age[i]  = $urandom_range(0, 150);            // distance from the window base
        ts[i]   = ts_t'((base + age[i]) % 384);
      end
      #1;
      best = -1; nonspec = 0;
      for (int i = 0; i < 4; i++)
        if (req[i] && !spec[i] && !nonspec) begin best = i; nonspec = 1; end
      if (!nonspec)
        for (int i = 0; i < 4; i++)
          if (req[i] && (best < 0 || age[i] < age[best])) best = i;
      check(gnt_valid == (req != 0), "grant valid");
      if (best >= 0) begin
        check(gnt == 4'(1 << best), $sformatf("grant %b expected %0d", gnt, best));
        check(gnt_idx == 2'(best), "grant index");
      end else check(gnt == '0, "no grant");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

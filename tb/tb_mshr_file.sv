// tb_mshr_file: self-checking test of the timestamped MSHR file, starting
// from the leapfrogging figure: three MSHRs hold lines 0x14/TS22, 0x16/TS23
// and 0x18/TS28 when a read of 0x17 at TS25 arrives. Checks allocation,
// leapfrogging of the newest owner, rejection when every owner is older,
// merging, timeleaping (restart with new generation, newer targets failed),
// oldest-first downstream issue, completion with the target mask, stale
// generation responses, squash handling and downstream (cascading) failures.
module tb_mshr_file;
  import gm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic a_valid, a_spec, a_tgt, dn_valid, dn_ready, dn_spec;
  laddr_t a_addr, dn_addr, rsp_addr, cpl_addr;
  ts_t a_ts, dn_ts, cpl_ts, sq_ts;
  logic [3:0] a_id;
  mshr_act_e a_act;
  logic [1:0] a_idx, dn_idx;
  logic [15:0] fail_mask, cpl_tmask;
  logic [3:0] dn_gen, rsp_gen;
  logic rsp_valid, rsp_gen_chk, rsp_ready, cpl_valid, cpl_spec, cpl_orphan, sq_valid;
  logic [2:0] rsp_mask, dfail;
  logic [1:0] busy;

  mshr_file #(.N(3), .TGTS(2), .N_IDS(16), .GEN_W(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // present one allocation, check its outcome, clock it in
  task automatic alloc(input int a, input int t, input int id, input mshr_act_e exp,
                       input logic spec = 1'b1);
    a_valid = 1'b1; a_addr = laddr_t'(a); a_ts = ts_t'(t); a_id = 4'(id); a_spec = spec; a_tgt = 1'b1;
    #1;
    check(a_act == exp, $sformatf("alloc 0x%0h TS%0d: %s, expected %s", a, t, a_act.name(), exp.name()));
    @(posedge clk); #1;
    a_valid = 1'b0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int idx14, idx16, idx17;
  logic [3:0] gen16;
  initial begin
    a_valid = 0; a_spec = 1; a_tgt = 1; a_addr = '0; a_ts = '0; a_id = '0;
    dn_ready = 0; rsp_valid = 0; rsp_mask = '0; rsp_addr = '0; rsp_gen_chk = 0; rsp_gen = '0;
    rsp_ready = 1; sq_valid = 0; sq_ts = '0; dfail = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;

    alloc('h14, 22, 1, MA_ALLOC);
    alloc('h16, 23, 2, MA_ALLOC);
    alloc('h18, 28, 3, MA_ALLOC);
    check(busy == 3, "three MSHRs busy");
    check(fail_mask == '0, "no failures yet");
    // Fig. 6: 0x17/TS25 leapfrogs 0x18/TS28, whose requester 3 must retry
    alloc('h17, 25, 4, MA_LEAPFROG);
    check(fail_mask == 16'b1000, "requester of TS28 fails");
    #0; @(posedge clk); #1;
    check(fail_mask == '0, "failure is a one-cycle pulse");
    // every owner older than TS30: rejected
    alloc('h19, 30, 5, MA_REJECT);
    // a newer request for an outstanding line merges
    alloc('h14, 26, 6, MA_MERGE);
    // issue order: oldest first (22, 23, 25)
    dn_ready = 1'b1; #1;
    check(dn_valid && dn_ts == 22 && dn_addr == 'h14, "issue TS22 first");
    idx14 = dn_idx;
    @(posedge clk); #1;
    check(dn_valid && dn_ts == 23 && dn_addr == 'h16, "then TS23");
    gen16 = dn_gen;
    @(posedge clk); #1;
    check(dn_valid && dn_ts == 25 && dn_addr == 'h17, "then TS25");
    idx17 = dn_idx;
    @(posedge clk); #1;
    check(!dn_valid, "nothing left to issue");
    dn_ready = 1'b0;
    // timeleap: 0x16 requested by TS21 while owned by TS23
    alloc('h16, 21, 7, MA_TIMELEAP);
    check(fail_mask == 16'b100, "TS23 requester fails on timeleap");
    #1;
    check(dn_valid && dn_addr == 'h16 && dn_ts == 21 && dn_gen != gen16,
          "restarted request re-issued with a new generation");
    idx16 = dn_idx;
    // a stale response (old generation) does not complete it
    rsp_valid = 1'b1; rsp_mask = 3'(1 << idx16); rsp_addr = 'h16; rsp_gen_chk = 1'b1; rsp_gen = gen16;
    #1; check(!cpl_valid, "stale generation ignored (not issued yet)");
    dn_ready = 1'b1; @(posedge clk); #1; dn_ready = 1'b0;
    #1; check(!cpl_valid, "stale generation ignored");
    rsp_gen = gen16 + 4'd1; #1;
    check(cpl_valid && cpl_tmask == 16'b1000_0000 && cpl_ts == 21, "restarted line completes for TS21 only");
    @(posedge clk); #1;
    // completion of 0x14 delivers both targets
    rsp_mask = 3'(1 << idx14); rsp_addr = 'h14; rsp_gen_chk = 1'b0; #1;
    check(cpl_valid && cpl_addr == 'h14 && cpl_tmask == 16'b0100_0010, "0x14 to requesters 1 and 6");
    check(cpl_spec && !cpl_orphan, "speculative, not orphan");
    @(posedge clk); #1; rsp_valid = 1'b0;
    check(busy == 1, "one MSHR left (0x17)");
    // squash at TS24: the TS25 owner of 0x17 becomes an orphan
    sq_valid = 1'b1; sq_ts = 24; @(posedge clk); #1; sq_valid = 1'b0;
    check(busy == 1, "orphan keeps its MSHR until the response");
    // a live request for 0x17 at TS40 restarts the orphan instead of merging
    alloc('h17, 40, 9, MA_TIMELEAP);
    check(fail_mask == '0, "orphan had no live targets");
    // non-speculative request outranks speculative owners
    alloc('h30, 50, 10, MA_ALLOC);
    alloc('h31, 60, 11, MA_ALLOC);
    alloc('h32, 0, 12, MA_LEAPFROG, 1'b0);
    check(fail_mask == 16'b1000_0000_0000, "TS60 requester displaced by non-speculative request");
    // a downstream failure fails the entry's targets and frees it
    dn_ready = 1'b1; repeat (3) @(posedge clk); #1; dn_ready = 1'b0;
    dfail = 3'b111; @(posedge clk); #1; dfail = '0;
    check(fail_mask == 16'b0001_0110_0000_0000, "cascading failure of all targets");
    check(busy == 0, "entries freed");
    // orphan response after squash: completion flagged
    alloc('h50, 100, 1, MA_ALLOC);
    dn_ready = 1'b1; @(posedge clk); #1; dn_ready = 1'b0;
    sq_valid = 1'b1; sq_ts = 90; @(posedge clk); #1; sq_valid = 1'b0;
    rsp_valid = 1'b1; rsp_mask = 3'b111; rsp_addr = 'h50; rsp_gen_chk = 1'b0; #1;
    check(cpl_valid && cpl_orphan && cpl_tmask == '0, "orphan completion carries no targets");
    @(posedge clk); #1; rsp_valid = 1'b0;
    check(busy == 0, "orphan freed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ghostminion_top: end-to-end test of the GhostMinion cache system at its
// default (full) sizes, with a behavioural main memory (60-cycle latency).
// The testbench plays the core: it allocates timestamps, issues speculative
// and non-speculative loads and fetches, commits and squashes, and checks
// every returned line against the memory's data formula and the level it
// should come from. Each mechanism of the design is provoked on purpose and
// counted from the event outputs; a mechanism that never happens is a
// failure: TimeGuarded reads, GhostMinion fills, dropped fills, service from
// the GhostMinion, commit moves to the L1, leapfrogging, timeleaping, MSHR
// rejection, the squash wipe, the L2 prefetcher, the non-coherent replay,
// coherence invalidation, the instruction-side GhostMinion and the in-order
// divider guard. A final phase runs random traffic with commits and squashes.
module tb_ghostminion_top;
  import gm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // core-side signals
  logic [3:0] disp_cnt;
  ts_t disp_ts [8];
  logic ld_valid, ld_ready, ld_spec, ld_resp_valid;
  laddr_t ld_addr; ts_t ld_ts; logic [4:0] ld_id;
  logic [31:0] ld_resp_mask, ld_fail_mask;
  line_t ld_resp_data; level_e ld_resp_level;
  logic cm_valid, cm_moved, cm_replay; laddr_t cm_addr; ts_t cm_ts; pc_t cm_pc;
  logic if_valid, if_ready, if_spec, if_resp_valid; laddr_t if_addr; ts_t if_ts; logic [1:0] if_id;
  logic [3:0] if_resp_mask, if_fail_mask; line_t if_resp_data;
  logic icm_valid; laddr_t icm_addr; ts_t icm_ts;
  logic sq_valid; ts_t sq_ts;
  logic inv_valid; laddr_t inv_addr;
  logic mem_req_valid, mem_req_ready, mem_req_spec, mem_rsp_valid, mem_rsp_ready, mem_rsp_nc;
  laddr_t mem_req_addr, mem_rsp_addr; logic [4:0] mem_req_tag, mem_rsp_tag;
  logic [3:0] mem_req_gen, mem_rsp_gen; line_t mem_rsp_data;
  logic div_disp_valid, div_disp_ready, div_disp_rdy, div_wake_valid, div_busy, div_iss_valid;
  ts_t div_disp_ts; logic [7:0] div_disp_tag, div_wake_tag, div_iss_tag;
  events_t ev;
  logic nc_en; laddr_t nc_addr; int n_mem;

  ghostminion_top dut (.*);

  mem_model #(.LAT(60), .DEPTH(32), .TAG_W(5), .GEN_W(4)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .req_tag(mem_req_tag), .req_gen(mem_req_gen), .rsp_valid(mem_rsp_valid),
    .rsp_ready(mem_rsp_ready), .rsp_tag(mem_rsp_tag), .rsp_gen(mem_rsp_gen),
    .rsp_addr(mem_rsp_addr), .rsp_data(mem_rsp_data), .rsp_nc(mem_rsp_nc),
    .nc_en, .nc_addr, .n_req(n_mem));

  int checks = 0, failures = 0;
  level_e lvl; int lat; logic failed, ok;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (last access: latency %0d, level %0d, t=%0d)", what, lat, lvl, cyc);
    end
  endtask

  function automatic line_t expect_line(laddr_t a);
    return {16{32'hD47A0000 ^ 32'(a)}};
  endfunction

  // ------------------------------------------------------ event counters
  int n_guard, n_iguard, n_fill, n_drop, n_side, n_move, n_replay, n_lf, n_tl, n_rej;
  int n_stall, n_pf, n_div, n_data_err;
  always @(posedge clk) if (rst_n) begin
    n_guard  += ev.dgm_guarded;   n_iguard += ev.igm_guarded;
    n_fill   += ev.dgm_fill;      n_drop   += ev.dgm_fill_drop;
    n_side   += ev.dgm_side_hit;  n_move   += ev.commit_move;
    n_replay += ev.commit_replay; n_lf     += ev.leapfrog;
    n_tl     += ev.timeleap;      n_rej    += ev.mshr_reject;
    n_stall  += ev.l1d_stall;     n_pf     += ev.pf_issue;
    n_div    += ev.div_wait;
  end
  // every load response carries the memory's data for its address
  always @(posedge clk) if (rst_n && ld_resp_valid) begin
    checks++;
    if (ld_resp_data != expect_line(dut.l1d_resp_addr)) begin
      failures++; n_data_err++;
      $display("FAIL: load data for line %0h", dut.l1d_resp_addr);
    end
  end

  // ------------------------------------------------------------ helpers
  task automatic idle(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // issue a load, wait for data or failure
  task automatic load(input laddr_t a, input int t, input logic spec, input int id,
                      output level_e lvl, output int lat, output logic failed);
    longint start;
    ld_valid = 1'b1; ld_addr = a; ld_ts = ts_t'(t); ld_spec = spec; ld_id = 5'(id);
    while (!ld_ready) begin @(posedge clk); #1; end  // ready is sampled at the edge
    @(posedge clk); #1;
    ld_valid = 1'b0;
    start = cyc - 1;
    failed = 1'b0; lat = 0; lvl = LVL_L1;
    for (int k = 0; k < 2000; k++) begin
      if (ld_resp_valid && ld_resp_mask[id]) begin
        lvl = ld_resp_level; lat = int'(cyc - start);
        break;
      end
      if (ld_fail_mask[id]) begin failed = 1'b1; break; end
      @(posedge clk); #1;
    end
    @(posedge clk); #1;
  endtask

  // issue a load without waiting
  task automatic send(input laddr_t a, input int t, input int id);
    ld_valid = 1'b1; ld_addr = a; ld_ts = ts_t'(t); ld_spec = 1'b1; ld_id = 5'(id);
    while (!ld_ready) begin @(posedge clk); #1; end  // ready is sampled at the edge
    @(posedge clk); #1;
    ld_valid = 1'b0;
  endtask

  task automatic commit(input laddr_t a, input int t, input int pc);
    cm_valid = 1'b1; cm_addr = a; cm_ts = ts_t'(t); cm_pc = pc_t'(pc);
    @(posedge clk); #1;
    cm_valid = 1'b0;
  endtask

  task automatic squash(input int t);
    sq_valid = 1'b1; sq_ts = ts_t'(t);
    @(posedge clk); #1;
    sq_valid = 1'b0;
  endtask

  // let traffic drain, then squash everything newer than t: clears the
  // GhostMinions between test phases
  task automatic wipe(input int t);
    idle(200);
    squash(t);
    idle(2);
  endtask

  task automatic fetch(input laddr_t a, input int t, input logic spec, output int lat,
                       output logic ok);
    longint start;
    if_valid = 1'b1; if_addr = a; if_ts = ts_t'(t); if_spec = spec; if_id = 2'd1;
    while (!if_ready) begin @(posedge clk); #1; end  // ready is sampled at the edge
    @(posedge clk); #1;
    if_valid = 1'b0;
    start = cyc - 1; ok = 1'b0; lat = 0;
    for (int k = 0; k < 2000; k++) begin
      if (if_resp_valid && if_resp_mask[1]) begin
        ok = (if_resp_data == expect_line(a)); lat = int'(cyc - start);
        break;
      end
      @(posedge clk); #1;
    end
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int fails, got, mem0, base;
  initial begin
    disp_cnt = '0; ld_valid = 0; ld_addr = '0; ld_ts = '0; ld_spec = 1; ld_id = '0;
    cm_valid = 0; cm_addr = '0; cm_ts = '0; cm_pc = '0;
    if_valid = 0; if_addr = '0; if_ts = '0; if_spec = 1; if_id = '0;
    icm_valid = 0; icm_addr = '0; icm_ts = '0; sq_valid = 0; sq_ts = '0;
    inv_valid = 0; inv_addr = '0; nc_en = 0; nc_addr = '0;
    div_disp_valid = 0; div_disp_ts = '0; div_disp_tag = '0; div_disp_rdy = 0;
    div_wake_valid = 0; div_wake_tag = '0; div_busy = 0;
    n_guard = 0; n_iguard = 0; n_fill = 0; n_drop = 0; n_side = 0; n_move = 0; n_replay = 0;
    n_lf = 0; n_tl = 0; n_rej = 0; n_stall = 0; n_pf = 0; n_div = 0; n_data_err = 0;
    repeat (3) @(posedge clk); rst_n = 1'b1; idle(2);
    // the caches sweep their sets invalid after reset (the L2 has 4096 sets)
    begin
      longint t0 = cyc;
      while (dut.u_l2.init_q) begin @(posedge clk); #1; end
      check(cyc - t0 <= 4100 && ld_ready && if_ready, "caches ready after their reset sweep");
    end

    // timestamp allocation
    disp_cnt = 4'd8; #1;
    check(disp_ts[0] == 0 && disp_ts[7] == 7, "first dispatch group 0..7");
    @(posedge clk); #1; disp_cnt = 4'd3; #1;
    check(disp_ts[0] == 8, "next group starts at 8");
    @(posedge clk); #1; disp_cnt = '0;

    // 1. speculative miss all the way to memory, recorded in the D GhostMinion
    load('h1000, 20, 1'b1, 1, lvl, lat, failed);
    check(!failed && lvl == LVL_MEM, "speculative miss from memory");
    check(lat >= 2 + 20 + 60, $sformatf("memory latency %0d", lat));
    // 2. a newer load finds it in the GhostMinion at L1 speed
    load('h1000, 25, 1'b1, 2, lvl, lat, failed);
    check(lvl == LVL_MEM && lat == 2, $sformatf("GhostMinion hit, latency %0d", lat));
    // 3. an older load must not see it (TimeGuarding): it misses
    got = n_guard;
    load('h1000, 15, 1'b1, 3, lvl, lat, failed);
    check(n_guard == got + 1, "older load TimeGuarded");
    check(lat > 60, "older load went to memory");
    // 4. commit moves the line into the L1D
    commit('h1000, 15, 'h400000);
    check(n_move == 1, "commit moved the line");
    load('h1000, 40, 1'b1, 4, lvl, lat, failed);
    check(lvl == LVL_L1 && lat == 2, "L1 hit after commit");
    // the L2 was not changed by the speculative misses
    mem0 = n_mem;
    load('h1001, 41, 1'b1, 5, lvl, lat, failed);
    load('h1001, 30, 1'b1, 6, lvl, lat, failed);
    check(n_mem == mem0 + 2 && lvl == LVL_MEM, "speculative misses never fill the L2");

    // 5. non-speculative load fills L1 and L2
    load('h2000, 50, 1'b0, 7, lvl, lat, failed);
    check(lvl == LVL_MEM, "non-speculative miss");
    load('h2000, 51, 1'b1, 8, lvl, lat, failed);
    check(lvl == LVL_L1, "filled into L1");

    wipe(0);
    // 6. GhostMinion set conflict: three lines of one set, the newest is dropped
    got = n_drop;
    load('h3010, 60, 1'b1, 1, lvl, lat, failed);
    load('h3020, 61, 1'b1, 2, lvl, lat, failed);
    load('h3030, 62, 1'b1, 3, lvl, lat, failed);
    check(n_drop == got + 1, "fill dropped: no free or newer way");
    check(lvl == LVL_MEM, "dropped line still returned to the core");
    // an older fill evicts the newest line of the set
    got = n_fill;
    load('h3040, 55, 1'b1, 4, lvl, lat, failed);
    check(n_fill == got + 1, "older fill takes the newest way");
    load('h3020, 70, 1'b1, 5, lvl, lat, failed);
    check(lvl == LVL_MEM && lat > 60, "0x3020 (TS61) was evicted by TS55");
    commit('h3010, 60, 'h400010);
    commit('h3040, 55, 'h400014);

    wipe(0);
    // 7. leapfrogging: four newer misses hold the L1 MSHRs, an older one steals
    fails = 0;
    send('h4000, 104, 10); send('h4001, 103, 11); send('h4002, 102, 12); send('h4003, 101, 13);
    got = n_lf;
    load('h4004, 90, 1'b1, 14, lvl, lat, failed);
    check(!failed && lvl == LVL_MEM, "older load served after leapfrogging");
    check(n_lf > got, "leapfrog happened");
    idle(200);
    wipe(0);
    // 8. rejection: four older misses, a newer one is refused
    send('h5000, 110, 10); send('h5001, 111, 11); send('h5002, 112, 12); send('h5003, 113, 13);
    got = n_rej;
    load('h5004, 120, 1'b1, 14, lvl, lat, failed);
    check(failed, "newer load refused while all MSHRs are older");
    check(n_rej > got, "reject counted");
    idle(200);
    wipe(0);
    // 9. timeleaping: an older load joins a line requested by a newer one
    send('h6000, 140, 10);
    idle(3);
    got = n_tl;
    load('h6000, 130, 1'b1, 11, lvl, lat, failed);
    check(!failed && lvl == LVL_MEM, "older load gets the line");
    check(n_tl > got, "timeleap happened");
    idle(200);

    wipe(100);
    // 10. squash wipes newer GhostMinion lines
    load('h7000, 150, 1'b1, 1, lvl, lat, failed);
    load('h7001, 160, 1'b1, 2, lvl, lat, failed);
    squash(155);
    load('h7000, 170, 1'b1, 3, lvl, lat, failed);
    check(lat == 2, "line of TS150 survives the squash");
    load('h7001, 170, 1'b1, 4, lvl, lat, failed);
    check(lat > 60, "line of TS160 wiped by the squash");
    // a squashed in-flight miss leaves nothing behind
    send('h7100, 180, 5);
    idle(5);
    squash(175);
    idle(150);
    load('h7100, 185, 1'b1, 6, lvl, lat, failed);
    check(lat > 60, "squashed miss did not fill the GhostMinion");

    wipe(100);
    // 11. non-coherent copy: replay at commit
    nc_en = 1'b1; nc_addr = 'h8000;
    load('h8000, 200, 1'b1, 1, lvl, lat, failed);
    cm_valid = 1'b1; cm_addr = 'h8000; cm_ts = 200; cm_pc = 'h400020; #1;
    check(cm_replay, "non-coherent copy replayed at commit");
    @(posedge clk); #1; cm_valid = 1'b0; nc_en = 1'b0;
    // 12. coherence invalidation removes a GhostMinion line
    load('h8100, 210, 1'b1, 2, lvl, lat, failed);
    inv_valid = 1'b1; inv_addr = 'h8100; @(posedge clk); #1; inv_valid = 1'b0;
    load('h8100, 215, 1'b1, 3, lvl, lat, failed);
    check(lat > 60, "invalidated line gone");

    wipe(100);
    // 13. stride prefetcher trained by commits only
    base = 'h9000;
    got = n_pf;
    for (int i = 0; i < 6; i++) begin
      load(laddr_t'(base + 4 * i), 230 + i, 1'b1, 1, lvl, lat, failed);
      commit(laddr_t'(base + 4 * i), 230 + i, 'h400040);
    end
    check(n_pf > got, "L2 prefetcher issued");
    idle(150);
    load(laddr_t'(base + 24), 240, 1'b1, 2, lvl, lat, failed);
    check(lvl == LVL_L2, "prefetched line found in the L2");

    // 14. instruction side
    fetch('hA000, 250, 1'b1, lat, ok);
    check(ok && lat > 60, "speculative fetch from memory");
    fetch('hA000, 251, 1'b1, lat, ok);
    check(ok && lat == 2, "fetch hit in the instruction GhostMinion");
    got = n_iguard;
    fetch('hA000, 249, 1'b1, lat, ok);
    check(n_iguard == got + 1, "older fetch TimeGuarded");
    icm_valid = 1'b1; icm_addr = 'hA000; icm_ts = 249; @(posedge clk); #1; icm_valid = 1'b0;
    icm_valid = 1'b1; icm_addr = 'hA000; icm_ts = 250; @(posedge clk); #1; icm_valid = 1'b0;
    fetch('hA000, 260, 1'b1, lat, ok);
    check(ok && lat == 2 && dut.l1i_resp_level == LVL_L1, "committed fetch line in the L1I");

    // 15. divider guard: the younger ready division waits for the older
    div_disp_valid = 1'b1; div_disp_ts = 270; div_disp_tag = 8'd1; div_disp_rdy = 1'b0;
    @(posedge clk); #1;
    div_disp_ts = 271; div_disp_tag = 8'd2; div_disp_rdy = 1'b1;
    @(posedge clk); #1; div_disp_valid = 1'b0;
    idle(3);
    check(!div_iss_valid, "younger division does not issue first");
    div_wake_valid = 1'b1; div_wake_tag = 8'd1; #1;
    check(div_iss_valid && div_iss_tag == 8'd1, "older division issues once ready");
    @(posedge clk); #1; div_wake_valid = 1'b0; #1;
    check(div_iss_valid && div_iss_tag == 8'd2, "then the younger one");
    @(posedge clk); #1;

    // 16. random traffic: loads from several ids, commits and squashes
    begin
      int t = 300;
      for (int r = 0; r < 400; r++) begin
        laddr_t a;
        a = laddr_t'('hB000 + $urandom_range(0, 63));
        t = (t + 1) % 384;
        ld_valid = 1'b1; ld_addr = a; ld_ts = ts_t'(t); ld_spec = ($urandom_range(0, 9) != 0);
        ld_id = 5'($urandom_range(16, 31));
        while (!ld_ready) begin @(posedge clk); #1; end  // ready is sampled at the edge
        @(posedge clk); #1;
        ld_valid = 1'b0;
        if ($urandom_range(0, 3) == 0) begin
          cm_valid = 1'b1; cm_addr = a; cm_ts = ts_t'(t); cm_pc = pc_t'('h400100);
          @(posedge clk); #1; cm_valid = 1'b0;
        end
        if ($urandom_range(0, 60) == 0) begin
          sq_valid = 1'b1; sq_ts = ts_t'(t); @(posedge clk); #1; sq_valid = 1'b0;
        end
      end
      idle(400);
    end

    // every mechanism must have happened
    check(n_guard > 0,  "TimeGuarding (D) happened");
    check(n_iguard > 0, "TimeGuarding (I) happened");
    check(n_fill > 0,   "GhostMinion fills happened");
    check(n_drop > 0,   "dropped fills happened");
    check(n_side > 0,   "GhostMinion hits happened");
    check(n_move > 0,   "commit moves happened");
    check(n_replay > 0, "non-coherent replays happened");
    check(n_lf > 0,     "leapfrogs happened");
    check(n_tl > 0,     "timeleaps happened");
    check(n_rej > 0,    "MSHR rejections happened");
    check(n_pf > 0,     "prefetches happened");
    check(n_div > 0,    "divider guard held an operation");
    check(n_data_err == 0, "all load data correct");
    $display("events: guard=%0d iguard=%0d fill=%0d drop=%0d gmhit=%0d move=%0d replay=%0d",
             n_guard, n_iguard, n_fill, n_drop, n_side, n_move, n_replay);
    $display("events: leapfrog=%0d timeleap=%0d reject=%0d l1d_stall=%0d prefetch=%0d div_held=%0d mem=%0d",
             n_lf, n_tl, n_rej, n_stall, n_pf, n_div, n_mem);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

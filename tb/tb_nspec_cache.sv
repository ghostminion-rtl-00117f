// tb_nspec_cache: self-checking test of one non-speculative cache level
// (1 KiB, 2-way, 2-cycle lookup, 2 MSHRs, 8 requester ids) with a behavioural
// next level in the testbench (fixed 12-cycle latency, data derived from the
// address). Checks: hit latency, that speculative misses return data without
// filling the cache, that non-speculative misses and commit writebacks do
// fill it, the side (GhostMinion) hit path, leapfrogging and rejection of
// requesters, merging, and squash removal of in-flight requests.
module tb_nspec_cache;
  import gm_pkg::*;

  localparam int LAT = 2, NLAT = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_spec, req_tgt;
  laddr_t req_addr;
  ts_t req_ts;
  logic [2:0] req_id;
  logic lk_valid; laddr_t lk_addr; ts_t lk_ts;
  logic side_hit; line_t side_data;
  logic resp_valid, resp_spec, resp_cpl, resp_nc;
  logic [7:0] resp_tmask, fail_mask;
  laddr_t resp_addr; line_t resp_data; level_e resp_level; ts_t resp_ts;
  logic wb_valid; laddr_t wb_addr; line_t wb_data;
  logic dn_valid, dn_ready, dn_spec; laddr_t dn_addr; ts_t dn_ts; logic [0:0] dn_idx; logic [3:0] dn_gen;
  logic drsp_valid, drsp_ready, drsp_nc; logic [1:0] drsp_mask; laddr_t drsp_addr; logic [3:0] drsp_gen;
  line_t drsp_data; level_e drsp_level;
  logic [1:0] dfail_mask;
  logic sq_valid; ts_t sq_ts;
  logic ev_hit, ev_side_hit, ev_miss, ev_leapfrog, ev_timeleap, ev_reject, ev_stall;

  nspec_cache #(.SIZE_BYTES(1024), .WAYS(2), .LAT(LAT), .MSHRS(2), .TGTS(2), .N_IDS(8),
                .LEVEL(LVL_L1), .HAS_SIDE(1'b1), .GEN_CHK(1'b0)) dut (
    .*, .resp_ready(1'b1), .side_level(LVL_GM));

  function automatic line_t pattern(laddr_t a);
    return {16{32'h5EED0000 ^ 32'(a)}};
  endfunction

  // next level: one request per cycle, answers NLAT cycles later
  typedef struct { int due; laddr_t addr; int idx; } pend_t;
  pend_t pq[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign dn_ready = 1'b1;
  always @(posedge clk) if (rst_n && dn_valid) pq.push_back('{cyc + NLAT, dn_addr, int'(dn_idx)});
  always_comb begin
    drsp_valid = 1'b0; drsp_mask = '0; drsp_addr = '0; drsp_data = '0;
    if (pq.size() > 0 && pq[0].due <= cyc) begin
      drsp_valid = 1'b1; drsp_mask = 2'(1 << pq[0].idx); drsp_addr = pq[0].addr;
      drsp_data = pattern(pq[0].addr);
    end
  end
  always @(posedge clk) if (drsp_valid && drsp_ready) void'(pq.pop_front());
  assign drsp_gen = '0; assign drsp_level = LVL_L2; assign drsp_nc = 1'b0;

  // side structure: hits on line 0x77 only
  assign side_hit  = lk_valid && lk_addr == 'h77;
  assign side_data = pattern('h77);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // issue one request and wait for its response (or failure); return latency
  task automatic access(input int a, input int t, input logic spec, input int id,
                        output int lat, output level_e lvl, output logic failed);
    int start;
    req_valid = 1'b1; req_addr = laddr_t'(a); req_ts = ts_t'(t); req_spec = spec;
    req_id = 3'(id); req_tgt = 1'b1;
    while (!req_ready) begin @(posedge clk); #1; end  // ready is sampled at the edge
    @(posedge clk); #1;
    req_valid = 1'b0;
    start = cyc - 1;
    failed = 1'b0;
    lat = 0;
    forever begin
      if (resp_valid && resp_tmask[id]) begin
        lat = cyc - start; lvl = resp_level;
        check(resp_data == pattern(laddr_t'(a)), $sformatf("data of 0x%0h", a));
        break;
      end
      if (fail_mask[id]) begin failed = 1'b1; break; end
      @(posedge clk); #1;
    end
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat, misses0; level_e lvl; logic failed;
  initial begin
    req_valid = 0; req_addr = '0; req_ts = '0; req_spec = 0; req_id = '0; req_tgt = 1;
    wb_valid = 0; wb_addr = '0; wb_data = '0; sq_valid = 0; sq_ts = '0; dfail_mask = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;

    // speculative miss: data from below, cache unchanged
    access('h10, 10, 1'b1, 1, lat, lvl, failed);
    check(!failed && lvl == LVL_L2, "speculative miss served from below");
    check(lat > NLAT, $sformatf("miss latency %0d", lat));
    access('h10, 11, 1'b1, 1, lat, lvl, failed);
    check(lvl == LVL_L2, "speculative miss did not fill the cache");
    // non-speculative miss fills; the next access hits in LAT cycles
    access('h10, 12, 1'b0, 2, lat, lvl, failed);
    check(lvl == LVL_L2, "non-speculative miss");
    access('h10, 13, 1'b1, 3, lat, lvl, failed);
    check(lvl == LVL_L1 && lat == LAT, $sformatf("hit after fill, latency %0d", lat));
    // commit writeback fills
    wb_valid = 1'b1; wb_addr = 'h20; wb_data = pattern('h20); @(posedge clk); #1; wb_valid = 1'b0;
    access('h20, 14, 1'b1, 1, lat, lvl, failed);
    check(lvl == LVL_L1 && lat == LAT, "hit after commit writeback");
    // side structure hit
    access('h77, 15, 1'b1, 1, lat, lvl, failed);
    check(lvl == LVL_GM && lat == LAT, "side hit");

    // MSHR pressure: two newer misses take both MSHRs, an older one leapfrogs
    req_tgt = 1'b1;
    req_valid = 1'b1; req_spec = 1'b1;
    req_addr = 'h30; req_ts = 50; req_id = 4; @(posedge clk); #1;
    req_addr = 'h31; req_ts = 51; req_id = 5; @(posedge clk); #1;
    req_addr = 'h32; req_ts = 40; req_id = 6; @(posedge clk); #1;
    req_addr = 'h33; req_ts = 60; req_id = 7; @(posedge clk); #1;
    req_valid = 1'b0;
    misses0 = 0;
    repeat (4) begin
      if (fail_mask[5]) misses0 |= 1;
      if (fail_mask[7]) misses0 |= 2;
      if (fail_mask[4] || fail_mask[6]) misses0 |= 4;
      @(posedge clk); #1;
    end
    check(misses0 == 3, $sformatf("TS51 leapfrogged and TS60 rejected (%0d)", misses0));
    repeat (30) @(posedge clk); #1;

    // merge: two requests for one line share one MSHR and one response
    req_valid = 1'b1; req_spec = 1'b1;
    req_addr = 'h40; req_ts = 70; req_id = 1; @(posedge clk); #1;
    req_addr = 'h40; req_ts = 71; req_id = 2; @(posedge clk); #1;
    req_valid = 1'b0;
    misses0 = 0;
    repeat (30) begin
      if (resp_valid && resp_tmask == 8'b0000_0110 && resp_cpl && resp_ts == 70) misses0++;
      @(posedge clk); #1;
    end
    check(misses0 == 1, "merged requests answered together");

    // squash removes a newer request still in the pipeline
    req_valid = 1'b1; req_spec = 1'b1; req_addr = 'h10; req_ts = 90; req_id = 3;
    @(posedge clk); #1; req_valid = 1'b0;
    sq_valid = 1'b1; sq_ts = 85; @(posedge clk); #1; sq_valid = 1'b0;
    misses0 = 0;
    repeat (5) begin
      if (resp_valid && resp_tmask[3]) misses0++;
      @(posedge clk); #1;
    end
    check(misses0 == 0, "squashed request gets no response");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

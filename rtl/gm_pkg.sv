// gm_pkg: types, sizes and timestamp arithmetic shared by every block of the
// GhostMinion cache system.
//
// Every instruction carries a timestamp (TS) allocated in program order. The
// timestamp space is a sliding window of 2*ROB_ENTRIES values that wraps
// around; since at most ROB_ENTRIES instructions are in flight, the modular
// distance between two live timestamps tells which is older. ts_le(a, b)
// means "a is older than or equal to b", i.e. a may transmit timing to b under
// Temporal Order. The window and the 192-entry ROB follow the paper; the line
// size, address width and level encoding are choices of this design.
package gm_pkg;

  parameter int unsigned ROB_ENTRIES = 192;               // Table 1
  parameter int unsigned TS_MOD      = 2 * ROB_ENTRIES;   // sliding window
  parameter int unsigned TS_W        = $clog2(TS_MOD);
  parameter int unsigned ADDR_W      = 48;                // byte address
  parameter int unsigned LINE_BYTES  = 64;
  parameter int unsigned OFF_W       = $clog2(LINE_BYTES);
  parameter int unsigned LINE_W      = LINE_BYTES * 8;
  parameter int unsigned LADDR_W     = ADDR_W - OFF_W;     // line address
  parameter int unsigned PC_W        = 48;

  typedef logic [TS_W-1:0]    ts_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [PC_W-1:0]    pc_t;

  // Where the data of a response (or of a GhostMinion line) came from.
  typedef enum logic [1:0] {
    LVL_L1  = 2'd0,
    LVL_L2  = 2'd1,
    LVL_MEM = 2'd2,
    LVL_GM  = 2'd3
  } level_e;

  // Outcome of an MSHR allocation attempt.
  typedef enum logic [2:0] {
    MA_NONE     = 3'd0,
    MA_MERGE    = 3'd1,
    MA_ALLOC    = 3'd2,
    MA_LEAPFROG = 3'd3,
    MA_TIMELEAP = 3'd4,
    MA_REJECT   = 3'd5
  } mshr_act_e;

  // Event pulses of the whole system, for observation and statistics.
  typedef struct packed {
    logic dgm_guarded;     // TimeGuarding hid a newer line from a D read
    logic igm_guarded;     // same on the instruction side
    logic dgm_fill;        // a speculative line entered the D GhostMinion
    logic dgm_fill_drop;   // no way could be taken: line returned unrecorded
    logic dgm_side_hit;    // a load was served by the D GhostMinion
    logic commit_move;     // a committed load moved its line into the L1D
    logic commit_replay;   // committed load used a non-coherent copy
    logic leapfrog;        // an MSHR was taken from a newer owner (any level)
    logic timeleap;        // a same-line MSHR owned by a newer request restarted
    logic mshr_reject;     // an MSHR allocation was refused
    logic l1d_stall;       // the L1D pipeline waited for its response port
    logic pf_issue;        // the L2 prefetcher issued a request
    logic div_wait;        // a ready younger division waited behind an older one
  } events_t;

  // (b - a) mod TS_MOD
  function automatic logic [TS_W:0] ts_dist(ts_t a, ts_t b);
    logic [TS_W:0] d;
    if (b >= a) d = {1'b0, b} - {1'b0, a};
    else        d = {1'b0, b} + (TS_W+1)'(TS_MOD) - {1'b0, a};
    return d;
  endfunction

  // a is older than or equal to b
  function automatic logic ts_le(ts_t a, ts_t b);
    return ts_dist(a, b) <= (TS_W+1)'(ROB_ENTRIES);
  endfunction

  // a is strictly older than b
  function automatic logic ts_lt(ts_t a, ts_t b);
    return (a != b) && ts_le(a, b);
  endfunction

  // Ordering key of a request: non-speculative requests rank as oldest.
  // Returns 1 when request b is strictly newer than request a.
  function automatic logic key_newer(logic a_spec, ts_t a_ts, logic b_spec, ts_t b_ts);
    if (!b_spec) return 1'b0;
    if (!a_spec) return 1'b1;
    return ts_lt(a_ts, b_ts);
  endfunction

  // a + n mod TS_MOD
  function automatic ts_t ts_add(ts_t a, int unsigned n);
    logic [TS_W+4:0] s;
    s = (TS_W+5)'(a) + (TS_W+5)'(n);
    if (s >= (TS_W+5)'(TS_MOD)) s = s - (TS_W+5)'(TS_MOD);
    return ts_t'(s);
  endfunction

endpackage

// ghostminion: the small speculative cache that sits beside an L1 and holds
// the lines brought in by speculative loads (or fetches) until they commit.
//
// Every line carries the timestamp (TS) of the instruction that filled it, the
// level it came from, and a non-coherent flag. Validity and timestamps live in
// flip-flops beside the data array so that they can all be changed at once.
// The rules, all from the paper (TimeGuarding, free-slotting):
//   * read   : hits only on a line whose TS is older than or equal to the
//              reader's TS; a tag match on a newer line is reported as a miss
//              (rd_guarded marks such TimeGuarded misses for statistics);
//   * fill   : takes a free way first; otherwise overwrites the way with the
//              newest TS among those whose TS is newer than or equal to the
//              filler's; if there is none the fill is dropped;
//   * commit : a committing load finds a readable line for its address, the
//              line is handed out (to be written into the L1) and freed;
//   * squash : one cycle invalidates every line strictly newer than the
//              misspeculated instruction's TS;
//   * inval  : a coherence invalidation removes a line regardless of TS.
// Lines are only ever Shared or Invalid; a line obtained while another core
// held it Exclusive/Modified is marked non-coherent (nc) so that its load is
// replayed at commit (COHERENT=1). The instruction-side minion uses
// COHERENT=0 and ignores the flag.
//
// Timing: rd_* and cm_* are combinational on the request (the minion is
// looked up in parallel with the last stage of its L1). Fills, commits,
// squashes and invalidations update the state at the next clock edge, in that
// order of precedence: a fill from an instruction newer than a same-cycle
// squash is dropped. The read, fill, commit and squash rules and the nc flag
// follow the published design. Where its prose says a fill may replace only a
// strictly newer line and its figure allows an equal timestamp, the figure
// (newer or equal) is followed. Taking the newest allowed way as the victim,
// keeping duplicate copies of a line with different timestamps and the 64 B
// line are this design's choices; the 2 KiB, 2-way size is the published one.
module ghostminion
  import gm_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 2048,
  parameter int unsigned WAYS       = 2,
  parameter bit          COHERENT   = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  // TimeGuarded read
  input  logic   rd_valid,
  input  laddr_t rd_addr,
  input  ts_t    rd_ts,
  output logic   rd_hit,
  output logic   rd_guarded,
  output line_t  rd_data,
  output level_e rd_level,
  // TimeGuarded fill
  input  logic   fill_valid,
  input  laddr_t fill_addr,
  input  ts_t    fill_ts,
  input  line_t  fill_data,
  input  level_e fill_level,
  input  logic   fill_nc,
  output logic   fill_ok,        // combinational: the fill finds a way
  // commit: writeback to L1 and free the slot
  input  logic   cm_valid,
  input  laddr_t cm_addr,
  input  ts_t    cm_ts,
  output logic   cm_hit,
  output line_t  cm_data,
  output level_e cm_level,
  output logic   cm_nc,
  // misspeculation wipe
  input  logic   sq_valid,
  input  ts_t    sq_ts,
  // coherence invalidation
  input  logic   inv_valid,
  input  laddr_t inv_addr,
  // occupancy, for observation
  output logic [$clog2(SIZE_BYTES/LINE_BYTES+1)-1:0] occupancy
);

  localparam int unsigned LINES = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = LADDR_W - ((SETS > 1) ? $clog2(SETS) : 0);

  typedef struct packed {
    logic           valid;
    logic [TAG_W-1:0] tag;
    ts_t            ts;
    level_e         level;
    logic           nc;
  } meta_t;

  meta_t meta_q [SETS][WAYS];
  line_t data_q [LINES];

  function automatic logic [SET_W-1:0] set_of(laddr_t a);
    if (SETS > 1) return SET_W'(a);
    else          return '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(laddr_t a);
    return a[LADDR_W-1 -: TAG_W];
  endfunction

  // ---------------------------------------------------------------- read
  logic [SET_W-1:0] rd_set;
  logic [WAY_W-1:0] rd_way;
  always_comb begin
    rd_set     = set_of(rd_addr);
    rd_hit     = 1'b0;
    rd_guarded = 1'b0;
    rd_way     = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (meta_q[rd_set][w].valid && meta_q[rd_set][w].tag == tag_of(rd_addr)) begin
        if (ts_le(meta_q[rd_set][w].ts, rd_ts)) begin
          if (!rd_hit) rd_way = WAY_W'(w);
          rd_hit = 1'b1;
        end else begin
          rd_guarded = 1'b1;
        end
      end
    end
    rd_hit     = rd_hit && rd_valid;
    rd_guarded = rd_guarded && rd_valid && !rd_hit;
    rd_data    = data_q[rd_set * WAYS + rd_way];
    rd_level   = meta_q[rd_set][rd_way].level;
  end

  // -------------------------------------------------------------- commit
  logic [SET_W-1:0] cm_set;
  logic [WAY_W-1:0] cm_way;
  always_comb begin
    cm_set = set_of(cm_addr);
    cm_hit = 1'b0;
    cm_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!cm_hit && meta_q[cm_set][w].valid && meta_q[cm_set][w].tag == tag_of(cm_addr) &&
          ts_le(meta_q[cm_set][w].ts, cm_ts)) begin
        cm_hit = 1'b1;
        cm_way = WAY_W'(w);
      end
    end
    cm_hit   = cm_hit && cm_valid;
    cm_data  = data_q[cm_set * WAYS + cm_way];
    cm_level = meta_q[cm_set][cm_way].level;
    cm_nc    = COHERENT && meta_q[cm_set][cm_way].nc;
  end

  // ---------------------------------------------------------------- fill
  logic [SET_W-1:0] fl_set;
  logic [WAY_W-1:0] fl_way;
  logic             fl_free, fl_evict;
  ts_t              fl_best_ts;
  logic             fill_live;
  always_comb begin
    fl_set     = set_of(fill_addr);
    fl_free    = 1'b0;
    fl_evict   = 1'b0;
    fl_way     = '0;
    fl_best_ts = '0;
    // free slot first
    for (int w = 0; w < WAYS; w++) begin
      if (!fl_free && !meta_q[fl_set][w].valid) begin
        fl_free = 1'b1;
        fl_way  = WAY_W'(w);
      end
    end
    // otherwise the newest line that is newer than or equal to the filler
    if (!fl_free) begin
      for (int w = 0; w < WAYS; w++) begin
        if (ts_le(fill_ts, meta_q[fl_set][w].ts) &&
            (!fl_evict || ts_lt(fl_best_ts, meta_q[fl_set][w].ts))) begin
          fl_evict   = 1'b1;
          fl_best_ts = meta_q[fl_set][w].ts;
          fl_way     = WAY_W'(w);
        end
      end
    end
    // a fill from an instruction squashed in this very cycle is dropped
    fill_live = !(sq_valid && ts_lt(sq_ts, fill_ts)) &&
                !(inv_valid && inv_addr == fill_addr);
    fill_ok   = fill_valid && fill_live && (fl_free || fl_evict);
  end

  // --------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          meta_q[s][w] <= '0;
    end else begin
      if (cm_hit) meta_q[cm_set][cm_way].valid <= 1'b0;
      if (fill_ok) begin
        meta_q[fl_set][fl_way].valid <= 1'b1;
        meta_q[fl_set][fl_way].tag   <= tag_of(fill_addr);
        meta_q[fl_set][fl_way].ts    <= fill_ts;
        meta_q[fl_set][fl_way].level <= fill_level;
        meta_q[fl_set][fl_way].nc    <= fill_nc;
      end
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          if (fill_ok && SET_W'(s) == fl_set && WAY_W'(w) == fl_way) begin
            // the way just filled holds a live line
          end else if (sq_valid && meta_q[s][w].valid && ts_lt(sq_ts, meta_q[s][w].ts))
            meta_q[s][w].valid <= 1'b0;
          else if (inv_valid && meta_q[s][w].valid && SET_W'(s) == set_of(inv_addr) &&
              meta_q[s][w].tag == tag_of(inv_addr))
            meta_q[s][w].valid <= 1'b0;
        end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_ok) data_q[fl_set * WAYS + fl_way] <= fill_data;
  end

  always_comb begin
    occupancy = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++)
        occupancy = occupancy + meta_q[s][w].valid;
  end

endmodule

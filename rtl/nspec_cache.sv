// nspec_cache: one level of the non-speculative cache hierarchy (used as L1D,
// L1I and L2), whose contents change only through non-speculative requests
// and commit writebacks, never through speculative ones.
//
// A request (line address, timestamp, speculative bit, requester id, and
// whether it waits for data) enters a LAT-stage pipeline and is looked up at
// the last stage. At that stage an optional side structure (the GhostMinion
// beside an L1) is consulted through lk_*/side_*; a hit in either answers the
// request. A miss allocates a timestamped MSHR (mshr_file), which may merge,
// leapfrog, timeleap or be rejected; rejected and displaced requesters are
// reported in fail_mask one cycle later and must retry. Downstream responses
// complete an MSHR: a non-speculative one fills this level (round-robin
// victim), a speculative one only passes the line up, tagged with the level
// it came from so that the GhostMinion can record it.
//
// The response port has a ready input (tied high where the consumer always
// accepts, back-pressure from the L1s at the L2). When a hit at the last stage
// and a miss completion want it in the same cycle, the older request (lower
// timestamp, non-speculative first) goes and the other waits: a stalled hit
// stalls the pipeline, a stalled completion holds drsp_ready low. A squash
// removes speculative requests newer than its timestamp from the pipeline and
// from the MSHRs.
//
// Storage: the tags, valid bits and round-robin pointer of a set form one
// memory word, and the data one word per line, so both map onto RAMs. They
// have no reset: after reset the cache writes every set invalid, one set per
// cycle, and holds req_ready low until done (SETS cycles: 512 for the L1D,
// 4096 for the L2). Sizes and latencies are parameters whose defaults are the
// published L1D values (64 KiB, 2-way, 2-cycle, 4 MSHRs); the replacement policy
// (round-robin), the one-request-per-cycle pipeline, the reset sweep and the
// arbitration details are this design's choices.
module nspec_cache
  import gm_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 65536,
  parameter int unsigned WAYS       = 2,
  parameter int unsigned LAT        = 2,
  parameter int unsigned MSHRS      = 4,
  parameter int unsigned TGTS       = 4,
  parameter int unsigned N_IDS      = 32,
  parameter int unsigned GEN_W      = 4,
  parameter level_e      LEVEL      = LVL_L1,
  parameter bit          HAS_SIDE   = 1'b1,
  parameter bit          GEN_CHK    = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // requests from above
  input  logic                     req_valid,
  output logic                     req_ready,
  input  laddr_t                   req_addr,
  input  ts_t                      req_ts,
  input  logic                     req_spec,
  input  logic                     req_tgt,
  input  logic [$clog2(N_IDS)-1:0] req_id,
  // side lookup (GhostMinion) at the last stage
  output logic                     lk_valid,
  output laddr_t                   lk_addr,
  output ts_t                      lk_ts,
  input  logic                     side_hit,
  input  line_t                    side_data,
  input  level_e                   side_level,
  // responses and failures to above
  output logic                     resp_valid,
  input  logic                     resp_ready,
  output logic [N_IDS-1:0]         resp_tmask,
  output laddr_t                   resp_addr,
  output line_t                    resp_data,
  output level_e                   resp_level,
  output logic                     resp_spec,
  output ts_t                      resp_ts,
  output logic                     resp_cpl,   // a miss completion
  output logic                     resp_nc,
  output logic [N_IDS-1:0]         fail_mask,
  // commit writeback from the GhostMinion
  input  logic                     wb_valid,
  input  laddr_t                   wb_addr,
  input  line_t                    wb_data,
  // requests to below
  output logic                     dn_valid,
  input  logic                     dn_ready,
  output laddr_t                   dn_addr,
  output ts_t                      dn_ts,
  output logic                     dn_spec,
  output logic [$clog2(MSHRS)-1:0] dn_idx,
  output logic [GEN_W-1:0]         dn_gen,
  // responses from below
  input  logic                     drsp_valid,
  output logic                     drsp_ready,
  input  logic [MSHRS-1:0]         drsp_mask,
  input  laddr_t                   drsp_addr,
  input  logic [GEN_W-1:0]         drsp_gen,
  input  line_t                    drsp_data,
  input  level_e                   drsp_level,
  input  logic                     drsp_nc,
  input  logic [MSHRS-1:0]         dfail_mask,  // request failed below: retry
  // squash
  input  logic                     sq_valid,
  input  ts_t                      sq_ts,
  // events, one pulse each
  output logic                     ev_hit,
  output logic                     ev_side_hit,
  output logic                     ev_miss,
  output logic                     ev_leapfrog,
  output logic                     ev_timeleap,
  output logic                     ev_reject,
  output logic                     ev_stall
);

  localparam int unsigned LINES = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = LADDR_W - ((SETS > 1) ? $clog2(SETS) : 0);
  localparam int unsigned ID_W  = (N_IDS > 1) ? $clog2(N_IDS) : 1;

  typedef struct packed {
    laddr_t          addr;
    ts_t             ts;
    logic            spec;
    logic            tgt;
    logic [ID_W-1:0] id;
  } preq_t;

  // per-set metadata, one memory word per set: valid bits, tags and the
  // round-robin pointer. It has no reset; after reset a sweep writes every
  // set invalid (SETS cycles, requests held off meanwhile).
  typedef struct packed {
    logic [WAYS-1:0]             v;
    logic [WAYS-1:0][TAG_W-1:0]  tag;
    logic [WAY_W-1:0]            rr;
  } smeta_t;

  smeta_t meta_q [SETS];
  line_t  data_q [LINES];
  logic             init_q;
  logic [SET_W-1:0] init_set_q;

  logic  p_valid [LAT];
  preq_t p_req   [LAT];

  function automatic logic [SET_W-1:0] set_of(laddr_t a);
    if (SETS > 1) return SET_W'(a);
    else          return '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(laddr_t a);
    return a[LADDR_W-1 -: TAG_W];
  endfunction

  // ------------------------------------------------------- last-stage lookup
  preq_t            ex;
  logic             ex_valid;
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic [SET_W-1:0] ex_set;
  smeta_t           ex_meta;
  always_comb begin
    ex       = p_req[LAT-1];
    ex_valid = p_valid[LAT-1];
    ex_set   = set_of(ex.addr);
    hit      = 1'b0;
    hit_way  = '0;
    ex_meta  = meta_q[ex_set];
    for (int w = 0; w < WAYS; w++)
      if (!hit && ex_meta.v[w] && ex_meta.tag[w] == tag_of(ex.addr)) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
  end

  assign lk_valid = ex_valid && HAS_SIDE;
  assign lk_addr  = ex.addr;
  assign lk_ts    = ex.ts;

  logic any_hit, s_hit;
  assign s_hit   = HAS_SIDE && side_hit && !hit;
  assign any_hit = hit || s_hit;

  // ----------------------------------------------------------------- MSHRs
  mshr_act_e        a_act;
  logic [$clog2(MSHRS)-1:0] a_idx;
  logic [N_IDS-1:0] m_fail;
  logic             cpl_valid, cpl_spec, cpl_orphan;
  laddr_t           cpl_addr;
  ts_t              cpl_ts;
  logic [N_IDS-1:0] cpl_tmask;
  logic             ex_go, cpl_wins, a_valid, rsp_ready;
  logic [$clog2(MSHRS+1)-1:0] m_busy;

  // the older of a last-stage hit/miss and a completion proceeds
  assign cpl_wins  = cpl_valid && !cpl_orphan &&
                     key_newer(cpl_spec, cpl_ts, ex.spec, ex.ts);
  assign ex_go     = ex_valid && !(cpl_valid && cpl_wins) &&
                     !(any_hit && ex.tgt && !resp_ready);
  assign rsp_ready = !(cpl_valid && ex_valid && !cpl_wins) &&
                     (resp_ready || cpl_orphan || cpl_tmask == '0);
  assign a_valid   = ex_go && !any_hit;
  assign drsp_ready = rsp_ready;

  mshr_file #(.N(MSHRS), .TGTS(TGTS), .N_IDS(N_IDS), .GEN_W(GEN_W)) u_mshr (
    .clk, .rst_n,
    .a_valid, .a_addr(ex.addr), .a_ts(ex.ts), .a_spec(ex.spec), .a_tgt(ex.tgt),
    .a_id(ex.id), .a_act, .a_idx, .fail_mask(m_fail),
    .dn_valid, .dn_ready, .dn_idx, .dn_addr, .dn_ts, .dn_spec, .dn_gen,
    .rsp_valid(drsp_valid), .rsp_mask(drsp_mask), .rsp_addr(drsp_addr),
    .rsp_gen_chk(GEN_CHK), .rsp_gen(drsp_gen), .rsp_ready, .dfail(dfail_mask),
    .cpl_valid, .cpl_addr, .cpl_ts, .cpl_spec, .cpl_orphan, .cpl_tmask,
    .sq_valid, .sq_ts, .busy(m_busy)
  );

  // --------------------------------------------------------------- pipeline
  logic stall;
  assign stall     = ex_valid && !ex_go;
  assign req_ready = !stall && !init_q;

  // a squash removes newer speculative requests in flight
  function automatic logic killed(logic spec, ts_t ts);
    return sq_valid && spec && ts_lt(sq_ts, ts);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) p_valid[s] <= 1'b0;
    end else if (!stall) begin
      p_valid[0] <= req_valid && !init_q && !killed(req_spec, req_ts);
      for (int s = 1; s < LAT; s++)
        p_valid[s] <= p_valid[s-1] && !killed(p_req[s-1].spec, p_req[s-1].ts);
    end else begin
      for (int s = 0; s < LAT; s++)
        p_valid[s] <= p_valid[s] && !killed(p_req[s].spec, p_req[s].ts);
    end
  end

  always_ff @(posedge clk) begin
    if (!stall) begin
      p_req[0] <= '{addr: req_addr, ts: req_ts, spec: req_spec, tgt: req_tgt, id: ID_W'(req_id)};
      for (int s = 1; s < LAT; s++) p_req[s] <= p_req[s-1];
    end
  end

  // --------------------------------------------------------------- response
  // A response is offered whether or not resp_ready is high (valid never
  // depends on ready); it is taken only on resp_valid && resp_ready.
  logic hit_resp, cpl_resp;
  assign hit_resp = ex_valid && !(cpl_valid && cpl_wins) && any_hit && ex.tgt;
  assign cpl_resp = cpl_valid && !(ex_valid && !cpl_wins) && !cpl_orphan && cpl_tmask != '0;

  always_comb begin
    resp_valid = 1'b0;
    resp_tmask = '0;
    resp_addr  = ex.addr;
    resp_data  = data_q[ex_set * WAYS + int'(hit_way)];
    resp_level = LEVEL;
    resp_spec  = ex.spec;
    resp_ts    = ex.ts;
    resp_cpl   = 1'b0;
    resp_nc    = 1'b0;
    if (hit_resp) begin
      resp_valid = 1'b1;
      resp_tmask[ex.id] = 1'b1;
      if (s_hit) begin
        resp_data  = side_data;
        resp_level = side_level;
      end
    end else if (cpl_resp) begin
      resp_valid = 1'b1;
      resp_tmask = cpl_tmask;
      resp_addr  = cpl_addr;
      resp_data  = drsp_data;
      resp_level = drsp_level;
      resp_spec  = cpl_spec;
      resp_ts    = cpl_ts;
      resp_cpl   = 1'b1;
      resp_nc    = drsp_nc;
    end
  end

  // ------------------------------------------------------------------- fills
  // Non-speculative completions fill this level; so do commit writebacks.
  // Both may write in one cycle; to the same set they form a single write.
  logic             cf_en, wb_en, wb_present, cf_present;
  logic [SET_W-1:0] cf_set, wb_set;
  logic [WAY_W-1:0] cf_way, wb_way;
  smeta_t           cf_meta, wb_meta, cf_new, wb_new;
  logic             same_set;
  always_comb begin
    cf_set  = set_of(cpl_addr);
    wb_set  = set_of(wb_addr);
    cf_meta = meta_q[cf_set];
    wb_meta = meta_q[wb_set];
    cf_present = 1'b0;
    wb_present = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (cf_meta.v[w] && cf_meta.tag[w] == tag_of(cpl_addr)) cf_present = 1'b1;
      if (wb_meta.v[w] && wb_meta.tag[w] == tag_of(wb_addr)) wb_present = 1'b1;
    end
    cf_en    = !init_q && cpl_valid && rsp_ready && !cpl_spec && !cf_present;
    wb_en    = !init_q && wb_valid && !wb_present && !(cf_en && cpl_addr == wb_addr);
    same_set = cf_en && wb_en && cf_set == wb_set;
    cf_way   = cf_meta.rr;
    wb_way   = same_set ? WAY_W'(cf_meta.rr + 1'b1) : wb_meta.rr;

    cf_new              = cf_meta;
    cf_new.v[cf_way]    = 1'b1;
    cf_new.tag[cf_way]  = tag_of(cpl_addr);
    cf_new.rr           = WAY_W'(cf_way + 1'b1);
    if (same_set) begin
      cf_new.v[wb_way]   = 1'b1;
      cf_new.tag[wb_way] = tag_of(wb_addr);
      cf_new.rr          = WAY_W'(wb_way + 1'b1);
    end
    wb_new              = wb_meta;
    wb_new.v[wb_way]    = 1'b1;
    wb_new.tag[wb_way]  = tag_of(wb_addr);
    wb_new.rr           = WAY_W'(wb_way + 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_set_q <= '0;
    end else if (init_q) begin
      init_set_q <= SET_W'(init_set_q + 1'b1);
      if (32'(init_set_q) == SETS - 1) init_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_q)                meta_q[init_set_q] <= '0;
    if (cf_en)                 meta_q[cf_set]     <= cf_new;
    if (wb_en && !same_set)    meta_q[wb_set]     <= wb_new;
    if (cf_en) data_q[cf_set * WAYS + int'(cf_way)] <= drsp_data;
    if (wb_en) data_q[wb_set * WAYS + int'(wb_way)] <= wb_data;
  end

  // ------------------------------------------------------------- failures
  logic [N_IDS-1:0] rej_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rej_q <= '0;
    else begin
      rej_q <= '0;
      if (a_valid && a_act == MA_REJECT && ex.tgt) rej_q[ex.id] <= 1'b1;
    end
  end
  assign fail_mask = m_fail | rej_q;

  // ---------------------------------------------------------------- events
  assign ev_hit      = ex_go && hit;
  assign ev_side_hit = ex_go && s_hit;
  assign ev_miss     = a_valid;
  assign ev_leapfrog = a_valid && a_act == MA_LEAPFROG;
  assign ev_timeleap = a_valid && a_act == MA_TIMELEAP;
  assign ev_reject   = a_valid && a_act == MA_REJECT;
  assign ev_stall    = stall;

endmodule

// mshr_file: miss status holding registers that carry timestamps, so that a
// speculative miss can never delay an older one (leapfrogging).
//
// Each entry tracks one outstanding line: its address, the ordering key of its
// owner (the oldest requester: timestamp plus a speculative bit, a
// non-speculative request ranking as oldest of all), a generation number that
// changes whenever the entry is restarted, and up to TGTS requesters
// (targets) waiting for the line. An allocation request is resolved in one
// cycle:
//   MERGE    the line is outstanding and its owner is older than or equal to
//            the request: the request joins as a target;
//   ALLOC    a free entry is taken;
//   LEAPFROG all entries are busy: the entry with the newest owner that is
//            strictly newer than the request is taken over; its targets fail
//            and must be retried (paper, Fig. 6);
//   TIMELEAP the line is outstanding but owned by a newer request: the entry
//            becomes the request's, is restarted (re-issued downstream with a
//            new generation, so the old response is ignored), and the newer
//            targets fail (paper, Sec. 4.5);
//   REJECT   nothing may be taken: the requester must retry.
// Failed targets are reported as a bit mask over requester ids one cycle
// later; so are the targets of an entry whose request a lower level has
// leapfrogged or rejected (dfail), which frees the entry. A squash drops targets newer than the misspeculated timestamp; an
// entry whose owner is squashed becomes an orphan, which ranks as newest of
// all, so any live request that meets it restarts or displaces it.
// Downstream requests are issued oldest key first, one per cycle with a
// valid/ready handshake. A response names the entries it may complete (mask),
// the line address and optionally the generation; the completion is visible
// combinationally and the entry is freed when rsp_ready is high. The owner of
// the instance must not present an allocation and a completing response in
// the same cycle. Target count, generation width and the orphan rule are this
// design's choices; the merge/leapfrog/timeleap rules follow the paper.
module mshr_file
  import gm_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned TGTS  = 4,
  parameter int unsigned N_IDS = 32,
  parameter int unsigned GEN_W = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // allocation
  input  logic                     a_valid,
  input  laddr_t                   a_addr,
  input  ts_t                      a_ts,
  input  logic                     a_spec,
  input  logic                     a_tgt,    // request waits for the data
  input  logic [$clog2(N_IDS)-1:0] a_id,
  output mshr_act_e                a_act,
  output logic [$clog2(N)-1:0]     a_idx,
  output logic [N_IDS-1:0]         fail_mask,  // registered
  // downstream issue
  output logic                     dn_valid,
  input  logic                     dn_ready,
  output logic [$clog2(N)-1:0]     dn_idx,
  output laddr_t                   dn_addr,
  output ts_t                      dn_ts,
  output logic                     dn_spec,
  output logic [GEN_W-1:0]         dn_gen,
  // downstream response
  input  logic                     rsp_valid,
  input  logic [N-1:0]             rsp_mask,
  input  laddr_t                   rsp_addr,
  input  logic                     rsp_gen_chk,
  input  logic [GEN_W-1:0]         rsp_gen,
  input  logic                     rsp_ready,
  input  logic [N-1:0]             dfail,    // a level below dropped the request
  output logic                     cpl_valid,
  output laddr_t                   cpl_addr,
  output ts_t                      cpl_ts,
  output logic                     cpl_spec,
  output logic                     cpl_orphan,
  output logic [N_IDS-1:0]         cpl_tmask,
  // squash
  input  logic                     sq_valid,
  input  ts_t                      sq_ts,
  // observation
  output logic [$clog2(N+1)-1:0]   busy
);

  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned ID_W  = (N_IDS > 1) ? $clog2(N_IDS) : 1;

  typedef struct packed {
    logic               valid;
    logic               issued;
    logic               orphan;
    laddr_t             addr;
    ts_t                ts;
    logic               spec;
    logic [GEN_W-1:0]   gen;
  } ent_t;

  ent_t            e_q   [N];
  logic [TGTS-1:0] tv_q  [N];
  logic [ID_W-1:0] tid_q [N][TGTS];
  ts_t             tts_q [N][TGTS];

  // entry e's owner is strictly newer than the request
  function automatic logic newer_than_req(ent_t e);
    return e.orphan || key_newer(a_spec, a_ts, e.spec, e.ts);
  endfunction

  // ------------------------------------------------------------ allocation
  logic             m_hit, f_hit, v_hit;
  logic [IDX_W-1:0] m_idx, f_idx, v_idx;
  logic [$clog2(TGTS+1)-1:0] t_slot;
  logic             t_free;
  always_comb begin
    m_hit = 1'b0; m_idx = '0;
    f_hit = 1'b0; f_idx = '0;
    v_hit = 1'b0; v_idx = '0;
    for (int i = 0; i < N; i++) begin
      if (!m_hit && e_q[i].valid && e_q[i].addr == a_addr) begin
        m_hit = 1'b1; m_idx = IDX_W'(i);
      end
      if (!f_hit && !e_q[i].valid) begin
        f_hit = 1'b1; f_idx = IDX_W'(i);
      end
      // leapfrog victim: the newest owner strictly newer than the request
      if (e_q[i].valid && newer_than_req(e_q[i])) begin
        if (!v_hit || e_q[i].orphan ||
            (!e_q[v_idx].orphan && key_newer(e_q[v_idx].spec, e_q[v_idx].ts, e_q[i].spec, e_q[i].ts))) begin
          v_hit = 1'b1; v_idx = IDX_W'(i);
        end
      end
    end
    // target slot in the matching entry: the request's own id, else a free one
    t_free = 1'b0; t_slot = '0;
    for (int t = 0; t < TGTS; t++)
      if (!t_free && tv_q[m_idx][t] && tid_q[m_idx][t] == a_id) begin
        t_free = 1'b1; t_slot = ($clog2(TGTS+1))'(t);
      end
    for (int t = 0; t < TGTS; t++)
      if (!t_free && !tv_q[m_idx][t]) begin
        t_free = 1'b1; t_slot = ($clog2(TGTS+1))'(t);
      end

    a_act = MA_NONE;
    a_idx = '0;
    if (a_valid) begin
      if (m_hit) begin
        a_idx = m_idx;
        if (newer_than_req(e_q[m_idx]))  a_act = MA_TIMELEAP;
        else if (!a_tgt || t_free)       a_act = MA_MERGE;
        else                             a_act = MA_REJECT;
      end else if (f_hit) begin
        a_act = MA_ALLOC;    a_idx = f_idx;
      end else if (v_hit) begin
        a_act = MA_LEAPFROG; a_idx = v_idx;
      end else begin
        a_act = MA_REJECT;
      end
    end
  end

  // targets of the displaced owner that fail
  // and targets of entries whose downstream request failed (cascading
  // leapfrog); an entry taken over in this same cycle keeps its new owner
  logic [N_IDS-1:0] fail_d;
  logic [N-1:0]     dfail_go;
  always_comb begin
    fail_d = '0;
    if (a_act == MA_LEAPFROG || a_act == MA_TIMELEAP)
      for (int t = 0; t < TGTS; t++)
        if (tv_q[a_idx][t] && !(a_tgt && tid_q[a_idx][t] == a_id))
          fail_d[tid_q[a_idx][t]] = 1'b1;
    for (int i = 0; i < N; i++) begin
      dfail_go[i] = dfail[i] && e_q[i].valid && e_q[i].issued &&
                    !(IDX_W'(i) == a_idx && (a_act == MA_LEAPFROG || a_act == MA_TIMELEAP));
      if (dfail_go[i]) begin
        for (int t = 0; t < TGTS; t++)
          if (tv_q[i][t]) fail_d[tid_q[i][t]] = 1'b1;
        if (a_act == MA_MERGE && a_tgt && IDX_W'(i) == a_idx) fail_d[a_id] = 1'b1;
      end
    end
  end

  // ----------------------------------------------------------------- issue
  logic             i_hit;
  logic [IDX_W-1:0] i_idx;
  always_comb begin
    i_hit = 1'b0; i_idx = '0;
    for (int i = 0; i < N; i++)
      if (e_q[i].valid && !e_q[i].issued && !e_q[i].orphan &&
          (!i_hit || key_newer(e_q[i].spec, e_q[i].ts, e_q[i_idx].spec, e_q[i_idx].ts))) begin
        i_hit = 1'b1; i_idx = IDX_W'(i);
      end
    dn_valid = i_hit;
    dn_idx   = i_idx;
    dn_addr  = e_q[i_idx].addr;
    dn_ts    = e_q[i_idx].ts;
    dn_spec  = e_q[i_idx].spec;
    dn_gen   = e_q[i_idx].gen;
  end

  // ------------------------------------------------------------ completion
  logic             c_hit;
  logic [IDX_W-1:0] c_idx;
  always_comb begin
    c_hit = 1'b0; c_idx = '0;
    for (int i = 0; i < N; i++)
      if (!c_hit && rsp_mask[i] && e_q[i].valid && e_q[i].issued && e_q[i].addr == rsp_addr &&
          (!rsp_gen_chk || e_q[i].gen == rsp_gen)) begin
        c_hit = 1'b1; c_idx = IDX_W'(i);
      end
    cpl_valid  = rsp_valid && c_hit;
    cpl_addr   = e_q[c_idx].addr;
    cpl_ts     = e_q[c_idx].ts;
    cpl_spec   = e_q[c_idx].spec;
    cpl_orphan = e_q[c_idx].orphan;
    cpl_tmask  = '0;
    for (int t = 0; t < TGTS; t++)
      if (tv_q[c_idx][t]) cpl_tmask[tid_q[c_idx][t]] = 1'b1;
  end

  // ----------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        e_q[i]  <= '0;
        tv_q[i] <= '0;
        for (int t = 0; t < TGTS; t++) begin
          tid_q[i][t] <= '0;
          tts_q[i][t] <= '0;
        end
      end
      fail_mask <= '0;
    end else begin
      fail_mask <= fail_d;
      // squash first: later updates of this cycle take precedence
      if (sq_valid)
        for (int i = 0; i < N; i++) begin
          for (int t = 0; t < TGTS; t++)
            if (ts_lt(sq_ts, tts_q[i][t])) tv_q[i][t] <= 1'b0;
          if (e_q[i].valid && e_q[i].spec && ts_lt(sq_ts, e_q[i].ts)) begin
            if (e_q[i].issued) e_q[i].orphan <= 1'b1;
            else               e_q[i].valid  <= 1'b0;
          end
        end
      if (dn_valid && dn_ready) e_q[i_idx].issued <= 1'b1;
      if (cpl_valid && rsp_ready) begin
        e_q[c_idx].valid <= 1'b0;
        tv_q[c_idx]      <= '0;
      end
      for (int i = 0; i < N; i++)
        if (dfail_go[i]) begin
          e_q[i].valid <= 1'b0;
          tv_q[i]      <= '0;
        end
      case (a_act)
        MA_MERGE: if (a_tgt) begin
          tv_q[a_idx][t_slot[$clog2(TGTS)-1:0]]  <= 1'b1;
          tid_q[a_idx][t_slot[$clog2(TGTS)-1:0]] <= a_id;
          tts_q[a_idx][t_slot[$clog2(TGTS)-1:0]] <= a_ts;
        end
        MA_ALLOC, MA_LEAPFROG, MA_TIMELEAP: begin
          e_q[a_idx].valid  <= 1'b1;
          e_q[a_idx].issued <= 1'b0;
          e_q[a_idx].orphan <= 1'b0;
          e_q[a_idx].addr   <= a_addr;
          e_q[a_idx].ts     <= a_ts;
          e_q[a_idx].spec   <= a_spec;
          e_q[a_idx].gen    <= e_q[a_idx].gen + 1'b1;
          tv_q[a_idx]       <= TGTS'(a_tgt);
          tid_q[a_idx][0]   <= a_id;
          tts_q[a_idx][0]   <= a_ts;
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    busy = '0;
    for (int i = 0; i < N; i++) busy = busy + e_q[i].valid;
  end

  // an allocation and a completion never meet in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(a_valid && cpl_valid && rsp_ready));

endmodule

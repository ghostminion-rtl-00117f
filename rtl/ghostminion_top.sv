// ghostminion_top: the cache side of one core protected by GhostMinions.
//
// Structure (the paper's Fig. 2, with Table 1's sizes as defaults):
//
//   core loads  --> L1D (64 KiB, 2-way, 2 cycles, 4 MSHRs) + D GhostMinion
//   core fetch  --> L1I (32 KiB, 2-way, 2 cycles, 4 MSHRs) + I GhostMinion
//   L1D / L1I misses + L2 prefetches --(oldest first)--> L2 (2 MiB, 8-way,
//   20 cycles, 20 MSHRs, stride prefetcher with a 64-entry RPT) --> memory
//
// Every request carries the timestamp of its instruction and a speculative
// bit, all the way through the MSHRs of every level. Speculative requests
// never change L1/L2 contents: the line they bring back is recorded in the
// GhostMinion beside the L1 (subject to TimeGuarding) and returned to the
// core. When a load commits, the core sends its address and timestamp on the
// commit port: a readable line in the D GhostMinion is moved into the L1D and
// freed, the L2 prefetcher is trained if the line came from the L2 or memory,
// and a load that used a non-coherent copy is told to replay (cm_replay).
// Instruction commits move lines from the I GhostMinion into the L1I. A squash
// (timestamp of the misspeculated instruction) wipes newer lines from both
// GhostMinions in one cycle and removes newer requests from every pipeline
// and MSHR. Also included: the timestamp allocator and the in-order issue
// guard of a non-pipelined unit (divider), which the paper lists as the core
// side of the same rule.
//
// The core, main memory and other cores are outside: their signals are ports.
// Memory requests carry the L2 MSHR index and generation as a tag that the
// response must return; mem_rsp_nc marks a line that another core holds
// Exclusive/Modified. Requester ids: loads 0..LQ_IDS-1, fetches
// 0..FETCH_IDS-1; a response names every waiting requester in a bit mask and
// failures (leapfrogged or rejected requests, which the core must retry) are
// reported the same way. Interface widths and the handshakes are this
// design's choices.
module ghostminion_top
  import gm_pkg::*;
#(
  parameter int unsigned L1D_BYTES = 65536,
  parameter int unsigned L1D_WAYS  = 2,
  parameter int unsigned L1I_BYTES = 32768,
  parameter int unsigned L1I_WAYS  = 2,
  parameter int unsigned L1_LAT    = 2,
  parameter int unsigned L1_MSHRS  = 4,
  parameter int unsigned L2_BYTES  = 2097152,
  parameter int unsigned L2_WAYS   = 8,
  parameter int unsigned L2_LAT    = 20,
  parameter int unsigned L2_MSHRS  = 20,
  parameter int unsigned GM_BYTES  = 2048,
  parameter int unsigned GM_WAYS   = 2,
  parameter int unsigned LQ_IDS    = 32,
  parameter int unsigned FETCH_IDS = 4,
  parameter int unsigned RPT_ENTRIES = 64,
  parameter int unsigned DISP_W    = 8,
  parameter int unsigned DIV_DEPTH = 16,
  parameter int unsigned GEN_W     = 4,
  // derived
  parameter int unsigned MTAG_W    = $clog2(L2_MSHRS)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // timestamp allocation at dispatch
  input  logic [$clog2(DISP_W+1)-1:0]    disp_cnt,
  output ts_t                            disp_ts [DISP_W],
  // data loads
  input  logic                           ld_valid,
  output logic                           ld_ready,
  input  laddr_t                         ld_addr,
  input  ts_t                            ld_ts,
  input  logic                           ld_spec,
  input  logic [$clog2(LQ_IDS)-1:0]      ld_id,
  output logic                           ld_resp_valid,
  output logic [LQ_IDS-1:0]              ld_resp_mask,
  output line_t                          ld_resp_data,
  output level_e                         ld_resp_level,
  output logic [LQ_IDS-1:0]              ld_fail_mask,
  // load commit
  input  logic                           cm_valid,
  input  laddr_t                         cm_addr,
  input  ts_t                            cm_ts,
  input  pc_t                            cm_pc,
  output logic                           cm_moved,
  output logic                           cm_replay,
  // instruction fetch
  input  logic                           if_valid,
  output logic                           if_ready,
  input  laddr_t                         if_addr,
  input  ts_t                            if_ts,
  input  logic                           if_spec,
  input  logic [$clog2(FETCH_IDS)-1:0]   if_id,
  output logic                           if_resp_valid,
  output logic [FETCH_IDS-1:0]           if_resp_mask,
  output line_t                          if_resp_data,
  output logic [FETCH_IDS-1:0]           if_fail_mask,
  // instruction commit
  input  logic                           icm_valid,
  input  laddr_t                         icm_addr,
  input  ts_t                            icm_ts,
  // misspeculation
  input  logic                           sq_valid,
  input  ts_t                            sq_ts,
  // coherence invalidation from other cores
  input  logic                           inv_valid,
  input  laddr_t                         inv_addr,
  // main memory
  output logic                           mem_req_valid,
  input  logic                           mem_req_ready,
  output laddr_t                         mem_req_addr,
  output logic [MTAG_W-1:0]              mem_req_tag,
  output logic [GEN_W-1:0]               mem_req_gen,
  output logic                           mem_req_spec,
  input  logic                           mem_rsp_valid,
  output logic                           mem_rsp_ready,
  input  logic [MTAG_W-1:0]              mem_rsp_tag,
  input  logic [GEN_W-1:0]               mem_rsp_gen,
  input  laddr_t                         mem_rsp_addr,
  input  line_t                          mem_rsp_data,
  input  logic                           mem_rsp_nc,
  // non-pipelined divider issue guard
  input  logic                           div_disp_valid,
  output logic                           div_disp_ready,
  input  ts_t                            div_disp_ts,
  input  logic [7:0]                     div_disp_tag,
  input  logic                           div_disp_rdy,
  input  logic                           div_wake_valid,
  input  logic [7:0]                     div_wake_tag,
  input  logic                           div_busy,
  output logic                           div_iss_valid,
  output logic [7:0]                     div_iss_tag,
  // events
  output events_t                        ev
);

  localparam int unsigned L2_IDS = 2 * L1_MSHRS;
  localparam int unsigned L1M_W  = $clog2(L1_MSHRS);

  // ------------------------------------------------------- timestamps
  ts_alloc #(.WIDTH(DISP_W)) u_ts (
    .clk, .rst_n, .disp_cnt, .sq_valid, .sq_ts, .ts_out(disp_ts), .next_ts()
  );

  // ------------------------------------------------------- data side
  logic   dgm_rd_valid, dgm_hit, dgm_guarded, dgm_fill_ok, dgm_cm_hit, dgm_cm_nc;
  laddr_t dgm_rd_addr;
  ts_t    dgm_rd_ts;
  line_t  dgm_data, dgm_cm_data;
  level_e dgm_level, dgm_cm_level;

  logic   l1d_resp_valid, l1d_resp_spec, l1d_resp_cpl, l1d_resp_nc;
  logic [LQ_IDS-1:0] l1d_resp_tmask;
  laddr_t l1d_resp_addr;
  line_t  l1d_resp_data;
  level_e l1d_resp_level;
  ts_t    l1d_resp_ts;
  logic   l1d_dn_valid, l1d_dn_ready, l1d_dn_spec;
  laddr_t l1d_dn_addr;
  ts_t    l1d_dn_ts;
  logic [L1M_W-1:0] l1d_dn_idx;
  logic   l1d_drsp_valid, l1d_drsp_ready;
  logic   l1d_ev_hit, l1d_ev_side, l1d_ev_miss, l1d_ev_lf, l1d_ev_tl, l1d_ev_rej, l1d_ev_stall;

  logic   dgm_fill_valid;
  assign dgm_fill_valid = l1d_resp_valid && l1d_resp_cpl && l1d_resp_spec;

  ghostminion #(.SIZE_BYTES(GM_BYTES), .WAYS(GM_WAYS), .COHERENT(1'b1)) u_dgm (
    .clk, .rst_n,
    .rd_valid(dgm_rd_valid), .rd_addr(dgm_rd_addr), .rd_ts(dgm_rd_ts),
    .rd_hit(dgm_hit), .rd_guarded(dgm_guarded), .rd_data(dgm_data), .rd_level(dgm_level),
    .fill_valid(dgm_fill_valid), .fill_addr(l1d_resp_addr), .fill_ts(l1d_resp_ts),
    .fill_data(l1d_resp_data), .fill_level(l1d_resp_level), .fill_nc(l1d_resp_nc),
    .fill_ok(dgm_fill_ok),
    .cm_valid, .cm_addr, .cm_ts, .cm_hit(dgm_cm_hit), .cm_data(dgm_cm_data),
    .cm_level(dgm_cm_level), .cm_nc(dgm_cm_nc),
    .sq_valid, .sq_ts, .inv_valid, .inv_addr, .occupancy()
  );

  // L2 response split between the two L1s; an L2 failure (leapfrog or
  // reject) of an L1 MSHR's request cascades to that L1's requesters
  logic [L2_IDS-1:0] l2_fail;
  logic              l2_resp_valid, l2_resp_ready, l2_resp_nc;
  logic [L2_IDS-1:0] l2_resp_tmask;
  laddr_t            l2_resp_addr;
  line_t             l2_resp_data;
  level_e            l2_resp_level;

  nspec_cache #(
    .SIZE_BYTES(L1D_BYTES), .WAYS(L1D_WAYS), .LAT(L1_LAT), .MSHRS(L1_MSHRS),
    .N_IDS(LQ_IDS), .GEN_W(GEN_W), .LEVEL(LVL_L1), .HAS_SIDE(1'b1), .GEN_CHK(1'b0)
  ) u_l1d (
    .clk, .rst_n,
    .req_valid(ld_valid), .req_ready(ld_ready), .req_addr(ld_addr), .req_ts(ld_ts),
    .req_spec(ld_spec), .req_tgt(1'b1), .req_id(ld_id),
    .lk_valid(dgm_rd_valid), .lk_addr(dgm_rd_addr), .lk_ts(dgm_rd_ts),
    .side_hit(dgm_hit), .side_data(dgm_data), .side_level(dgm_level),
    .resp_valid(l1d_resp_valid), .resp_ready(1'b1), .resp_tmask(l1d_resp_tmask),
    .resp_addr(l1d_resp_addr), .resp_data(l1d_resp_data), .resp_level(l1d_resp_level),
    .resp_spec(l1d_resp_spec), .resp_ts(l1d_resp_ts), .resp_cpl(l1d_resp_cpl),
    .resp_nc(l1d_resp_nc), .fail_mask(ld_fail_mask),
    .wb_valid(dgm_cm_hit), .wb_addr(cm_addr), .wb_data(dgm_cm_data),
    .dn_valid(l1d_dn_valid), .dn_ready(l1d_dn_ready), .dn_addr(l1d_dn_addr),
    .dn_ts(l1d_dn_ts), .dn_spec(l1d_dn_spec), .dn_idx(l1d_dn_idx), .dn_gen(),
    .drsp_valid(l1d_drsp_valid), .drsp_ready(l1d_drsp_ready),
    .drsp_mask(l2_resp_tmask[L1_MSHRS-1:0]), .drsp_addr(l2_resp_addr), .drsp_gen('0),
    .drsp_data(l2_resp_data), .drsp_level(l2_resp_level), .drsp_nc(l2_resp_nc),
    .dfail_mask(l2_fail[L1_MSHRS-1:0]), .sq_valid, .sq_ts,
    .ev_hit(l1d_ev_hit), .ev_side_hit(l1d_ev_side), .ev_miss(l1d_ev_miss),
    .ev_leapfrog(l1d_ev_lf), .ev_timeleap(l1d_ev_tl), .ev_reject(l1d_ev_rej),
    .ev_stall(l1d_ev_stall)
  );

  assign ld_resp_valid = l1d_resp_valid;
  assign ld_resp_mask  = l1d_resp_tmask;
  assign ld_resp_data  = l1d_resp_data;
  assign ld_resp_level = l1d_resp_level;
  assign cm_moved      = dgm_cm_hit;
  assign cm_replay     = dgm_cm_hit && dgm_cm_nc;

  // ------------------------------------------------ instruction side
  logic   igm_rd_valid, igm_hit, igm_guarded, igm_cm_hit;
  laddr_t igm_rd_addr;
  ts_t    igm_rd_ts;
  line_t  igm_data, igm_cm_data;
  level_e igm_level;

  logic   l1i_resp_valid, l1i_resp_spec, l1i_resp_cpl, l1i_resp_nc;
  laddr_t l1i_resp_addr;
  level_e l1i_resp_level;
  ts_t    l1i_resp_ts;
  logic   l1i_dn_valid, l1i_dn_ready, l1i_dn_spec;
  laddr_t l1i_dn_addr;
  ts_t    l1i_dn_ts;
  logic [L1M_W-1:0] l1i_dn_idx;
  logic   l1i_drsp_valid, l1i_drsp_ready;
  logic   l1i_ev_lf, l1i_ev_tl, l1i_ev_rej;

  ghostminion #(.SIZE_BYTES(GM_BYTES), .WAYS(GM_WAYS), .COHERENT(1'b0)) u_igm (
    .clk, .rst_n,
    .rd_valid(igm_rd_valid), .rd_addr(igm_rd_addr), .rd_ts(igm_rd_ts),
    .rd_hit(igm_hit), .rd_guarded(igm_guarded), .rd_data(igm_data), .rd_level(igm_level),
    .fill_valid(l1i_resp_valid && l1i_resp_cpl && l1i_resp_spec), .fill_addr(l1i_resp_addr),
    .fill_ts(l1i_resp_ts), .fill_data(if_resp_data), .fill_level(l1i_resp_level),
    .fill_nc(l1i_resp_nc), .fill_ok(),
    .cm_valid(icm_valid), .cm_addr(icm_addr), .cm_ts(icm_ts), .cm_hit(igm_cm_hit),
    .cm_data(igm_cm_data), .cm_level(), .cm_nc(),
    .sq_valid, .sq_ts, .inv_valid(1'b0), .inv_addr('0), .occupancy()
  );

  nspec_cache #(
    .SIZE_BYTES(L1I_BYTES), .WAYS(L1I_WAYS), .LAT(L1_LAT), .MSHRS(L1_MSHRS),
    .N_IDS(FETCH_IDS), .GEN_W(GEN_W), .LEVEL(LVL_L1), .HAS_SIDE(1'b1), .GEN_CHK(1'b0)
  ) u_l1i (
    .clk, .rst_n,
    .req_valid(if_valid), .req_ready(if_ready), .req_addr(if_addr), .req_ts(if_ts),
    .req_spec(if_spec), .req_tgt(1'b1), .req_id(if_id),
    .lk_valid(igm_rd_valid), .lk_addr(igm_rd_addr), .lk_ts(igm_rd_ts),
    .side_hit(igm_hit), .side_data(igm_data), .side_level(igm_level),
    .resp_valid(l1i_resp_valid), .resp_ready(1'b1), .resp_tmask(if_resp_mask),
    .resp_addr(l1i_resp_addr), .resp_data(if_resp_data), .resp_level(l1i_resp_level),
    .resp_spec(l1i_resp_spec), .resp_ts(l1i_resp_ts), .resp_cpl(l1i_resp_cpl),
    .resp_nc(l1i_resp_nc), .fail_mask(if_fail_mask),
    .wb_valid(igm_cm_hit), .wb_addr(icm_addr), .wb_data(igm_cm_data),
    .dn_valid(l1i_dn_valid), .dn_ready(l1i_dn_ready), .dn_addr(l1i_dn_addr),
    .dn_ts(l1i_dn_ts), .dn_spec(l1i_dn_spec), .dn_idx(l1i_dn_idx), .dn_gen(),
    .drsp_valid(l1i_drsp_valid), .drsp_ready(l1i_drsp_ready),
    .drsp_mask(l2_resp_tmask[L2_IDS-1:L1_MSHRS]), .drsp_addr(l2_resp_addr), .drsp_gen('0),
    .drsp_data(l2_resp_data), .drsp_level(l2_resp_level), .drsp_nc(l2_resp_nc),
    .dfail_mask(l2_fail[L2_IDS-1:L1_MSHRS]), .sq_valid, .sq_ts,
    .ev_hit(), .ev_side_hit(), .ev_miss(),
    .ev_leapfrog(l1i_ev_lf), .ev_timeleap(l1i_ev_tl), .ev_reject(l1i_ev_rej), .ev_stall()
  );

  assign if_resp_valid = l1i_resp_valid;

  // --------------------------------------------------- L2 prefetcher
  logic   pf_valid, pf_ready;
  laddr_t pf_addr;
  logic   pf_train;
  assign pf_train = dgm_cm_hit && (dgm_cm_level == LVL_L2 || dgm_cm_level == LVL_MEM);

  stride_prefetcher #(.ENTRIES(RPT_ENTRIES)) u_pf (
    .clk, .rst_n, .tr_valid(pf_train), .tr_pc(cm_pc), .tr_addr(cm_addr),
    .pf_valid, .pf_ready, .pf_addr
  );

  // ------------------------------------------- L2 port arbitration
  logic [2:0]   arb_req, arb_spec, arb_gnt;
  ts_t          arb_ts [3];
  logic [1:0]   arb_idx;
  logic         arb_any;
  logic         l2_req_ready;
  assign arb_req  = {pf_valid, l1i_dn_valid, l1d_dn_valid};
  assign arb_spec = {1'b0, l1i_dn_spec, l1d_dn_spec};
  assign arb_ts   = '{l1d_dn_ts, l1i_dn_ts, '0};

  ts_arbiter #(.N(3)) u_arb (
    .req(arb_req), .spec(arb_spec), .ts(arb_ts),
    .gnt(arb_gnt), .gnt_idx(arb_idx), .gnt_valid(arb_any)
  );

  assign l1d_dn_ready = arb_gnt[0] && l2_req_ready;
  assign l1i_dn_ready = arb_gnt[1] && l2_req_ready;
  assign pf_ready     = arb_gnt[2] && l2_req_ready;

  laddr_t                    l2_req_addr;
  ts_t                       l2_req_ts;
  logic                      l2_req_spec, l2_req_tgt;
  logic [$clog2(L2_IDS)-1:0] l2_req_id;
  always_comb begin
    unique case (arb_idx)
      2'd0: begin
        l2_req_addr = l1d_dn_addr; l2_req_ts = l1d_dn_ts; l2_req_spec = l1d_dn_spec;
        l2_req_tgt  = 1'b1;        l2_req_id = ($clog2(L2_IDS))'(l1d_dn_idx);
      end
      2'd1: begin
        l2_req_addr = l1i_dn_addr; l2_req_ts = l1i_dn_ts; l2_req_spec = l1i_dn_spec;
        l2_req_tgt  = 1'b1;        l2_req_id = ($clog2(L2_IDS))'(L1_MSHRS + 32'(l1i_dn_idx));
      end
      default: begin
        l2_req_addr = pf_addr;     l2_req_ts = '0;        l2_req_spec = 1'b0;
        l2_req_tgt  = 1'b0;        l2_req_id = '0;
      end
    endcase
  end

  // -------------------------------------------------------------- L2
  logic l2_ev_lf, l2_ev_tl, l2_ev_rej;
  logic l2_mem_rsp_ready;
  logic [L2_MSHRS-1:0] mem_mask;
  always_comb begin
    mem_mask = '0;
    mem_mask[mem_rsp_tag] = 1'b1;
  end

  nspec_cache #(
    .SIZE_BYTES(L2_BYTES), .WAYS(L2_WAYS), .LAT(L2_LAT), .MSHRS(L2_MSHRS),
    .N_IDS(L2_IDS), .GEN_W(GEN_W), .LEVEL(LVL_L2), .HAS_SIDE(1'b0), .GEN_CHK(1'b1)
  ) u_l2 (
    .clk, .rst_n,
    .req_valid(arb_any), .req_ready(l2_req_ready), .req_addr(l2_req_addr),
    .req_ts(l2_req_ts), .req_spec(l2_req_spec), .req_tgt(l2_req_tgt), .req_id(l2_req_id),
    .lk_valid(), .lk_addr(), .lk_ts(),
    .side_hit(1'b0), .side_data('0), .side_level(LVL_L2),
    .resp_valid(l2_resp_valid), .resp_ready(l2_resp_ready), .resp_tmask(l2_resp_tmask),
    .resp_addr(l2_resp_addr), .resp_data(l2_resp_data), .resp_level(l2_resp_level),
    .resp_spec(), .resp_ts(), .resp_cpl(), .resp_nc(l2_resp_nc),
    .fail_mask(l2_fail),
    .wb_valid(1'b0), .wb_addr('0), .wb_data('0),
    .dn_valid(mem_req_valid), .dn_ready(mem_req_ready), .dn_addr(mem_req_addr),
    .dn_ts(), .dn_spec(mem_req_spec), .dn_idx(mem_req_tag), .dn_gen(mem_req_gen),
    .drsp_valid(mem_rsp_valid), .drsp_ready(l2_mem_rsp_ready), .drsp_mask(mem_mask),
    .drsp_addr(mem_rsp_addr), .drsp_gen(mem_rsp_gen), .drsp_data(mem_rsp_data),
    .drsp_level(LVL_MEM), .drsp_nc(mem_rsp_nc),
    .dfail_mask('0), .sq_valid, .sq_ts,
    .ev_hit(), .ev_side_hit(), .ev_miss(),
    .ev_leapfrog(l2_ev_lf), .ev_timeleap(l2_ev_tl), .ev_reject(l2_ev_rej), .ev_stall()
  );
  assign mem_rsp_ready = l2_mem_rsp_ready;


  // An L2 response goes to whichever L1s it names; it leaves only when all of
  // them accept it.
  logic d_part, i_part;
  assign d_part         = |l2_resp_tmask[L1_MSHRS-1:0];
  assign i_part         = |l2_resp_tmask[L2_IDS-1:L1_MSHRS];
  assign l1d_drsp_valid = l2_resp_valid && d_part;
  assign l1i_drsp_valid = l2_resp_valid && i_part;
  assign l2_resp_ready  = (!d_part || l1d_drsp_ready) && (!i_part || l1i_drsp_ready);


  // ----------------------------------------- divider issue guard
  logic div_held;
  fu_timeguard #(.DEPTH(DIV_DEPTH), .TAG_W(8)) u_div (
    .clk, .rst_n,
    .disp_valid(div_disp_valid), .disp_ready(div_disp_ready), .disp_ts(div_disp_ts),
    .disp_tag(div_disp_tag), .disp_rdy(div_disp_rdy),
    .wake_valid(div_wake_valid), .wake_tag(div_wake_tag), .unit_busy(div_busy),
    .iss_valid(div_iss_valid), .iss_tag(div_iss_tag), .iss_ts(),
    .sq_valid, .sq_ts, .held(div_held)
  );

  // ---------------------------------------------------------- events
  always_comb begin
    ev               = '0;
    ev.dgm_guarded   = dgm_guarded;
    ev.igm_guarded   = igm_guarded;
    ev.dgm_fill      = dgm_fill_ok;
    ev.dgm_fill_drop = dgm_fill_valid && !dgm_fill_ok;
    ev.dgm_side_hit  = l1d_ev_side;
    ev.commit_move   = dgm_cm_hit;
    ev.commit_replay = cm_replay;
    ev.leapfrog      = l1d_ev_lf || l1i_ev_lf || l2_ev_lf;
    ev.timeleap      = l1d_ev_tl || l1i_ev_tl || l2_ev_tl;
    ev.mshr_reject   = l1d_ev_rej || l1i_ev_rej || l2_ev_rej;
    ev.l1d_stall     = l1d_ev_stall;
    ev.pf_issue      = pf_valid && pf_ready;
    ev.div_wait      = div_held;
  end

endmodule

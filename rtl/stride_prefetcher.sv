// stride_prefetcher: a PC-indexed stride prefetcher for the L2 with a
// reference prediction table (RPT), trained only on committed loads.
//
// In the GhostMinion system a prefetcher in the non-speculative hierarchy may
// learn only from non-speculative input: it is trained by the commit
// notification of a load whose line was brought in from its level or beyond
// (tr_valid, with the load's PC and line address). Each RPT entry holds a PC
// tag, the last line address, a stride in lines and a 2-bit confidence. A
// training access with the same stride as before raises the confidence,
// another stride lowers it and, at zero confidence, replaces the stride. At
// confidence 2 or more a prefetch of address + stride is queued in a single
// output register (valid/ready); a prefetch arriving while it is full is
// dropped. The 64-entry table is the paper's (Table 1); the indexing, stride
// width, confidence rules and degree 1 are this design's choices.
module stride_prefetcher
  import gm_pkg::*;
#(
  parameter int unsigned ENTRIES  = 64,
  parameter int unsigned STRIDE_W = 16,
  parameter int unsigned PTAG_W   = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   tr_valid,
  input  pc_t    tr_pc,
  input  laddr_t tr_addr,
  output logic   pf_valid,
  input  logic   pf_ready,
  output laddr_t pf_addr
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  typedef struct packed {
    logic                       valid;
    logic [PTAG_W-1:0]          tag;
    laddr_t                     last;
    logic signed [STRIDE_W-1:0] stride;
    logic [1:0]                 conf;
  } rpt_t;

  rpt_t rpt_q [ENTRIES];

  logic [IDX_W-1:0]           idx;
  logic [PTAG_W-1:0]          tag;
  rpt_t                       e, e_n;
  logic signed [STRIDE_W-1:0] d;
  logic                       fire;
  laddr_t                     target;

  always_comb begin
    idx    = tr_pc[2 +: IDX_W];              // 4-byte instructions
    tag    = tr_pc[2 + IDX_W +: PTAG_W];
    e      = rpt_q[idx];
    d      = STRIDE_W'(tr_addr - e.last);
    e_n    = e;
    fire   = 1'b0;
    if (!e.valid || e.tag != tag) begin
      e_n = '{valid: 1'b1, tag: tag, last: tr_addr, stride: '0, conf: 2'd0};
    end else begin
      e_n.last = tr_addr;
      if (d == e.stride && d != 0) begin
        if (e.conf != 2'd3) e_n.conf = e.conf + 2'd1;
      end else if (e.conf != 2'd0) begin
        e_n.conf = e.conf - 2'd1;
      end else begin
        e_n.stride = d;
      end
      fire = (e_n.conf >= 2'd2) && (e_n.stride != 0);
    end
    target = tr_addr + laddr_t'(signed'(e_n.stride));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) rpt_q[i] <= '0;
      pf_valid <= 1'b0;
      pf_addr  <= '0;
    end else begin
      if (pf_valid && pf_ready) pf_valid <= 1'b0;
      if (tr_valid) begin
        rpt_q[idx] <= e_n;
        if (fire && (!pf_valid || pf_ready)) begin
          pf_valid <= 1'b1;
          pf_addr  <= target;
        end
      end
    end
  end

endmodule

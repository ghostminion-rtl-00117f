// fu_timeguard: issues operations to one non-pipelined functional unit (an
// integer divider, FP divider or square-root unit) strictly in timestamp
// order, so a speculative operation can never occupy the unit ahead of an
// older one (the SpectreRewind contention channel).
//
// Operations for the unit enter at dispatch, in program order, into a
// DEPTH-entry queue kept sorted by position (entry 0 is the oldest). An
// entry becomes ready when its operands arrive (disp_rdy, or a wake-up
// carrying its tag). Only the oldest entry may issue, when it is ready and
// the unit is not busy, even if younger entries are ready. A squash removes
// every entry newer than the misspeculated timestamp in one cycle. The
// in-order issue rule is the paper's (Sec. "Within-core structural
// hazards"); the queue structure, depth and wake-up interface are this
// design's. Timing: iss_* is combinational, the queue shifts at the edge.
module fu_timeguard
  import gm_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             disp_valid,
  output logic             disp_ready,
  input  ts_t              disp_ts,
  input  logic [TAG_W-1:0] disp_tag,
  input  logic             disp_rdy,
  input  logic             wake_valid,
  input  logic [TAG_W-1:0] wake_tag,
  input  logic             unit_busy,
  output logic             iss_valid,
  output logic [TAG_W-1:0] iss_tag,
  output ts_t              iss_ts,
  input  logic             sq_valid,
  input  ts_t              sq_ts,
  // a younger ready operation is held back behind an older unready one
  output logic             held
);

  typedef struct packed {
    logic             rdy;
    ts_t              ts;
    logic [TAG_W-1:0] tag;
  } op_t;

  op_t                      q_q [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  assign disp_ready = (cnt_q < ($clog2(DEPTH+1))'(DEPTH)) && !sq_valid;
  assign iss_valid  = (cnt_q != '0) && (q_q[0].rdy || (wake_valid && wake_tag == q_q[0].tag)) &&
                      !unit_busy;
  assign iss_tag    = q_q[0].tag;
  assign iss_ts     = q_q[0].ts;

  always_comb begin
    held = 1'b0;
    for (int i = 1; i < DEPTH; i++)
      if (($clog2(DEPTH+1))'(i) < cnt_q && q_q[i].rdy && !q_q[0].rdy && !unit_busy) held = 1'b1;
  end

  // number of entries that survive a squash (the queue is in program order)
  logic [$clog2(DEPTH+1)-1:0] keep;
  always_comb begin
    keep = cnt_q;
    if (sq_valid)
      for (int i = DEPTH - 1; i >= 0; i--)
        if (($clog2(DEPTH+1))'(i) < cnt_q && ts_lt(sq_ts, q_q[i].ts)) keep = ($clog2(DEPTH+1))'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) q_q[i] <= '0;
    end else begin
      automatic op_t                        nq [DEPTH];
      automatic logic [$clog2(DEPTH+1)-1:0] n;
      for (int i = 0; i < DEPTH; i++) begin
        nq[i] = q_q[i];
        if (wake_valid && q_q[i].tag == wake_tag) nq[i].rdy = 1'b1;
      end
      n = sq_valid ? keep : cnt_q;
      if (iss_valid && n != '0) begin
        for (int i = 0; i < DEPTH - 1; i++) nq[i] = nq[i+1];
        n = n - 1'b1;
      end
      if (disp_valid && disp_ready) begin
        nq[n[$clog2(DEPTH)-1:0]] = '{rdy: disp_rdy || (wake_valid && wake_tag == disp_tag), ts: disp_ts, tag: disp_tag};
        n = n + 1'b1;
      end
      q_q   <= nq;
      cnt_q <= n;
    end
  end

endmodule

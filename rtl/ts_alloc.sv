// ts_alloc: hands out Temporal-Order timestamps to instructions as they are
// dispatched, in program order.
//
// Up to WIDTH instructions are dispatched per cycle; slot i of a dispatch
// group receives ts_out[i] = next + i (mod 2*ROB_ENTRIES). Since the reorder
// buffer holds at most ROB_ENTRIES instructions, a window of twice that size
// lets any two live timestamps be ordered by their modular distance (see
// gm_pkg). On a squash the counter rewinds to one past the misspeculated
// instruction, so re-executed instructions reuse the squashed timestamps;
// a squash overrides a dispatch in the same cycle. The window size is the
// paper's; the rewind and the per-slot output are this design's choices.
// Timing: ts_out is valid in the dispatch cycle, the counter moves at the
// clock edge.
module ts_alloc
  import gm_pkg::*;
#(
  parameter int unsigned WIDTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(WIDTH+1)-1:0] disp_cnt,
  input  logic                       sq_valid,
  input  ts_t                        sq_ts,
  output ts_t                        ts_out [WIDTH],
  output ts_t                        next_ts
);

  ts_t next_q;
  assign next_ts = next_q;

  always_comb
    for (int i = 0; i < WIDTH; i++) ts_out[i] = ts_add(next_q, i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        next_q <= '0;
    else if (sq_valid) next_q <= ts_add(sq_ts, 1);
    else               next_q <= ts_add(next_q, int'(disp_cnt));
  end

endmodule

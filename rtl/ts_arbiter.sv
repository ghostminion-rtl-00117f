// ts_arbiter: grants a shared single-cycle port to the oldest requester.
//
// Each requester presents a timestamp and a speculative bit. A
// non-speculative requester ranks before every speculative one; among
// speculative requesters the oldest timestamp (modular, see gm_pkg) wins,
// ties going to the lowest index. This is the paper's rule for single-cycle
// and pipelined resources: a younger instruction must never delay an older
// one. The grant is combinational (one-hot gnt plus its index).
module ts_arbiter
  import gm_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0]         req,
  input  logic [N-1:0]         spec,
  input  ts_t                  ts [N],
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 gnt_valid
);

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int i = 0; i < N; i++)
      if (req[i] && (!gnt_valid ||
                     key_newer(spec[i], ts[i], spec[gnt_idx], ts[gnt_idx]))) begin
        gnt_valid = 1'b1;
        gnt_idx   = ($clog2(N))'(i);
      end
    gnt = '0;
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

endmodule

// mem_model: behavioural main memory for simulation only (not synthesizable
// design: it stands in for the DRAM the system talks to). Requests are
// accepted one per cycle while fewer than DEPTH are outstanding and answered
// in order, LAT cycles after acceptance, with the request's tag and
// generation. The data of line address a is 16 copies of 32'hD47A0000 ^ a[31:0]
// so that a testbench can predict it. A response is marked non-coherent
// (another core holds the line Exclusive/Modified) when its line address
// equals nc_addr while nc_en is set.
module mem_model
  import gm_pkg::*;
#(
  parameter int LAT    = 60,
  parameter int DEPTH  = 32,
  parameter int TAG_W  = 5,
  parameter int GEN_W  = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  laddr_t           req_addr,
  input  logic [TAG_W-1:0] req_tag,
  input  logic [GEN_W-1:0] req_gen,
  output logic             rsp_valid,
  input  logic             rsp_ready,
  output logic [TAG_W-1:0] rsp_tag,
  output logic [GEN_W-1:0] rsp_gen,
  output laddr_t           rsp_addr,
  output line_t            rsp_data,
  output logic             rsp_nc,
  input  logic             nc_en,
  input  laddr_t           nc_addr,
  output int               n_req
);
  typedef struct { longint due; laddr_t addr; logic [TAG_W-1:0] tag; logic [GEN_W-1:0] gen; } ent_t;
  ent_t q [$];
  longint cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;
  int cnt = 0;
  assign req_ready = rst_n && (cnt < DEPTH);

  // the head of the queue is presented once it is due; the outputs are
  // registered and recomputed after every push and pop
  always @(posedge clk) begin
    if (!rst_n) begin
      q.delete();
      n_req <= 0;
    end else begin
      if (rsp_valid && rsp_ready) void'(q.pop_front());
      if (req_valid && req_ready) begin
        q.push_back('{cyc + LAT, req_addr, req_tag, req_gen});
        n_req <= n_req + 1;
      end
    end
    cnt <= q.size();
    rsp_valid <= 1'b0; rsp_tag <= '0; rsp_gen <= '0; rsp_addr <= '0; rsp_data <= '0;
    rsp_nc <= 1'b0;
    if (rst_n && q.size() > 0 && q[0].due <= cyc + 1) begin
      rsp_valid <= 1'b1;
      rsp_tag   <= q[0].tag;
      rsp_gen   <= q[0].gen;
      rsp_addr  <= q[0].addr;
      rsp_data  <= {16{32'hD47A0000 ^ 32'(q[0].addr)}};
      rsp_nc    <= nc_en && q[0].addr == nc_addr;
    end
  end
endmodule

// tb_gm_size_sweep: runs the same GhostMinion test at every size of the
// published sizing study, 128 B to 4 KiB (2 to 64 lines, 2-way, 64 B lines),
// one instance per size side by side. For each size it fills every line
// (each fill must find a free way, and the line must be readable in the next
// cycle with its data), checks that the occupancy equals the capacity, that a
// fill newer than every line of a full set is dropped, that an older fill
// evicts the newest line of the set, that TimeGuarding hides a line from an
// older reader, and that a squash leaves exactly the lines not newer than it.
module tb_gm_size_sweep;
  import gm_pkg::*;

  localparam int NSIZES = 6;
  localparam int SIZES [NSIZES] = '{128, 256, 512, 1024, 2048, 4096};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit done [NSIZES];

  function automatic line_t pat(laddr_t a);
    return {16{32'h6A000000 ^ 32'(a)}};
  endfunction

  for (genvar g = 0; g < NSIZES; g++) begin : g_size
    localparam int LINES = SIZES[g] / LINE_BYTES;
    localparam int SETS  = LINES / 2;

    logic   rd_valid, rd_hit, rd_guarded, fill_valid, fill_ok, sq_valid;
    laddr_t rd_addr, fill_addr;
    ts_t    rd_ts, fill_ts, sq_ts;
    line_t  rd_data;
    level_e rd_level;
    logic   cm_hit, cm_nc;
    line_t  cm_data;
    level_e cm_level;
    logic [$clog2(LINES+1)-1:0] occupancy;

    ghostminion #(.SIZE_BYTES(SIZES[g]), .WAYS(2), .COHERENT(1'b1)) dut (
      .clk, .rst_n,
      .rd_valid, .rd_addr, .rd_ts, .rd_hit, .rd_guarded, .rd_data, .rd_level,
      .fill_valid, .fill_addr, .fill_ts, .fill_data(pat(fill_addr)), .fill_level(LVL_MEM),
      .fill_nc(1'b0), .fill_ok,
      .cm_valid(1'b0), .cm_addr('0), .cm_ts('0), .cm_hit, .cm_data, .cm_level, .cm_nc,
      .sq_valid, .sq_ts, .inv_valid(1'b0), .inv_addr('0), .occupancy
    );

    task automatic chk(input logic c, input string what);
      checks++;
      if (!c) begin
        failures++;
        $display("FAIL: %0d B: %s", SIZES[g], what);
      end
    endtask

    initial begin
      rd_valid = 0; rd_addr = '0; rd_ts = '0; fill_valid = 0; fill_addr = '0; fill_ts = '0;
      sq_valid = 0; sq_ts = '0;
      @(posedge rst_n); @(posedge clk); #1;
      // fill every line: address i goes to set i mod SETS, TS 10 + i
      for (int i = 0; i < LINES; i++) begin
        fill_valid = 1'b1; fill_addr = laddr_t'(i); fill_ts = ts_t'(10 + i); #1;
        chk(fill_ok, $sformatf("fill %0d finds a way", i));
        @(posedge clk); #1;
        fill_valid = 1'b0;
        // readable one cycle after the fill, with its data
        rd_valid = 1'b1; rd_addr = laddr_t'(i); rd_ts = ts_t'(10 + i); #1;
        chk(rd_hit && rd_data == pat(laddr_t'(i)) && rd_level == LVL_MEM,
            $sformatf("line %0d readable the cycle after its fill", i));
        rd_valid = 1'b0;
      end
      chk(occupancy == LINES, $sformatf("occupancy %0d of %0d", occupancy, LINES));
      // a fill newer than both lines of set 0 is dropped
      fill_valid = 1'b1; fill_addr = laddr_t'(LINES); fill_ts = ts_t'(10 + LINES); #1;
      chk(!fill_ok, "newest fill into a full set is dropped");
      @(posedge clk); #1;
      // an older fill evicts the newest line of set 0 (address SETS)
      fill_addr = laddr_t'(2 * LINES); fill_ts = ts_t'(5); #1;
      chk(fill_ok, "older fill accepted");
      @(posedge clk); #1;
      fill_valid = 1'b0;
      rd_valid = 1'b1; rd_addr = laddr_t'(SETS); rd_ts = ts_t'(150); #1;
      chk(!rd_hit, "newest line of the set was evicted");
      rd_addr = laddr_t'(0); #1;
      chk(rd_hit, "older line of the set kept");
      // TimeGuarding
      rd_addr = laddr_t'(0); rd_ts = ts_t'(9); #1;
      chk(!rd_hit && rd_guarded, "older reader does not see a newer line");
      rd_ts = ts_t'(10); #1;
      chk(rd_hit, "reader of equal timestamp sees it");
      rd_valid = 1'b0;
      // squash: lines with TS <= 10 + LINES/2 stay
      sq_valid = 1'b1; sq_ts = ts_t'(10 + LINES / 2);
      @(posedge clk); #1;
      sq_valid = 1'b0;
      chk(occupancy == LINES / 2 + 1, $sformatf("after squash %0d lines remain", occupancy));
      done[g] = 1'b1;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NSIZES; k++) wait (done[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

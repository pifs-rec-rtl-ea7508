// tb_migration_controller: self-checking test of the migration controller with a small device
// model: all 64 lines of the page are read from the source and written to the
// same offsets of the destination with their data, the remap progress
// advances line by line, and each line is locked while it is in flight.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_migration_controller;
  import pifs_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  logic cmd_valid, cmd_ready, rd_valid, rd_ready, rsp_valid, rsp_ready, wr_valid, wr_ready;
  logic [33:0] cmd_src_page, cmd_dst_page, rm_src_page, rm_dst_page;
  m2s_req_t rd_req; s2m_rsp_t rsp; addr_t wr_addr, lock_addr; logic [511:0] wr_data;
  logic lock_valid, rm_wr, busy; logic [2:0] rm_idx; logic [6:0] rm_lines_done;
  logic [31:0] lines_moved, pages_moved;
  migration_controller #(.MC_ID(12'hFFF)) dut (.*);
  addr_t pending[$]; int delay = 0, writes = 0, last_done = 0;
  function automatic logic [511:0] lineval(addr_t a); return {16{a[31:0] + 32'h1234}}; endfunction
  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      check(rd_req.memopcode == MEMOP_MEMRD && rd_req.spid == 12'hFFF, "read header");
      check(rd_req.address[45:12] == 34'h200, "read from the source page");
      check(lock_valid && lock_addr == rd_req.address, "line locked while read");
      pending.push_back(rd_req.address);
    end
    if (rsp_valid && rsp_ready) void'(pending.pop_front());
    if (wr_valid && wr_ready) begin
      writes++;
      check(wr_addr[45:12] == 34'h313 && wr_addr[11:0] == lock_addr[11:0], "write to the same line of the destination");
      check(wr_data == lineval({34'h200, wr_addr[11:0]}), "line data carried");
    end
    if (rm_wr) begin
      check(rm_src_page == 34'h200 && rm_dst_page == 34'h313, "remap pages");
      if (rm_lines_done != 0) begin
        check(int'(rm_lines_done) == last_done + 1, "progress advances by one line");
        last_done = int'(rm_lines_done);
      end
    end
  end
  always_comb begin
    rsp = '0;
    rsp_valid = (pending.size() > 0) && (delay == 0);
    if (pending.size() > 0) begin
      rsp.address = pending[0]; rsp.dpid = 12'hFFF;
      rsp.data[3:0] = lineval(pending[0]);
    end
  end
  always @(posedge clk) delay <= (rsp_valid && rsp_ready) ? 3 : (delay > 0 ? delay - 1 : 0);
  initial begin
    cmd_valid = 0; cmd_src_page = 0; cmd_dst_page = 0; rd_ready = 0; wr_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); cmd_valid = 1; cmd_src_page = 34'h200; cmd_dst_page = 34'h313;
    @(negedge clk); cmd_valid = 0;
    check(busy && !cmd_ready, "busy during migration");
    while (busy) begin @(negedge clk); rd_ready = $urandom % 2; wr_ready = $urandom % 2; end
    check(writes == 64 && lines_moved == 64 && pages_moved == 1 && last_done == 64, "whole page moved");
    check(rm_idx == 3'd1, "next remap entry selected");
    finish();
  end
endmodule

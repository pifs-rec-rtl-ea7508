// tb_memory_indexing: self-checking test of memory indexing: 4 KB page interleave over the
// devices, redirection of migrated lines only below the progress pointer,
// the line lock, and the unremapped write lookup.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_memory_indexing;
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

  addr_t lk_addr, lk_addr_out, wr_addr, lock_addr;
  logic [1:0] lk_port, wr_port;
  logic lk_remapped, lk_blocked, lock_valid, rm_wr;
  logic [2:0] rm_idx; logic [33:0] rm_src_page, rm_dst_page; logic [6:0] rm_lines_done;
  memory_indexing dut (.*);
  initial begin
    rm_wr = 0; rm_idx = 0; rm_src_page = 0; rm_dst_page = 0; rm_lines_done = 0; lock_valid = 0; lock_addr = 0; wr_addr = 0; lk_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      lk_addr = addr_t'({$urandom, $urandom}); wr_addr = addr_t'({$urandom, $urandom}); #1;
      check(int'(lk_port) == int'(lk_addr[13:12]) && lk_addr_out == lk_addr && !lk_remapped, "page interleave");
      check(int'(wr_port) == int'(wr_addr[13:12]), "write lookup");
    end
    @(negedge clk); rm_wr = 1; rm_idx = 3; rm_src_page = 34'h200; rm_dst_page = 34'h213; rm_lines_done = 7'd10;
    @(negedge clk); rm_wr = 0;
    for (int l = 0; l < 64; l++) begin
      lk_addr = {34'h200, 6'(l), 6'h08}; #1;
      if (l < 10) check(lk_remapped && lk_addr_out == {34'h213, 6'(l), 6'h08} && lk_port == 2'd3, "migrated line redirected");
      else        check(!lk_remapped && lk_addr_out == lk_addr && lk_port == 2'd0, "line not yet migrated stays");
    end
    lock_valid = 1; lock_addr = {34'h200, 6'd10, 6'd0};
    lk_addr = {34'h200, 6'd10, 6'h3C}; #1; check(lk_blocked, "locked line blocked");
    lk_addr = {34'h200, 6'd11, 6'h00}; #1; check(!lk_blocked, "other line free");
    finish();
  end
endmodule

// tb_accumulate_config_logic: self-checking test of the accumulation bookkeeping: CapacityCounter
// follows configurations and completions, back-pressure rises exactly at the
// limit, a busy SumTag cannot be reconfigured, the query reports the last
// candidate and its result address.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_accumulate_config_logic;
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

  logic [6:0] cap_limit, capacity_counter;
  logic cfg_valid, cfg_ready, q_active, q_final, row_done, bp;
  sumtag_t cfg_tag, q_tag, row_tag; addr_t cfg_addr, q_addr; cnt_t cfg_count;
  logic [31:0] bp_cycles, done_cnt;
  accumulate_config_logic dut (.*);
  int m_cnt [64];
  initial begin
    int active = 0, dones = 0, bps = 0;
    cap_limit = 7'd3; cfg_valid = 0; cfg_tag = 0; cfg_addr = 0; cfg_count = 1; q_tag = 0; row_done = 0; row_tag = 0;
    for (int i = 0; i < 64; i++) m_cnt[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      cfg_valid = $urandom % 2; cfg_tag = sumtag_t'($urandom % 6);
      cfg_count = cnt_t'(1 + $urandom % 3); cfg_addr = addr_t'(46'h1000 + cfg_tag * 64);
      q_tag = sumtag_t'($urandom % 6);
      row_done = (m_cnt[q_tag] > 0) && ($urandom % 2) && !(cfg_valid && cfg_tag == q_tag);
      row_tag = q_tag;
      #1;
      check(cfg_ready == (active < 3 && m_cnt[cfg_tag] == 0), "back-pressure / busy tag");
      check(bp == (active >= 3), "BP flag");
      check(int'(capacity_counter) == active, "CapacityCounter");
      check(q_active == (m_cnt[q_tag] > 0) && q_final == (m_cnt[q_tag] == 1), "query");
      if (m_cnt[q_tag] > 0) check(q_addr == addr_t'(46'h1000 + q_tag * 64), "result address");
      if (cfg_valid && !cfg_ready) bps++;
      @(posedge clk);
      if (row_done) begin m_cnt[row_tag]--; if (m_cnt[row_tag] == 0) begin active--; dones++; end end
      if (cfg_valid && cfg_ready) begin m_cnt[cfg_tag] = int'(cfg_count); active++; end
    end
    @(negedge clk);
    check(int'(done_cnt) == dones && int'(bp_cycles) == bps, "counters");
    check(bps > 0 && dones > 0, "both back-pressure and completion happened");
    finish();
  end
endmodule

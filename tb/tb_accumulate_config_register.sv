// tb_accumulate_config_register: self-checking test of the Accumulate Configuration Register: random
// configurations and decrements against a reference table; an entry becomes
// invalid when its count reaches zero.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_accumulate_config_register;
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

  logic cfg_en, dec_en, rd_valid;
  sumtag_t cfg_tag, dec_tag, rd_tag;
  addr_t cfg_addr, rd_addr; cnt_t cfg_count, rd_count;
  logic [63:0] valid;
  accumulate_config_register dut (.*);
  int    m_cnt [64];
  addr_t m_addr [64];
  initial begin
    int zeroed = 0;
    cfg_en = 0; dec_en = 0; cfg_tag = 0; dec_tag = 0; rd_tag = 0; cfg_addr = 0; cfg_count = 1;
    for (int i = 0; i < 64; i++) m_cnt[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      cfg_tag = sumtag_t'($urandom % 8); dec_tag = sumtag_t'($urandom % 8);
      cfg_en = (m_cnt[cfg_tag] == 0) && ($urandom % 4 == 0);
      dec_en = (m_cnt[dec_tag] > 0) && (dec_tag != cfg_tag || !cfg_en);
      cfg_addr = addr_t'({$urandom, $urandom}); cfg_count = cnt_t'(1 + $urandom % 5);
      rd_tag = sumtag_t'($urandom % 8);
      #1;
      check(rd_valid == (m_cnt[rd_tag] > 0), "valid bit");
      if (m_cnt[rd_tag] > 0) check(int'(rd_count) == m_cnt[rd_tag] && rd_addr == m_addr[rd_tag], "entry content");
      @(posedge clk);
      if (dec_en) begin m_cnt[dec_tag]--; if (m_cnt[dec_tag] == 0) zeroed++; end
      if (cfg_en) begin m_cnt[cfg_tag] = int'(cfg_count); m_addr[cfg_tag] = cfg_addr; end
    end
    check(zeroed > 10, "entries completed");
    finish();
  end
endmodule

// tb_address_profiler: self-checking test of the address profiler against a reference of the
// same counting rule: hits count up, other addresses in the slot wear the
// count down and take the slot at zero.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_address_profiler;
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

  logic acc_valid; addr_t acc_addr, q_addr; logic [7:0] q_count;
  address_profiler #(.ENTRIES(16)) dut (.*);
  addr_t m_tag [16]; int m_cnt [16];
  function automatic int slot(addr_t a); return int'(a[7:4] ^ a[11:8]); endfunction
  initial begin
    addr_t pool [6] = '{46'h10, 46'h20, 46'h110, 46'h1000, 46'h1010, 46'h33330};
    for (int i = 0; i < 16; i++) begin m_tag[i] = '0; m_cnt[i] = 0; end
    acc_valid = 0; acc_addr = 0; q_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      acc_valid = $urandom % 2;
      acc_addr = ($urandom % 3 == 0) ? pool[$urandom % 6] : pool[0];
      q_addr = pool[$urandom % 6];
      #1;
      check(int'(q_count) == ((m_tag[slot(q_addr)] == q_addr) ? m_cnt[slot(q_addr)] : 0), $sformatf("count of %h: %0d vs %0d slot %0d", q_addr, q_count, m_cnt[slot(q_addr)], slot(q_addr)));
      @(posedge clk);
      if (acc_valid) begin
        automatic int s = slot(acc_addr);
        if (m_tag[s] == acc_addr) begin if (m_cnt[s] < 255) m_cnt[s]++; end
        else if (m_cnt[s] == 0) begin m_tag[s] = acc_addr; m_cnt[s] = 1; end
        else m_cnt[s]--;
      end
    end
    check(m_cnt[slot(pool[0])] > 100, "hot row counted high");
    finish();
  end
endmodule

// tb_sync_fifo: self-checking test of the ingress/egress queue: random pushes and pops
// are compared with a reference queue, full and empty behaviour is checked, and
// a pushed word must be visible one cycle after the push.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_sync_fifo;
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

  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [2:0] count;
  sync_fifo #(.T(logic [15:0]), .DEPTH(4)) dut (.*);
  logic [15:0] model[$];
  int fulls = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(model.size() > 0 && out_data == model[0], $sformatf("pop data %h", out_data));
      void'(model.pop_front());
    end
    if (in_valid && in_ready) model.push_back(in_data);
    if (!in_ready) fulls++;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // latency: a push in cycle n is visible in cycle n+1
    @(negedge clk); in_valid = 1; in_data = 16'hBEEF;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 16'hBEEF, "word visible one cycle after push");
    out_ready = 1; @(negedge clk); out_ready = 0;
    check(!out_valid && count == 0, "empty after pop");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid  = $urandom % 2;
      in_data   = 16'($urandom);
      out_ready = ($urandom % 3) == 0;
      check(int'(count) == model.size(), "count matches");
      check(in_ready == (model.size() < 4), "ready iff not full");
    end
    check(fulls > 0, "queue became full");
    finish();
  end
endmodule

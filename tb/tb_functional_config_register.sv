// tb_functional_config_register: self-checking test of the FCR: reset value, writes, and the capacity
// limit derived from the spill bit.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_functional_config_register;
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

  logic wr_en, spill_en, buffer_en; logic [7:0] wr_data, rd_data; logic [6:0] cap_limit;
  functional_config_register #(.CAPACITY(64), .SWAP_DEPTH(4)) dut (.*);
  initial begin
    wr_en = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(spill_en && buffer_en && cap_limit == 64, "reset: spill and buffer on, full capacity");
    for (int i = 0; i < 4; i++) begin
      wr_en = 1; wr_data = 8'(i); @(negedge clk); wr_en = 0;
      check(spill_en == i[0] && buffer_en == i[1] && rd_data == 8'(i), "fields");
      check(cap_limit == (i[0] ? 7'd64 : 7'd5), "capacity limit");
    end
    finish();
  end
endmodule

// tb_memopcode_checker: self-checking test of the MemOpcode checker: every opcode value is
// offered and must reach exactly the process core (1110b, 1111b) or the VCS
// (all others), with the upstream ready taken from the chosen side.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_memopcode_checker;
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

  logic in_valid, in_ready, vcs_valid, vcs_ready, pc_valid, pc_ready, sel_pc;
  m2s_req_t in_req, out_req;
  logic [31:0] bypass_cnt, pifs_cnt;
  memopcode_checker dut (.*);
  initial begin
    int nb = 0, np = 0;
    in_valid = 0; in_req = '0; vcs_ready = 0; pc_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_req = '0;
      in_req.memopcode = memop_t'(i % 16);
      in_req.address = addr_t'($urandom);
      vcs_ready = $urandom % 2;
      pc_ready  = $urandom % 2;
      #1;
      if (i % 16 >= 14) begin
        check(pc_valid && !vcs_valid && sel_pc, $sformatf("opcode %b to the process core", i % 16));
        check(in_ready == pc_ready, "ready from process core");
        if (pc_ready) np++;
      end else begin
        check(vcs_valid && !pc_valid && !sel_pc, $sformatf("opcode %b to the VCS", i % 16));
        check(in_ready == vcs_ready, "ready from VCS");
        if (vcs_ready) nb++;
      end
      check(out_req == in_req, "request unchanged");
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    check(bypass_cnt == 32'(nb) && pifs_cnt == 32'(np), "class counters");
    finish();
  end
endmodule

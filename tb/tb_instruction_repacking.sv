// tb_instruction_repacking: self-checking test of instruction repacking: random DataFetch
// instructions must come out as MemRd with the switch's SPID, all other header
// fields unchanged and the PIFS extension cleared.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_instruction_repacking;
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

  m2s_req_t in_req, out_req;
  instruction_repacking #(.SWITCH_ID(12'hABC)) dut (.*);
  initial begin
    for (int i = 0; i < 100; i++) begin
      in_req = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      in_req.memopcode = MEMOP_DATAFETCH;
      #1;
      check(out_req.memopcode == MEMOP_MEMRD, "opcode becomes MemRd");
      check(out_req.spid == 12'hABC, "SPID becomes the switch");
      check(out_req.tag == in_req.tag && out_req.address == in_req.address &&
            out_req.dpid == in_req.dpid && out_req.v == in_req.v &&
            out_req.st_mf_mv == in_req.st_mf_mv && out_req.others == in_req.others, "other fields kept");
      check(out_req.sumtag == '0 && out_req.payload == '0 && out_req.slot == '0, "extension cleared");
    end
    finish();
  end
endmodule

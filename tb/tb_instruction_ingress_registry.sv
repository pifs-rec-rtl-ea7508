// tb_instruction_ingress_registry: self-checking test of the Instruction Ingress Registry: entries are
// stored, found by address, removed on take; duplicates of an address are
// consumed one at a time; the registry reports full at DEPTH entries.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_instruction_ingress_registry;
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

  logic wr_en, full, hit, take;
  iir_entry_t wr_entry, hit_entry;
  addr_t lookup_addr;
  logic [3:0] occupancy;
  instruction_ingress_registry #(.DEPTH(8)) dut (.*);
  iir_entry_t model[$];
  function automatic iir_entry_t mk(int i, addr_t a);
    iir_entry_t e;
    e.address = a; e.sumtag = sumtag_t'(i); e.nchunks = nchunk_t'(1 + i % 8);
    e.weight = $urandom; e.host_tag = 16'(i);
    return e;
  endfunction
  initial begin
    wr_en = 0; take = 0; lookup_addr = '0; wr_entry = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); wr_en = 1; wr_entry = mk(i, addr_t'(46'h100 * (i % 6)));
      model.push_back(wr_entry);
    end
    @(negedge clk); wr_en = 0;
    check(full && occupancy == 8, "full at 8 entries");
    for (int k = 0; k < 8; k++) begin
      // take a random remaining entry by address
      automatic int j = int'($urandom % model.size());
      @(negedge clk); lookup_addr = model[j].address; #1;
      check(hit, $sformatf("address %h found", lookup_addr));
      begin
        automatic int m = -1;
        for (int x = 0; x < model.size(); x++) if (model[x] == hit_entry) m = x;
        check(m >= 0 && hit_entry.address == lookup_addr, "entry content intact");
        if (m >= 0) model.delete(m);
      end
      take = 1; @(negedge clk); take = 0;
      check(int'(occupancy) == model.size(), "occupancy after take");
    end
    lookup_addr = 46'h100; #1;
    check(!hit && !full, "empty registry misses");
    finish();
  end
endmodule

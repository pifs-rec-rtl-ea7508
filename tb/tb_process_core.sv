// tb_process_core: self-checking test of the process core on its own. A memory model
// answers the repacked MemRd requests out of order with random delay; the
// SparseLengthSum of every SumTag is checked against a double-precision
// reference, DataValid against the rows returned, and the request headers
// against the repacking rules. A second phase turns spilling off so the
// capacity limit back-pressures Configuration instructions; an unknown row
// is dropped as an orphan.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_process_core;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  import tb_fp_pkg::*;
  logic instr_valid, instr_ready, mem_req_valid, mem_req_ready, rsp_valid, rsp_ready;
  logic result_valid, result_ready, dvalid, fcr_wr, buffer_en, bp;
  m2s_req_t instr, mem_req; s2m_rsp_t rsp; d2h_t result;
  logic [TAG_W-1:0] dvalid_tag; logic [7:0] fcr_wdata;
  logic [31:0] bp_cycles, done_cnt, iir_full_cycles, same_tag_cnt, swap_cnt, spill_cnt, stall_cycles, orphan_cnt;
  process_core #(.IIR_DEPTH(8), .CAPACITY(64), .SWAP_DEPTH(2), .SWITCH_ID(12'hFFE)) dut (.*);

  // instruction stream
  m2s_req_t iq[$];
  always @(negedge clk) begin
    instr_valid <= (iq.size() > 0);
    if (iq.size() > 0) instr <= iq[0];
  end
  always @(posedge clk) if (rst_n && instr_valid && instr_ready) void'(iq.pop_front());

  // memory: keeps requests, answers a random one after a random delay
  addr_t outstanding[$]; int mdelay = 0; int reqs = 0;
  bit inject_orphan = 0, inject_orphan_req = 0;
  always @(posedge clk) if (rst_n) begin
    if (mem_req_valid && mem_req_ready) begin
      reqs++;
      check(mem_req.memopcode == MEMOP_MEMRD && mem_req.spid == 12'hFFE && mem_req.dpid == 12'h100,
            "repacked request header");
      outstanding.push_back(mem_req.address);
    end
    mem_req_ready <= $urandom % 4 != 0;
    if (rsp_valid && rsp_ready) begin
      mdelay <= int'($urandom % 6);
    end else if (mdelay > 0) mdelay <= mdelay - 1;
  end
  int pick = 0; bit rsp_fire = 0;
  always @(posedge clk) rsp_fire <= rsp_valid && rsp_ready;
  always @(negedge clk) begin
    if (!rsp_valid || rsp_fire) begin
      if (rsp_valid) begin
        if (!inject_orphan) outstanding.delete(pick);
        inject_orphan = 0;
      end
      rsp_valid = 0;
      if (mdelay == 0 && outstanding.size() > 0) begin
        pick = int'($urandom % outstanding.size());
        rsp = '0; rsp.dpid = 12'hFFE; rsp.address = outstanding[pick];
        for (int c = 0; c < MAX_CHUNKS; c++)
          for (int l = 0; l < LANES; l++)
            rsp.data[c][32*l +: 32] = mem_word(outstanding[pick] + addr_t'(c*16 + l*4));
        rsp_valid = 1;
      end else if (inject_orphan_req) begin
        inject_orphan_req = 0; inject_orphan = 1;
        rsp = '0; rsp.address = 46'h3FFF_FFF0; rsp_valid = 1;
      end
    end
  end

  // reference
  logic [31:0] ref_sum [NUM_SUMTAGS][MAX_CHUNKS*LANES];
  addr_t ref_addr [NUM_SUMTAGS]; int ref_nch [NUM_SUMTAGS];
  int expected = 0, got = 0, rows_sent = 0, dvalids = 0;
  addr_t pool [12];
  function automatic m2s_req_t base_req(memop_t op, addr_t a);
    m2s_req_t r; r = '0; r.v = 1; r.memopcode = op; r.address = a; r.spid = 12'h001; r.dpid = 12'h100;
    return r;
  endfunction
  task automatic sls_config(int t, int rows, int nch, addr_t res_a);
    m2s_req_t r;
    r = base_req(MEMOP_CONFIG, res_a); r.sumtag = sumtag_t'(t); r.payload = cnt_t'(rows);
    iq.push_back(r);
    ref_addr[t] = res_a; ref_nch[t] = nch;
    for (int i = 0; i < MAX_CHUNKS*LANES; i++) ref_sum[t][i] = 32'd0;
    expected++;
  endtask
  task automatic sls_fetch(int t, addr_t a);
    m2s_req_t r; logic [31:0] w;
    r = base_req(MEMOP_DATAFETCH, a);
    w = {1'b0, 8'(125 + $urandom % 4), 23'd0};
    r.sumtag = sumtag_t'(t); r.payload = cnt_t'(ref_nch[t] - 1); r.tag = 16'(rows_sent); r.slot = {96'd0, w};
    iq.push_back(r); rows_sent++;
    for (int c = 0; c < ref_nch[t]; c++)
      for (int l = 0; l < LANES; l++)
        ref_sum[t][c*LANES+l] = r2f(f2r(ref_sum[t][c*LANES+l]) + f2r(w) * f2r(mem_word(a + addr_t'(c*16 + l*4))));
  endtask
  task automatic batch(int first, int ntags, bit in_order);
    int left [64]; int total = 0;
    for (int k = 0; k < ntags; k++) begin
      left[k] = 2 + int'($urandom % 5);
      sls_config(first + k, left[k], 1 + int'($urandom % MAX_CHUNKS), 46'h3F00_0000 + 46'((first + k) * 256));
      total += left[k];
      if (in_order) begin
        for (int j = 0; j < left[k]; j++) sls_fetch(first + k, pool[$urandom % 12]);
        total -= left[k]; left[k] = 0;
      end
    end
    while (total > 0) begin
      automatic int k = int'($urandom % ntags);
      if (left[k] > 0) begin sls_fetch(first + k, pool[$urandom % 12]); left[k]--; total--; end
    end
  endtask

  always @(posedge clk) begin
    result_ready <= ($urandom % 3) != 0;
    if (result_valid && result_ready) begin
      automatic int t = int'(result.sumtag);
      got++;
      check(result.address == ref_addr[t] && int'(result.nchunks) == ref_nch[t], $sformatf("result header of tag %0d", t));
      for (int c = 0; c < ref_nch[t]; c++)
        for (int l = 0; l < LANES; l++)
          check(result.data[c][32*l +: 32] == ref_sum[t][c*LANES+l],
                $sformatf("tag %0d chunk %0d lane %0d got %h exp %h", t, c, l, result.data[c][32*l +: 32], ref_sum[t][c*LANES+l]));
    end
    if (rst_n && dvalid) dvalids++;
  end

  initial begin
    instr_valid = 0; instr = '0; rsp_valid = 0; rsp = '0; fcr_wr = 0; fcr_wdata = 0;
    for (int i = 0; i < 12; i++) pool[i] = 46'h10_0000 + 46'(i * 4096 + ($urandom % 8) * 128);
    repeat (3) @(posedge clk); rst_n = 1;
    check(buffer_en, "buffer enabled after reset");
    batch(0, 24, 0);
    while (got < expected) @(posedge clk);
    // spilling off: capacity limit SWAP_DEPTH+1
    @(negedge clk); fcr_wr = 1; fcr_wdata = 8'b10; @(negedge clk); fcr_wr = 0;
    batch(24, 16, 1);
    while (got < expected) @(posedge clk);
    @(negedge clk); fcr_wr = 1; fcr_wdata = 8'b01; @(negedge clk); fcr_wr = 0;
    check(!buffer_en, "buffer disabled through the FCR");
    inject_orphan_req = 1;
    repeat (20) @(posedge clk);
    check(orphan_cnt == 1, "unknown row dropped");
    check(dvalids == rows_sent && reqs == rows_sent, $sformatf("DataValid %0d requests %0d rows %0d", dvalids, reqs, rows_sent));
    check(int'(done_cnt) == expected, "done count");
    check(bp_cycles > 0, "back-pressure seen");
    check(spill_cnt > 0 && swap_cnt > 0 && same_tag_cnt > 0, "spill, swap and same-tag paths used");
    check(iir_full_cycles > 0, "IIR filled up");
    $display("bp=%0d iir_full=%0d same=%0d swaps=%0d spills=%0d stall=%0d", bp_cycles, iir_full_cycles, same_tag_cnt, swap_cnt, spill_cnt, stall_cycles);
    finish();
  end
endmodule

// tb_pifs_switch_full: the end-to-end test of tb_pifs_switch run on the
// switch at its full default size (512 KB on-switch buffer, 1024-entry
// profiler, 32-entry IIR, 64 SumTags, swap depth 4).
//
// Stimulus, reference and checks are those of tb_pifs_switch; the differences
// are the parameters (none overridden), wider SumTag batches so that more
// SumTags are live than the accumulate and swap registers hold (spilling),
// and a row pool built from pairs of addresses that fall on the same buffer
// line, so that the HTR replacement decision is exercised in the large
// buffer too. Every mechanism counted must occur.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_pifs_switch_full;
  import pifs_pkg::*;
  import tb_fp_pkg::*;

  localparam int NUM_DSP = 4;
  localparam logic [ID_W-1:0] HOST_ID = 12'h001;

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

  logic     host_req_valid, host_req_ready, host_rsp_valid, host_rsp_ready;
  m2s_req_t host_req;
  s2m_rsp_t host_rsp;
  logic     host_d2h_valid, host_d2h_ready, host_dvalid;
  d2h_t     host_d2h;
  logic [TAG_W-1:0] host_dvalid_tag;
  logic     [NUM_DSP-1:0] dsp_req_valid, dsp_req_ready, dsp_rsp_valid, dsp_rsp_ready;
  logic     [NUM_DSP-1:0] dsp_wr_valid, dsp_wr_ready;
  m2s_req_t [NUM_DSP-1:0] dsp_req;
  s2m_rsp_t [NUM_DSP-1:0] dsp_rsp;
  addr_t    dsp_wr_addr;
  logic [511:0] dsp_wr_data;
  logic     fcr_wr, mig_valid, mig_ready, mig_busy;
  logic [7:0] fcr_wdata;
  logic [ADDR_W-13:0] mig_src_page, mig_dst_page;
  pifs_stats_t stats;

  pifs_switch dut (.*);

  int reads [NUM_DSP], writes [NUM_DSP], bad_ops [NUM_DSP];
  for (genvar p = 0; p < NUM_DSP; p++) begin : g_dev
    type3_model #(.LAT_MIN(5 + 5 * p), .LAT_MAX(30 + 5 * p)) u_dev (
      .clk, .rst_n,
      .req_valid(dsp_req_valid[p]), .req_ready(dsp_req_ready[p]), .req(dsp_req[p]),
      .rsp_valid(dsp_rsp_valid[p]), .rsp_ready(dsp_rsp_ready[p]), .rsp(dsp_rsp[p]),
      .wr_valid(dsp_wr_valid[p]), .wr_ready(dsp_wr_ready[p]),
      .wr_addr(dsp_wr_addr), .wr_data(dsp_wr_data),
      .reads(reads[p]), .writes(writes[p]), .bad_ops(bad_ops[p]));
  end

  // ---------------- host-side stimulus
  m2s_req_t hq[$];

  always @(negedge clk) begin
    host_req_valid <= (hq.size() > 0);
    if (hq.size() > 0) host_req <= hq[0];
  end
  always @(posedge clk) if (rst_n && host_req_valid && host_req_ready) void'(hq.pop_front());

  function automatic m2s_req_t base_req(memop_t op, addr_t a);
    m2s_req_t r;
    r = '0;
    r.v         = 1'b1;
    r.memopcode = op;
    r.address   = a;
    r.spid      = HOST_ID;
    r.dpid      = 12'h100;
    return r;
  endfunction

  // reference state per SumTag
  logic [31:0] ref_sum [NUM_SUMTAGS][MAX_CHUNKS*LANES];
  addr_t       ref_addr [NUM_SUMTAGS];
  int          ref_nch [NUM_SUMTAGS];
  int          expected_results = 0, got_results = 0, rows_sent = 0, dvalids = 0;
  int          bypass_expected = 0, bypass_got = 0;
  addr_t       pool [24];

  task automatic sls_config(int t, int rows, int nch, addr_t res_a);
    m2s_req_t r;
    r = base_req(MEMOP_CONFIG, res_a);
    r.sumtag  = sumtag_t'(t);
    r.payload = cnt_t'(rows);
    hq.push_back(r);
    ref_addr[t] = res_a;
    ref_nch[t]  = nch;
    for (int i = 0; i < MAX_CHUNKS*LANES; i++) ref_sum[t][i] = 32'd0;
    expected_results++;
  endtask

  task automatic sls_fetch(int t, addr_t a);
    m2s_req_t r;
    logic [31:0] w;
    r = base_req(MEMOP_DATAFETCH, a);
    w = {1'b0, 8'(125 + $urandom % 4), 23'd0};   // 0.25, 0.5, 1 or 2
    r.sumtag  = sumtag_t'(t);
    r.payload = cnt_t'(ref_nch[t] - 1);
    r.tag     = 16'(rows_sent);
    r.slot    = {96'd0, w};
    hq.push_back(r);
    rows_sent++;
    for (int c = 0; c < ref_nch[t]; c++)
      for (int l = 0; l < LANES; l++)
        ref_sum[t][c*LANES+l] = r2f(f2r(ref_sum[t][c*LANES+l]) +
                                    f2r(w) * f2r(mem_word(a + addr_t'(c*16 + l*4))));
  endtask

  // SLS batch: ntags SumTags, rows per tag random, fetches in random order
  // unless in_order is set (needed when back-pressure can hold a Configuration)
  task automatic sls_batch(int first_tag, int ntags, bit in_order);
    int left [64];
    int total = 0;
    for (int k = 0; k < ntags; k++) begin
      left[k] = 2 + int'($urandom % 6);
      sls_config(first_tag + k, left[k], 1 + int'($urandom % MAX_CHUNKS),
                 46'h3F00_0000 + 46'((first_tag + k) * 256));
      total += left[k];
      if (in_order) begin
        for (int j = 0; j < left[k]; j++) sls_fetch(first_tag + k, pool[$urandom % 24]);
        total -= left[k];
        left[k] = 0;
      end
    end
    while (total > 0) begin
      automatic int k = int'($urandom % ntags);
      if (left[k] > 0) begin
        sls_fetch(first_tag + k, pool[$urandom % 24]);
        left[k]--;
        total--;
      end
    end
  endtask

  // SLS stream with a window of live SumTags: the next Configuration is sent
  // right after the last DataFetch of any live SumTag, so it meets the
  // capacity limit while that SumTag's rows are still in flight, and the rows
  // it waits for are always ahead of it in the queue
  task automatic sls_window(int first_tag, int ntags, int win);
    int left [64];
    int live [$];
    int next = 0;
    while (next < ntags && live.size() < win) begin
      left[next] = 3 + int'($urandom % 5);
      sls_config(first_tag + next, left[next], 1 + int'($urandom % MAX_CHUNKS),
                 46'h3F00_0000 + 46'((first_tag + next) * 256));
      live.push_back(next);
      next++;
    end
    while (live.size() > 0) begin
      automatic int i = int'($urandom % live.size());
      automatic int k = live[i];
      sls_fetch(first_tag + k, pool[$urandom % 24]);
      left[k]--;
      if (left[k] == 0) begin
        live.delete(i);
        if (next < ntags) begin
          left[next] = 3 + int'($urandom % 5);
          sls_config(first_tag + next, left[next], 1 + int'($urandom % MAX_CHUNKS),
                     46'h3F00_0000 + 46'((first_tag + next) * 256));
          live.push_back(next);
          next++;
        end
      end
    end
  endtask

  // ---------------- host-side checking
  always @(posedge clk) begin
    host_d2h_ready <= ($urandom % 3) != 0;
    if (rst_n && host_d2h_valid && host_d2h_ready) begin
      automatic int t = int'(host_d2h.sumtag);
      got_results++;
      check(host_d2h.address == ref_addr[t], $sformatf("result address of tag %0d", t));
      check(int'(host_d2h.nchunks) == ref_nch[t], $sformatf("chunk count of tag %0d", t));
      for (int c = 0; c < ref_nch[t]; c++)
        for (int l = 0; l < LANES; l++)
          check(host_d2h.data[c][32*l +: 32] == ref_sum[t][c*LANES+l],
                $sformatf("tag %0d chunk %0d lane %0d got %h exp %h", t, c, l,
                          host_d2h.data[c][32*l +: 32], ref_sum[t][c*LANES+l]));
    end
    if (rst_n && host_dvalid) dvalids++;
  end

  assign host_rsp_ready = 1'b1;
  always @(posedge clk) begin
    if (rst_n && host_rsp_valid) begin
      // a read redirected to the migration destination returns the source's data
      automatic addr_t oa = (host_rsp.address[ADDR_W-1:12] == dst_base[ADDR_W-1:12]) ?
                            {src_base[ADDR_W-1:12], host_rsp.address[11:0]} : host_rsp.address;
      bypass_got++;
      check(host_rsp.dpid == HOST_ID, "bypass response returns to the host");
      for (int l = 0; l < LANES; l++)
        check(host_rsp.data[0][32*l +: 32] == mem_word(oa + addr_t'(4*l)),
              $sformatf("bypass read data at %h", host_rsp.address));
    end
  end

  // remapped reads: a request for the source page seen at the destination page's port
  int remapped_seen = 0;
  addr_t src_base = 46'h20_0000;   // page 0x200 -> device 0
  addr_t dst_base = 46'h21_3000;   // page 0x213 -> device 3
  always @(posedge clk) begin
    for (int p = 0; p < NUM_DSP; p++)
      if (dsp_req_valid[p] && dsp_req_ready[p] && dsp_req[p].spid == HOST_ID &&
          dsp_req[p].address[ADDR_W-1:12] == dst_base[ADDR_W-1:12]) begin
        remapped_seen++;
        check(p == int'(dst_base[13:12]), "remapped read goes to the destination device");
      end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: results %0d/%0d", got_results, expected_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dr;
    host_req_valid = 1'b0;
    host_req = '0;
    fcr_wr = 1'b0;
    fcr_wdata = '0;
    mig_valid = 1'b0;
    mig_src_page = '0;
    mig_dst_page = '0;
    for (int i = 0; i < 24; i += 2) begin
      pool[i]     = 46'h10_0000 + 46'(i * 4096 + ($urandom % 8) * 128);
      pool[i + 1] = pool[i] ^ (46'h1 << 16) ^ (46'h1 << 4);   // same buffer line
    end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    // phase 1: spilling on, many SumTags in flight, random row order, plus standard reads
    for (int i = 0; i < 6; i++) begin
      hq.push_back(base_req(MEMOP_MEMRD, 46'h20_0000 + 46'(i * 4160)));
      bypass_expected++;
    end
    sls_batch(0, 12, 1'b0);
    sls_batch(12, 12, 1'b0);
    wait (got_results == expected_results && hq.size() == 0);
    repeat (50) @(posedge clk);

    // phase 2: spilling off -> capacity limit SWAP_DEPTH+1 = 5, back-pressure
    @(negedge clk);
    fcr_wr = 1'b1; fcr_wdata = 8'b10;
    @(negedge clk);
    fcr_wr = 1'b0;
    sls_window(24, 16, 5);
    wait (got_results == expected_results && hq.size() == 0);
    repeat (50) @(posedge clk);

    // phase 3: migrate a page while reading it
    @(negedge clk);
    mig_valid = 1'b1; mig_src_page = src_base[ADDR_W-1:12]; mig_dst_page = dst_base[ADDR_W-1:12];
    @(negedge clk);
    mig_valid = 1'b0;
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 64; i++) begin
        hq.push_back(base_req(MEMOP_MEMRD, src_base + 46'(i * 64)));
        bypass_expected++;
      end
    wait (!mig_busy && hq.size() == 0);
    hq.push_back(base_req(MEMOP_MEMRD, src_base + 46'(5 * 64)));
    bypass_expected++;
    repeat (200) @(posedge clk);

    check(got_results == expected_results, "all SLS results returned");
    check(bypass_got == bypass_expected, $sformatf("bypass responses %0d of %0d", bypass_got, bypass_expected));
    check(dvalids == rows_sent, $sformatf("DataValid %0d for %0d rows", dvalids, rows_sent));
    dr = 0;
    for (int p = 0; p < NUM_DSP; p++) begin
      check(bad_ops[p] == 0, "devices saw only standard reads");
      dr += reads[p];
    end
    check(writes[3] == 64, $sformatf("64 lines written to the destination device (%0d)", writes[3]));
    check(stats.orphan == 0, "no row without its instruction");
    $display("stats: bypass=%0d pifs=%0d hit=%0d miss=%0d fill=%0d reject=%0d same=%0d swaps=%0d spills=%0d acc_stall=%0d bp=%0d iir_full=%0d done=%0d mig_lines=%0d lock_stall=%0d remapped=%0d dvalid=%0d dev_reads=%0d",
             stats.bypass, stats.pifs, stats.buf_hit, stats.buf_miss, stats.buf_fill, stats.buf_reject,
             stats.same_tag, stats.swaps, stats.spills, stats.acc_stall, stats.bp_cycles, stats.iir_full,
             stats.done, stats.mig_lines, stats.lock_stall, remapped_seen, dvalids, dr);
    check(stats.bypass > 0,     "mechanism: bypass to VCS");
    check(stats.pifs > 0,       "mechanism: PIFS instructions");
    check(stats.buf_hit > 0,    "mechanism: buffer hit");
    check(stats.buf_fill > 0,   "mechanism: buffer fill");
    check(stats.buf_reject > 0, "mechanism: HTR rejected a fill");
    check(stats.swaps > 0,      "mechanism: swap register exchange");
    check(stats.spills > 0,     "mechanism: SRAM spill");
    check(stats.bp_cycles > 0,  "mechanism: capacity back-pressure");
    check(dvalids > 0,          "mechanism: DataValid");
    check(stats.mig_lines == 64 && stats.mig_pages == 1, "mechanism: page migration");
    check(stats.lock_stall > 0, "mechanism: locked line stall");
    check(remapped_seen > 0,    "mechanism: remapped read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

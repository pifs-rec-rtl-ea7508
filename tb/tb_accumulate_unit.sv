// tb_accumulate_unit: self-checking test of the out-of-order accumulate unit.
//
// The testbench plays the configuration logic (a per-SumTag candidate count
// and result address) and feeds rows of several SumTags in random order, so
// the unit has to exchange partial sums with the swap register and, with
// only two swap slots, spill to the SRAM region. Every finished sum is
// compared lane by lane with a reference computed in double precision and
// rounded to FP32 after each multiply and each add. It also checks the
// timing: n cycles per row of n chunks plus one accept cycle when the
// SumTag does not change, and SPILL_LAT stall cycles per SRAM access.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_accumulate_unit;
  import pifs_pkg::*;
  import tb_fp_pkg::*;

  localparam int NT = 5;      // SumTags in flight
  localparam int SWAP = 2;

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

  logic    spill_en, op_valid, op_ready, q_final, row_done, res_valid, res_ready;
  acc_op_t op;
  sumtag_t q_tag, row_tag;
  addr_t   q_addr;
  d2h_t    res;
  logic [31:0] same_tag_cnt, swap_cnt, spill_cnt, stall_cycles;

  accumulate_unit #(.SWAP_DEPTH(SWAP), .SPILL_LAT(2)) dut (.*);

  // configuration-logic model
  int    remaining [NUM_SUMTAGS];
  addr_t res_address [NUM_SUMTAGS];
  assign q_final = (remaining[q_tag] == 1);
  assign q_addr  = res_address[q_tag];
  always @(posedge clk) if (row_done) remaining[row_tag] <= remaining[row_tag] - 1;

  // reference
  logic [31:0] ref_sum [NUM_SUMTAGS][MAX_CHUNKS*LANES];
  int          nch [NUM_SUMTAGS];
  int          results = 0;

  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      automatic int t = int'(res.sumtag);
      results++;
      check(res.address == res_address[t], $sformatf("result address of tag %0d", t));
      check(int'(res.nchunks) == nch[t], $sformatf("chunk count of tag %0d", t));
      for (int c = 0; c < nch[t]; c++)
        for (int l = 0; l < LANES; l++)
          check(res.data[c][32*l +: 32] == ref_sum[t][c*LANES+l],
                $sformatf("tag %0d chunk %0d lane %0d: got %h exp %h", t, c, l,
                          res.data[c][32*l +: 32], ref_sum[t][c*LANES+l]));
    end
  end

  acc_op_t q[$];

  task automatic run_ops();
    while (q.size() > 0) begin
      @(negedge clk);
      op_valid  = 1'b1;
      op        = q[0];
      res_ready = ($urandom % 4) != 0;
      @(posedge clk);
      if (op_ready) void'(q.pop_front());
    end
    @(negedge clk);
    op_valid = 1'b0;
    res_ready = 1'b1;
  endtask

  task automatic make_tag(int t, int rows, int chunks, bit [ADDR_W-1:0] a);
    remaining[t]   = rows;
    res_address[t] = a;
    nch[t]         = chunks;
    for (int i = 0; i < MAX_CHUNKS*LANES; i++) ref_sum[t][i] = 32'd0;
  endtask

  function automatic acc_op_t make_row(int t);
    acc_op_t o;
    o.sumtag   = sumtag_t'(t);
    o.nchunks  = nchunk_t'(nch[t]);
    o.weight   = rand_f(-1, 0, 1'b0);
    o.host_tag = 16'(t);
    o.data     = '0;
    for (int c = 0; c < nch[t]; c++)
      for (int l = 0; l < LANES; l++) begin
        o.data[c][32*l +: 32] = rand_f(-2, 2, 1'b1);
        ref_sum[t][c*LANES+l] = ref_mac(ref_sum[t][c*LANES+l], o.weight, o.data[c][32*l +: 32]);
      end
    return o;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rows_left [NT];
    int total, t0, t1, sc0, st0;
    op_valid  = 1'b0;
    op        = '0;
    res_ready = 1'b1;
    spill_en  = 1'b1;
    for (int t = 0; t < NUM_SUMTAGS; t++) remaining[t] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // phase 1: one SumTag, back-to-back rows: timing (n+1 cycles per row)
    make_tag(9, 4, 3, 46'h1000);
    for (int r = 0; r < 4; r++) q.push_back(make_row(9));
    @(negedge clk);
    t0 = $time;
    run_ops();
    wait (results == 1);
    t1 = $time;
    // last row accepted at 3*(n+1) cycles after the first, then n cycles, then result
    check((t1 - t0) / 10 >= 4 * 4 && (t1 - t0) / 10 <= 4 * 4 + 3,
          $sformatf("4 rows of 3 chunks took %0d cycles", (t1 - t0) / 10));
    check(same_tag_cnt == 3, "same-tag rows counted");

    // phase 2: NT SumTags interleaved randomly, swap register of 2 -> spills
    total = 0;
    for (int t = 0; t < NT; t++) begin
      rows_left[t] = 3 + int'($urandom % 4);
      make_tag(t + 1, rows_left[t], 1 + int'($urandom % MAX_CHUNKS), 46'h2000 + 46'(t * 128));
      total += rows_left[t];
    end
    // one row of every SumTag in turn first: more live SumTags than the
    // accumulate and swap registers hold, so spilling must happen
    for (int t = 0; t < NT; t++) begin
      q.push_back(make_row(t + 1));
      rows_left[t]--;
      total--;
    end
    while (total > 0) begin
      automatic int t = int'($urandom % NT);
      if (rows_left[t] > 0) begin
        q.push_back(make_row(t + 1));
        rows_left[t]--;
        total--;
      end
    end
    sc0 = int'(spill_cnt);
    st0 = int'(stall_cycles);
    run_ops();
    wait (results == 1 + NT);
    repeat (2) @(posedge clk);
    check(swap_cnt > 0, "partial sums were swapped");
    check(spill_cnt > 0, "partial sums were spilled to SRAM");
    check(stall_cycles == 2 * spill_cnt, $sformatf("spill stalls %0d for %0d accesses", stall_cycles, spill_cnt));
    check(!res_valid, "no stray result");
    $display("same_tag=%0d swaps=%0d spills=%0d stalls=%0d (phase2 spills %0d stalls %0d)",
             same_tag_cnt, swap_cnt, spill_cnt, stall_cycles, int'(spill_cnt) - sc0, int'(stall_cycles) - st0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_on_switch_buffer: self-checking test of the on-switch buffer: misses pass on, fills make
// later lookups hit with the stored row after two cycles, HTR keeps a resident
// row that is hotter than a conflicting newcomer and replaces a colder one,
// and buffer_en low turns every lookup into a miss.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_on_switch_buffer;
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

  logic buffer_en, req_valid, req_ready, miss_valid, miss_ready, hit_valid, hit_ready, fill_valid;
  m2s_req_t req, miss_req; s2m_rsp_t hit_rsp; addr_t fill_addr; row_t fill_data;
  logic [31:0] hit_cnt, miss_cnt, fill_cnt, reject_cnt;
  // 16 lines of 128 bytes
  on_switch_buffer #(.BYTES(2048), .PROF_ENTRIES(64), .SWITCH_ID(12'hFFE)) dut (.*);
  int n_in, n_out; bit counting = 0;
  always @(posedge clk) if (counting) begin
    if (hit_valid && hit_ready) n_out++;
    if (miss_valid && miss_ready) n_out++;
    if (req_valid && req_ready) n_in++;
  end
  function automatic row_t rowval(addr_t a); return {32{a[31:0] ^ 32'h5A5A0000}}; endfunction
  // one lookup; returns 1 on hit, and the cycles from request to result
  task automatic lookup(addr_t a, output bit h, output int lat, output row_t d);
    @(negedge clk); req_valid = 1; req = '0; req.address = a; req.tag = 16'h77;
    lat = 0;
    @(negedge clk); req_valid = 0;
    while (!hit_valid && !miss_valid) begin @(negedge clk); lat++; end
    lat++;
    h = hit_valid; d = hit_rsp.data;
    if (h) check(hit_rsp.address == a && hit_rsp.dpid == 12'hFFE && hit_rsp.tag == 16'h77, "hit response header");
    else   check(miss_req.address == a, "miss passes the request on");
    @(negedge clk);
  endtask
  task automatic fill(addr_t a);
    @(negedge clk); fill_valid = 1; fill_addr = a; fill_data = rowval(a);
    @(negedge clk); fill_valid = 0;
  endtask
  initial begin
    bit h; int lat; row_t d;
    addr_t A = 46'h1000, B = 46'h3000;   // same line, different row
    buffer_en = 1; req_valid = 0; req = '0; miss_ready = 1; hit_ready = 1; fill_valid = 0; fill_addr = 0; fill_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    lookup(A, h, lat, d); check(!h, "cold miss");
    fill(A);
    lookup(A, h, lat, d); check(h && d == rowval(A), "hit returns the stored row");
    check(lat == 2, $sformatf("lookup latency %0d cycles", lat));
    lookup(A, h, lat, d); lookup(A, h, lat, d);
    // B accessed once: colder than A, must not replace it
    lookup(B, h, lat, d); check(!h, "B misses");
    fill(B);
    check(reject_cnt == 1, "HTR rejected the colder row");
    lookup(A, h, lat, d); check(h, "A still resident");
    // B becomes hotter than A
    for (int i = 0; i < 8; i++) lookup(B, h, lat, d);
    fill(B);
    lookup(B, h, lat, d); check(h && d == rowval(B), "hotter row replaced the resident");
    buffer_en = 0;
    lookup(B, h, lat, d); check(!h, "disabled buffer misses");
    buffer_en = 1;
    // back-to-back stream with stalls: no loss
    begin
      n_in = 0; n_out = 0; counting = 1;
      for (int i = 0; i < 400; i++) begin
        @(negedge clk);
        if (req_valid && !req_ready) continue;
        req_valid = $urandom % 2; req = '0; req.address = ($urandom % 2) ? A : B;
        miss_ready = $urandom % 2; hit_ready = $urandom % 2;
      end
      req_valid = 0; miss_ready = 1; hit_ready = 1;
      repeat (4) @(negedge clk);
      check(n_in == n_out, $sformatf("stream: %0d in, %0d out", n_in, n_out));
    end
    check(hit_cnt > 0 && miss_cnt > 0 && fill_cnt == 2, "counters");
    finish();
  end
endmodule

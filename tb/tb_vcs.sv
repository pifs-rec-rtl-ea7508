// tb_vcs: self-checking test of the VCS: requests from three sources reach the
// downstream port memory indexing selects (modelled here as page mod 4) with
// no loss or duplication; a locked line is held while other sources proceed;
// responses are routed to the host or the switch by DPID.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_vcs;
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

  logic [2:0] src_valid, src_ready; m2s_req_t [2:0] src_req;
  addr_t lk_addr, lk_addr_out; logic [1:0] lk_port; logic lk_blocked;
  logic [3:0] dsp_req_valid, dsp_req_ready, dsp_rsp_valid, dsp_rsp_ready;
  m2s_req_t [3:0] dsp_req; s2m_rsp_t [3:0] dsp_rsp;
  logic host_rsp_valid, host_rsp_ready, sw_rsp_valid, sw_rsp_ready;
  s2m_rsp_t host_rsp, sw_rsp; logic [31:0] req_cnt;
  vcs #(.SWITCH_ID(12'hFFE), .MC_ID(12'hFFF)) dut (.*);
  // memory indexing model: interleave, lines 0x...40 locked unless MC
  assign lk_addr_out = lk_addr;
  assign lk_port = lk_addr[13:12];
  assign lk_blocked = (lk_addr[11:6] == 6'd1);
  logic [3:0] rsp_fire; logic [2:0] src_fire;
  always @(posedge clk) begin rsp_fire <= dsp_rsp_valid & dsp_rsp_ready; src_fire <= src_valid & src_ready; end
  int sent = 0, got = 0, to_host = 0, to_sw = 0, exp_host = 0, exp_sw = 0, locked_passed = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 4; p++) begin
      if (dsp_req_valid[p] && dsp_req_ready[p]) begin
        got++;
        check(int'(dsp_req[p].address[13:12]) == p, "request on the port of its page");
        if (dsp_req[p].address[11:6] == 6'd1) begin
          check(dsp_req[p].spid == 12'hFFF, "locked line only for the migration controller");
          locked_passed++;
        end
      end
      if (dsp_rsp_valid[p] && dsp_rsp_ready[p]) begin
        if (dsp_rsp[p].dpid == 12'hFFE || dsp_rsp[p].dpid == 12'hFFF) exp_sw++; else exp_host++;
      end
    end
    if (host_rsp_valid && host_rsp_ready) begin to_host++; check(host_rsp.dpid == 12'h001, $sformatf("host response %h", host_rsp.dpid)); end
    if (sw_rsp_valid && sw_rsp_ready) begin to_sw++; check(sw_rsp.dpid >= 12'hFFE, "switch response"); end
    for (int s = 0; s < 3; s++) if (src_valid[s] && src_ready[s]) sent++;
  end
  int lock_left = 40;
  s2m_rsp_t r;
  initial begin
    src_valid = 0; src_req = '0; dsp_req_ready = 0; dsp_rsp_valid = 0; dsp_rsp = '0; host_rsp_ready = 0; sw_rsp_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int s = 0; s < 3; s++) if (!src_valid[s] || src_fire[s]) begin
        src_valid[s] = $urandom % 2;
        src_req[s] = '0;
        src_req[s].address = addr_t'({$urandom, $urandom});
        if (src_req[s].address[11:6] == 6'd1) src_req[s].address[6] = (s != 0) ? 1'b0 : 1'b1;
        src_req[s].spid = (s == 2) ? 12'hFFF : ((s == 1) ? 12'hFFE : 12'h001);
        if (s == 2 && lock_left > 0 && $urandom % 2) begin src_req[s].address[11:6] = 6'd1; lock_left--; end
        if (s == 0 && $urandom % 8 == 0) src_req[s].address[11:6] = 6'd1;   // host to a locked line
      end
      dsp_req_ready = 4'($urandom);
      host_rsp_ready = $urandom % 2; sw_rsp_ready = $urandom % 2;
      for (int p = 0; p < 4; p++) if (!dsp_rsp_valid[p] || rsp_fire[p]) begin
        dsp_rsp_valid[p] = $urandom % 2;
        r = '0;
        r.dpid = ($urandom % 2) ? 12'h001 : (($urandom % 2) ? 12'hFFE : 12'hFFF);
        r.tag = 16'($urandom);
        dsp_rsp[p] = r;
      end
    end
    @(negedge clk); src_valid = 0; dsp_rsp_valid = 0;
    repeat (3) @(negedge clk);
    check(sent == got && int'(req_cnt) == got, $sformatf("requests sent %0d delivered %0d", sent, got));
    check(to_host == exp_host && to_sw == exp_sw, "responses routed");
    check(locked_passed > 0, "migration reads pass the lock");
    finish();
  end
endmodule

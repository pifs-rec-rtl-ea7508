// tb_instruction_decoder: self-checking test of the instruction decoder: Configuration and
// DataFetch instructions are split into ACR writes and IIR records with the
// right fields, readiness follows the consumer of each class, and a row is
// joined with its IIR entry.
//
// Interface and timing: no ports. A 10-unit clock; reset is held for the
// first cycles; stimulus changes at the falling edge and the block is sampled
// at the rising edge; a watchdog ends a run that hangs, counted as a failure.
// What is checked follows the block's description in its RTL header: the
// function named in the paper, plus this design's own choices there (widths,
// depths, latencies, handshakes).
module tb_instruction_decoder;
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

  logic instr_valid, instr_ready, cfg_valid, cfg_ready, fetch_valid, fetch_ready;
  m2s_req_t instr;
  sumtag_t cfg_sumtag; addr_t cfg_sum_addr; cnt_t cfg_count;
  iir_entry_t fetch_entry, iir_entry;
  row_t rsp_data; acc_op_t acc_op;
  instruction_decoder dut (.*);
  initial begin
    for (int i = 0; i < 100; i++) begin
      instr = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      instr.memopcode = (i % 2) ? MEMOP_CONFIG : MEMOP_DATAFETCH;
      instr_valid = 1; cfg_ready = $urandom % 2; fetch_ready = $urandom % 2;
      iir_entry = {$urandom, $urandom, $urandom, $urandom};
      rsp_data = {32{$urandom}};
      #1;
      if (i % 2) begin
        check(cfg_valid && !fetch_valid, "configuration decoded");
        check(cfg_sumtag == instr.sumtag && cfg_sum_addr == instr.address && cfg_count == instr.payload, "ACR fields");
        check(instr_ready == cfg_ready, "ready from ACR");
      end else begin
        check(fetch_valid && !cfg_valid, "data fetch decoded");
        check(fetch_entry.address == instr.address && fetch_entry.sumtag == instr.sumtag &&
              fetch_entry.weight == instr.slot[31:0] && fetch_entry.host_tag == instr.tag, "IIR fields");
        check(int'(fetch_entry.nchunks) == int'(instr.payload[2:0]) + 1, "chunk count = VectorSize + 1");
        check(instr_ready == fetch_ready, "ready from IIR");
      end
      check(acc_op.sumtag == iir_entry.sumtag && acc_op.weight == iir_entry.weight &&
            acc_op.nchunks == iir_entry.nchunks && acc_op.data == rsp_data, "row joined with IIR entry");
    end
    finish();
  end
endmodule

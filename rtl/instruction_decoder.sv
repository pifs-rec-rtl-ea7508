// instruction_decoder: field extraction for the process core.
//
// Two independent combinational paths:
//  * Host path. A PIFS instruction is decoded by its MemOpcode. A
//    Configuration (1111b) becomes an ACR write: the SumTag selects the
//    entry, the re-purposed Address field is the host address reserved for
//    the result and the 9-bit payload is SumCandidateCount. A DataFetch
//    (1110b) becomes an IIR record: row address, SumTag, chunk count
//    (VectorSize + 1 chunks of 16 bytes), FP32 weight from the data slot and
//    the host Tag (used for the DataValid indication). The instruction is
//    consumed when the consumer of its class is ready.
//  * Data path. A returning row is joined with the IIR entry found by its
//    address into an accumulate operation.
// The meaning of the fields follows the paper; the weight placement in slot
// bits [31:0] and VectorSize+1 as chunk count are this design's reading.
//
// Lint notes: instruction fields that do not concern the decoder (V, ST/MF/MV, SPID/DPID and others) and the IIR address bits are unused by design.
module instruction_decoder
  import pifs_pkg::*;
(
  // host path
  input  logic       instr_valid,
  output logic       instr_ready,
  input  m2s_req_t   instr,
  output logic       cfg_valid,
  input  logic       cfg_ready,
  output sumtag_t    cfg_sumtag,
  output addr_t      cfg_sum_addr,
  output cnt_t       cfg_count,
  output logic       fetch_valid,
  input  logic       fetch_ready,
  output iir_entry_t fetch_entry,
  // data path
  input  row_t       rsp_data,
  input  iir_entry_t iir_entry,
  output acc_op_t    acc_op
);
  wire is_cfg   = (instr.memopcode == MEMOP_CONFIG);
  wire is_fetch = (instr.memopcode == MEMOP_DATAFETCH);

  always_comb begin
    cfg_valid    = instr_valid && is_cfg;
    cfg_sumtag   = instr.sumtag;
    cfg_sum_addr = instr.address;
    cfg_count    = instr.payload;

    fetch_valid          = instr_valid && is_fetch;
    fetch_entry.address  = instr.address;
    fetch_entry.sumtag   = instr.sumtag;
    fetch_entry.nchunks  = vsize_to_chunks(instr.payload[VSIZE_W-1:0]);
    fetch_entry.weight   = instr.slot[31:0];
    fetch_entry.host_tag = instr.tag;

    // anything else reaching the core is dropped
    instr_ready = is_cfg ? cfg_ready : (is_fetch ? fetch_ready : 1'b1);

    acc_op.sumtag   = iir_entry.sumtag;
    acc_op.nchunks  = iir_entry.nchunks;
    acc_op.weight   = iir_entry.weight;
    acc_op.host_tag = iir_entry.host_tag;
    acc_op.data     = rsp_data;
  end
endmodule

// process_core: the compute block PIFS-Rec adds to the fabric switch.
//
// It receives the PIFS instructions the MemOpcode checker routed to it and
// runs a SparseLengthSum per SumTag:
//  * Configuration (1111b): the instruction decoder writes the Accumulate
//    Configuration Register (result address, SumCandidateCount) through the
//    configuration logic, which applies back-pressure when CapacityCounter
//    has reached its limit.
//  * DataFetch (1110b): the fetch is recorded in the Instruction Ingress
//    Registry and, in the same cycle, repacked (MemRd, SPID = switch) and
//    sent towards memory (mem_req). A full IIR stalls the instruction.
//  * Returning rows (rsp): the row's address selects its IIR entry, which
//    the decoder joins with the data into an accumulate operation for the
//    accumulate unit. The host is told on dvalid (with its request Tag) that
//    the row was retrieved. A row matching no IIR entry is dropped and
//    counted.
//  * When SumCandidateCount reaches zero, the finished sum leaves on result
//    (valid/ready) with the host address it must be written to.
// The functional configuration register is written over fcr_wr/fcr_wdata.
// Block structure and flow follow the paper; handshakes are this design's.
//
// Timing: a DataFetch is registered in the IIR and leaves as mem_req in
// the cycle it is accepted; a row is accepted into the accumulate unit in
// the cycle it arrives when the unit is free; dvalid follows one cycle later.
//
// Lint notes: the IIR occupancy, the ACR active flag, the CapacityCounter value and the FCR read-back are status outputs of the sub-blocks kept for observability and not used here; the response header bits other than the address and data are not needed.
module process_core
  import pifs_pkg::*;
#(
  parameter int unsigned IIR_DEPTH  = 32,
  parameter int unsigned CAPACITY   = NUM_SUMTAGS,
  parameter int unsigned SWAP_DEPTH = 4,
  parameter logic [ID_W-1:0] SWITCH_ID = 12'hFFE
) (
  input  logic     clk,
  input  logic     rst_n,
  // PIFS instructions from the MemOpcode checker
  input  logic     instr_valid,
  output logic     instr_ready,
  input  m2s_req_t instr,
  // repacked reads towards memory
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output m2s_req_t mem_req,
  // rows returning to the switch
  input  logic     rsp_valid,
  output logic     rsp_ready,
  input  s2m_rsp_t rsp,
  // finished accumulations
  output logic     result_valid,
  input  logic     result_ready,
  output d2h_t     result,
  // DataValid to the host
  output logic     dvalid,
  output logic [TAG_W-1:0] dvalid_tag,
  // functional configuration register
  input  logic     fcr_wr,
  input  logic [7:0] fcr_wdata,
  output logic     buffer_en,
  // status and event counters
  output logic     bp,
  output logic [31:0] bp_cycles,
  output logic [31:0] done_cnt,
  output logic [31:0] iir_full_cycles,
  output logic [31:0] same_tag_cnt,
  output logic [31:0] swap_cnt,
  output logic [31:0] spill_cnt,
  output logic [31:0] stall_cycles,
  output logic [31:0] orphan_cnt
);
  localparam int unsigned CW = $clog2(CAPACITY+1);

  // functional configuration
  logic          spill_en;
  logic [CW-1:0] cap_limit;
  logic [7:0]    fcr_rdata;
  functional_config_register #(.CAPACITY(CAPACITY), .SWAP_DEPTH(SWAP_DEPTH)) u_fcr (
    .clk, .rst_n, .wr_en(fcr_wr), .wr_data(fcr_wdata), .rd_data(fcr_rdata),
    .spill_en, .buffer_en, .cap_limit);

  // decoder
  logic       cfg_valid, cfg_ready, fetch_valid, fetch_ready;
  sumtag_t    cfg_sumtag;
  addr_t      cfg_sum_addr;
  cnt_t       cfg_count;
  iir_entry_t fetch_entry, iir_hit_entry;
  acc_op_t    acc_op;
  logic       iir_full, iir_hit;

  instruction_decoder u_dec (
    .instr_valid, .instr_ready, .instr,
    .cfg_valid, .cfg_ready, .cfg_sumtag, .cfg_sum_addr, .cfg_count,
    .fetch_valid, .fetch_ready, .fetch_entry,
    .rsp_data(rsp.data), .iir_entry(iir_hit_entry), .acc_op);

  // fetch: record and send in the same cycle
  assign mem_req_valid = fetch_valid && !iir_full;
  assign fetch_ready   = mem_req_ready && !iir_full;
  instruction_repacking #(.SWITCH_ID(SWITCH_ID)) u_repack (.in_req(instr), .out_req(mem_req));

  // returning rows
  logic    op_ready;
  wire     op_valid = rsp_valid && iir_hit;
  assign   rsp_ready = iir_hit ? op_ready : 1'b1;
  wire     take = op_valid && op_ready;
  logic [$clog2(IIR_DEPTH+1)-1:0] iir_occ;

  instruction_ingress_registry #(.DEPTH(IIR_DEPTH)) u_iir (
    .clk, .rst_n,
    .wr_en(fetch_valid && fetch_ready), .wr_entry(fetch_entry), .full(iir_full),
    .lookup_addr(rsp.address), .hit(iir_hit), .hit_entry(iir_hit_entry),
    .take, .occupancy(iir_occ));

  // configuration logic and accumulate unit
  sumtag_t q_tag, row_tag;
  logic    q_active, q_final, row_done;
  addr_t   q_addr;
  logic [CW-1:0] capacity_counter;

  accumulate_config_logic #(.CAPACITY(CAPACITY)) u_acl (
    .clk, .rst_n, .cap_limit,
    .cfg_valid, .cfg_ready, .cfg_tag(cfg_sumtag), .cfg_addr(cfg_sum_addr), .cfg_count,
    .q_tag, .q_active, .q_final, .q_addr,
    .row_done, .row_tag,
    .capacity_counter, .bp, .bp_cycles, .done_cnt);

  accumulate_unit #(.SWAP_DEPTH(SWAP_DEPTH)) u_acc (
    .clk, .rst_n, .spill_en,
    .op_valid, .op_ready, .op(acc_op),
    .q_tag, .q_final, .q_addr, .row_done, .row_tag,
    .res_valid(result_valid), .res_ready(result_ready), .res(result),
    .same_tag_cnt, .swap_cnt, .spill_cnt, .stall_cycles);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dvalid          <= 1'b0;
      dvalid_tag      <= '0;
      iir_full_cycles <= '0;
      orphan_cnt      <= '0;
    end else begin
      dvalid <= take;
      if (take) dvalid_tag <= iir_hit_entry.host_tag;
      if (fetch_valid && iir_full) iir_full_cycles <= iir_full_cycles + 1;
      if (rsp_valid && !iir_hit)   orphan_cnt <= orphan_cnt + 1;
    end
  end
endmodule

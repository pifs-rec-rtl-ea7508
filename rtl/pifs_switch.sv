// pifs_switch: a CXL fabric switch with PIFS-Rec near-data processing,
// between one upstream port (the host) and NUM_DSP downstream ports (CXL
// Type 3 memory devices).
//
// Host requests enter the ingress queue. The MemOpcode checker sends
// standard CXL.mem requests straight to the VCS (bypass path) and the PIFS
// instructions to the process core. The process core records each DataFetch
// and issues a repacked read for it; the read first looks into the on-switch
// buffer (SRAM cache of hot rows, HTR replacement): a hit is answered from
// the SRAM, a miss goes through the VCS to the device that memory indexing
// selects. Rows returning for the switch fill the buffer and are accumulated
// by the process core, out of order across SumTags; rows for the host go
// back to it unchanged. A finished sum leaves through the egress queue as a
// D2H write to the host address reserved for it; a DataValid pulse tells the
// host each time one of its rows has been retrieved. The migration controller
// moves pages between devices line by line on command, redirecting each
// migrated line in memory indexing.
//
// Ports are plain valid/ready streams of the structs in pifs_pkg. The fabric
// manager, the PHYs, the devices and the host are outside this module; their
// signals are these ports (the migration command and the FCR write port stand
// for the configuration path through the fabric manager).
//
// Following the paper: the blocks and their connections (ingress queue,
// opcode check, bypass to the VCS, process core, repacking, on-switch buffer
// with address profiler, memory indexing, migration controller, egress
// queue). This design's: queue depths, arbitration, the response routing by
// DPID, the command interfaces.
//
// Timing: the ingress queue is the only register on the bypass path, so a
// standard request can leave for its downstream port the cycle after it
// enters; a repacked read spends two cycles in the buffer lookup; the
// accumulate unit takes one cycle per 16-byte chunk plus one per row.
//
// Lint notes: the queue occupancy outputs (count) are left open on purpose;
// bp, sel_pc, lk_remapped and the VCS request counter are status signals of
// the sub-blocks that this top does not export (their effect is visible in
// the stats counters). The reset is used asynchronously by the flops and
// synchronously only inside the "disable iff" of sub-block assertions.
module pifs_switch
  import pifs_pkg::*;
#(
  parameter int unsigned NUM_DSP       = 4,
  parameter int unsigned BUF_BYTES     = 512 * 1024,
  parameter int unsigned PROF_ENTRIES  = 1024,
  parameter int unsigned IIR_DEPTH     = 32,
  parameter int unsigned CAPACITY      = NUM_SUMTAGS,
  parameter int unsigned SWAP_DEPTH    = 4,
  parameter int unsigned QUEUE_DEPTH   = 4,
  parameter int unsigned REMAP_ENTRIES = 8,
  parameter logic [ID_W-1:0] SWITCH_ID = 12'hFFE,
  parameter logic [ID_W-1:0] MC_ID     = 12'hFFF
) (
  input  logic     clk,
  input  logic     rst_n,
  // upstream port
  input  logic     host_req_valid,
  output logic     host_req_ready,
  input  m2s_req_t host_req,
  output logic     host_rsp_valid,
  input  logic     host_rsp_ready,
  output s2m_rsp_t host_rsp,
  output logic     host_d2h_valid,
  input  logic     host_d2h_ready,
  output d2h_t     host_d2h,
  output logic     host_dvalid,
  output logic [TAG_W-1:0] host_dvalid_tag,
  // downstream ports
  output logic     [NUM_DSP-1:0] dsp_req_valid,
  input  logic     [NUM_DSP-1:0] dsp_req_ready,
  output m2s_req_t [NUM_DSP-1:0] dsp_req,
  input  logic     [NUM_DSP-1:0] dsp_rsp_valid,
  output logic     [NUM_DSP-1:0] dsp_rsp_ready,
  input  s2m_rsp_t [NUM_DSP-1:0] dsp_rsp,
  output logic     [NUM_DSP-1:0] dsp_wr_valid,
  input  logic     [NUM_DSP-1:0] dsp_wr_ready,
  output addr_t                  dsp_wr_addr,
  output logic [511:0]           dsp_wr_data,
  // configuration (fabric-manager side)
  input  logic     fcr_wr,
  input  logic [7:0] fcr_wdata,
  input  logic     mig_valid,
  output logic     mig_ready,
  input  logic [ADDR_W-13:0] mig_src_page,
  input  logic [ADDR_W-13:0] mig_dst_page,
  output logic     mig_busy,
  // monitoring
  output pifs_stats_t stats
);
  localparam int unsigned PW = $clog2(NUM_DSP > 1 ? NUM_DSP : 2);

  // ---------------- ingress queue and MemOpcode checker
  logic     iq_valid, iq_ready;
  m2s_req_t iq_req;
  sync_fifo #(.T(m2s_req_t), .DEPTH(QUEUE_DEPTH)) u_ingress (
    .clk, .rst_n,
    .in_valid(host_req_valid), .in_ready(host_req_ready), .in_data(host_req),
    .out_valid(iq_valid), .out_ready(iq_ready), .out_data(iq_req), .count());

  logic     byp_valid, byp_ready, pc_in_valid, pc_in_ready, sel_pc;
  m2s_req_t chk_req;
  memopcode_checker u_chk (
    .clk, .rst_n,
    .in_valid(iq_valid), .in_ready(iq_ready), .in_req(iq_req),
    .vcs_valid(byp_valid), .vcs_ready(byp_ready),
    .pc_valid(pc_in_valid), .pc_ready(pc_in_ready),
    .out_req(chk_req), .sel_pc,
    .bypass_cnt(stats.bypass), .pifs_cnt(stats.pifs));

  // ---------------- process core
  logic     pc_mem_valid, pc_mem_ready, pc_rsp_valid, pc_rsp_ready;
  m2s_req_t pc_mem_req;
  s2m_rsp_t pc_rsp;
  logic     res_valid, res_ready, buffer_en, bp;
  d2h_t     res;

  process_core #(.IIR_DEPTH(IIR_DEPTH), .CAPACITY(CAPACITY), .SWAP_DEPTH(SWAP_DEPTH),
                 .SWITCH_ID(SWITCH_ID)) u_pc (
    .clk, .rst_n,
    .instr_valid(pc_in_valid), .instr_ready(pc_in_ready), .instr(chk_req),
    .mem_req_valid(pc_mem_valid), .mem_req_ready(pc_mem_ready), .mem_req(pc_mem_req),
    .rsp_valid(pc_rsp_valid), .rsp_ready(pc_rsp_ready), .rsp(pc_rsp),
    .result_valid(res_valid), .result_ready(res_ready), .result(res),
    .dvalid(host_dvalid), .dvalid_tag(host_dvalid_tag),
    .fcr_wr, .fcr_wdata, .buffer_en,
    .bp, .bp_cycles(stats.bp_cycles), .done_cnt(stats.done),
    .iir_full_cycles(stats.iir_full), .same_tag_cnt(stats.same_tag),
    .swap_cnt(stats.swaps), .spill_cnt(stats.spills), .stall_cycles(stats.acc_stall),
    .orphan_cnt(stats.orphan));

  // ---------------- egress queue
  sync_fifo #(.T(d2h_t), .DEPTH(QUEUE_DEPTH)) u_egress (
    .clk, .rst_n,
    .in_valid(res_valid), .in_ready(res_ready), .in_data(res),
    .out_valid(host_d2h_valid), .out_ready(host_d2h_ready), .out_data(host_d2h), .count());

  // ---------------- on-switch buffer
  logic     miss_valid, miss_ready, hit_valid, hit_ready;
  m2s_req_t miss_req;
  s2m_rsp_t hit_rsp;
  logic     sw_rsp_valid, sw_rsp_ready;
  s2m_rsp_t sw_rsp;
  wire      sw_is_mig = (sw_rsp.dpid == MC_ID);

  on_switch_buffer #(.BYTES(BUF_BYTES), .PROF_ENTRIES(PROF_ENTRIES), .SWITCH_ID(SWITCH_ID)) u_buf (
    .clk, .rst_n, .buffer_en,
    .req_valid(pc_mem_valid), .req_ready(pc_mem_ready), .req(pc_mem_req),
    .miss_valid, .miss_ready, .miss_req,
    .hit_valid, .hit_ready, .hit_rsp,
    .fill_valid(sw_rsp_valid && sw_rsp_ready && !sw_is_mig),
    .fill_addr(sw_rsp.address), .fill_data(sw_rsp.data),
    .hit_cnt(stats.buf_hit), .miss_cnt(stats.buf_miss),
    .fill_cnt(stats.buf_fill), .reject_cnt(stats.buf_reject));

  // ---------------- migration controller
  logic     mc_rd_valid, mc_rd_ready, mc_rsp_ready, mc_wr_valid;
  m2s_req_t mc_rd_req;
  addr_t    mc_wr_addr, lock_addr;
  logic     lock_valid, rm_wr;
  logic [$clog2(REMAP_ENTRIES)-1:0] rm_idx;
  logic [ADDR_W-13:0] rm_src_page, rm_dst_page;
  logic [6:0] rm_lines_done;
  logic [PW-1:0] wr_port;

  migration_controller #(.REMAP_ENTRIES(REMAP_ENTRIES), .MC_ID(MC_ID)) u_mc (
    .clk, .rst_n,
    .cmd_valid(mig_valid), .cmd_ready(mig_ready),
    .cmd_src_page(mig_src_page), .cmd_dst_page(mig_dst_page),
    .rd_valid(mc_rd_valid), .rd_ready(mc_rd_ready), .rd_req(mc_rd_req),
    .rsp_valid(sw_rsp_valid && sw_is_mig), .rsp_ready(mc_rsp_ready), .rsp(sw_rsp),
    .wr_valid(mc_wr_valid), .wr_ready(dsp_wr_ready[wr_port]),
    .wr_addr(mc_wr_addr), .wr_data(dsp_wr_data),
    .lock_valid, .lock_addr,
    .rm_wr, .rm_idx, .rm_src_page, .rm_dst_page, .rm_lines_done,
    .busy(mig_busy), .lines_moved(stats.mig_lines), .pages_moved(stats.mig_pages));

  assign dsp_wr_addr = mc_wr_addr;
  always_comb begin
    dsp_wr_valid = '0;
    dsp_wr_valid[wr_port] = mc_wr_valid;
  end

  // ---------------- memory indexing and VCS
  addr_t         lk_addr, lk_addr_out;
  logic [PW-1:0] lk_port;
  logic          lk_remapped, lk_blocked;

  memory_indexing #(.NUM_DSP(NUM_DSP), .REMAP_ENTRIES(REMAP_ENTRIES)) u_idx (
    .clk, .rst_n,
    .lk_addr, .lk_addr_out, .lk_port, .lk_remapped, .lk_blocked,
    .wr_addr(mc_wr_addr), .wr_port,
    .lock_valid, .lock_addr,
    .rm_wr, .rm_idx, .rm_src_page, .rm_dst_page, .rm_lines_done);

  logic     [2:0] src_valid, src_ready;
  m2s_req_t [2:0] src_req;
  assign src_valid = {mc_rd_valid, miss_valid, byp_valid};
  assign src_req   = {mc_rd_req, miss_req, chk_req};
  assign byp_ready   = src_ready[0];
  assign miss_ready  = src_ready[1];
  assign mc_rd_ready = src_ready[2];

  logic [31:0] vcs_req_cnt;
  vcs #(.NUM_DSP(NUM_DSP), .NUM_SRC(3), .SWITCH_ID(SWITCH_ID), .MC_ID(MC_ID)) u_vcs (
    .clk, .rst_n,
    .src_valid, .src_ready, .src_req,
    .lk_addr, .lk_addr_out, .lk_port, .lk_blocked,
    .dsp_req_valid, .dsp_req_ready, .dsp_req,
    .dsp_rsp_valid, .dsp_rsp_ready, .dsp_rsp,
    .host_rsp_valid, .host_rsp_ready, .host_rsp,
    .sw_rsp_valid, .sw_rsp_ready, .sw_rsp,
    .req_cnt(vcs_req_cnt));

  // ---------------- rows into the process core: buffer hits and device data
  logic [1:0] r_gnt;
  logic       r_idx;
  rr_arbiter #(.N(2)) u_rsp_arb (
    .clk, .rst_n, .req({sw_rsp_valid && !sw_is_mig, hit_valid}),
    .advance(pc_rsp_ready), .gnt(r_gnt), .gnt_idx(r_idx));

  assign pc_rsp_valid = hit_valid || (sw_rsp_valid && !sw_is_mig);
  assign pc_rsp       = r_idx ? sw_rsp : hit_rsp;
  assign hit_ready    = r_gnt[0] && pc_rsp_ready;
  assign sw_rsp_ready = sw_is_mig ? mc_rsp_ready : (r_gnt[1] && pc_rsp_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stats.lock_stall <= '0;
    else if ((src_valid != '0) && lk_blocked) stats.lock_stall <= stats.lock_stall + 1;
  end
endmodule

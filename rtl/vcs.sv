// vcs: the virtual CXL switch datapath between the switch's internal
// request sources and its downstream ports (DSPs).
//
// Requests: NUM_SRC M2S streams (host requests that bypassed the process
// core, reads issued by the process core that missed the on-switch buffer,
// reads of the migration controller) are arbitrated round-robin. The winner's
// address goes through memory indexing (lk_addr out, lk_addr_out/lk_port in),
// which may rewrite it for a migrated line, and the request is sent to that
// downstream port; it waits there until the port is ready, and while its
// cache line is locked by a migration in flight (lk_blocked).
// A request held by a lock is passed over, so the arbiter serves the other
// sources (among them the migration controller, whose reads carry MC_ID as
// SPID and are not held) until the line is free.
// Responses: each DSP's S2M data response is routed by its DPID. Responses
// for the switch itself (DPID = SWITCH_ID for the process core, MC_ID for the
// migration controller) go to the switch port; the rest go to the host.
// Each of the two outputs has a round-robin arbiter over the DSPs.
// Paper: standard requests pass through the VCS unchanged, returning data for
// repacked requests stays in the switch. This design's: the arbitration, and
// routing responses by DPID.
//
// Timing: request and response paths are combinational from source to
// port (no extra register stage); arbiter pointers move at the rising edge
// after a transfer.
module vcs
  import pifs_pkg::*;
#(
  parameter int unsigned NUM_DSP = 4,
  parameter int unsigned NUM_SRC = 3,
  parameter logic [ID_W-1:0] SWITCH_ID = 12'hFFE,
  parameter logic [ID_W-1:0] MC_ID     = 12'hFFF
) (
  input  logic     clk,
  input  logic     rst_n,
  // request sources
  input  logic     [NUM_SRC-1:0] src_valid,
  output logic     [NUM_SRC-1:0] src_ready,
  input  m2s_req_t [NUM_SRC-1:0] src_req,
  // memory indexing
  output addr_t    lk_addr,
  input  addr_t    lk_addr_out,
  input  logic [$clog2(NUM_DSP > 1 ? NUM_DSP : 2)-1:0] lk_port,
  input  logic     lk_blocked,
  // downstream ports
  output logic     [NUM_DSP-1:0] dsp_req_valid,
  input  logic     [NUM_DSP-1:0] dsp_req_ready,
  output m2s_req_t [NUM_DSP-1:0] dsp_req,
  input  logic     [NUM_DSP-1:0] dsp_rsp_valid,
  output logic     [NUM_DSP-1:0] dsp_rsp_ready,
  input  s2m_rsp_t [NUM_DSP-1:0] dsp_rsp,
  // responses
  output logic     host_rsp_valid,
  input  logic     host_rsp_ready,
  output s2m_rsp_t host_rsp,
  output logic     sw_rsp_valid,
  input  logic     sw_rsp_ready,
  output s2m_rsp_t sw_rsp,
  output logic [31:0] req_cnt
);
  localparam int unsigned SW = $clog2(NUM_SRC > 1 ? NUM_SRC : 2);
  localparam int unsigned DW = $clog2(NUM_DSP > 1 ? NUM_DSP : 2);

  // request arbitration and routing
  logic [NUM_SRC-1:0] s_gnt;
  logic [SW-1:0]      s_idx;
  m2s_req_t           win;
  logic               win_ready;

  assign win       = src_req[s_idx];
  assign lk_addr   = win.address;
  // the migration controller's own reads pass its lock
  wire   blocked   = lk_blocked && (win.spid != MC_ID);
  assign win_ready = dsp_req_ready[lk_port] && !blocked;

  rr_arbiter #(.N(NUM_SRC)) u_src_arb (
    .clk, .rst_n, .req(src_valid), .advance(win_ready || blocked), .gnt(s_gnt), .gnt_idx(s_idx));

  always_comb begin
    src_ready = s_gnt & {NUM_SRC{win_ready}};
    for (int p = 0; p < NUM_DSP; p++) begin
      dsp_req_valid[p] = (src_valid != '0) && !blocked && (int'(lk_port) == p);
      dsp_req[p]       = win;
      dsp_req[p].address = lk_addr_out;
    end
  end

  // response routing
  logic [NUM_DSP-1:0] to_sw, to_host, h_gnt, w_gnt;
  logic [DW-1:0]      h_idx, w_idx;
  always_comb begin
    for (int p = 0; p < NUM_DSP; p++) begin
      to_sw[p]   = dsp_rsp_valid[p] && (dsp_rsp[p].dpid == SWITCH_ID || dsp_rsp[p].dpid == MC_ID);
      to_host[p] = dsp_rsp_valid[p] && !(dsp_rsp[p].dpid == SWITCH_ID || dsp_rsp[p].dpid == MC_ID);
    end
  end

  rr_arbiter #(.N(NUM_DSP)) u_host_arb (
    .clk, .rst_n, .req(to_host), .advance(host_rsp_ready), .gnt(h_gnt), .gnt_idx(h_idx));
  rr_arbiter #(.N(NUM_DSP)) u_sw_arb (
    .clk, .rst_n, .req(to_sw), .advance(sw_rsp_ready), .gnt(w_gnt), .gnt_idx(w_idx));

  assign host_rsp_valid = (to_host != '0);
  assign host_rsp       = dsp_rsp[h_idx];
  assign sw_rsp_valid   = (to_sw != '0);
  assign sw_rsp         = dsp_rsp[w_idx];
  assign dsp_rsp_ready  = (h_gnt & {NUM_DSP{host_rsp_ready}}) | (w_gnt & {NUM_DSP{sw_rsp_ready}});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_cnt <= '0;
    else if ((src_valid != '0) && win_ready) req_cnt <= req_cnt + 1;
  end
endmodule

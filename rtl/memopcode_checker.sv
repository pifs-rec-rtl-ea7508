// memopcode_checker: first decision point for a host request entering the
// switch.
//
// It examines the MemOpcode field of the M2S request at the head of the
// ingress queue. A standard CXL.mem opcode bypasses the process core and goes
// straight to the VCS (path 0 of the ingress multiplexer); the two PIFS
// opcodes, DataFetch (1110b) and Configuration (1111b), go to the process
// core (path 1). Combinational, valid/ready on all three sides; the request
// is offered to exactly one side and the upstream ready comes from that side.
// Following the paper: the opcode test and the two destinations. This
// design's choice: the handshake, and counting the two classes (bypass_cnt,
// pifs_cnt) for observability.
module memopcode_checker
  import pifs_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  m2s_req_t in_req,
  output logic     vcs_valid,
  input  logic     vcs_ready,
  output logic     pc_valid,
  input  logic     pc_ready,
  output m2s_req_t out_req,
  output logic     sel_pc,       // S0 of the ingress multiplexer
  output logic [31:0] bypass_cnt,
  output logic [31:0] pifs_cnt
);
  always_comb begin
    sel_pc    = is_pifs_op(in_req.memopcode);
    out_req   = in_req;
    vcs_valid = in_valid && !sel_pc;
    pc_valid  = in_valid &&  sel_pc;
    in_ready  = sel_pc ? pc_ready : vcs_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bypass_cnt <= '0;
      pifs_cnt   <= '0;
    end else begin
      if (vcs_valid && vcs_ready) bypass_cnt <= bypass_cnt + 1;
      if (pc_valid  && pc_ready)  pifs_cnt   <= pifs_cnt + 1;
    end
  end
endmodule

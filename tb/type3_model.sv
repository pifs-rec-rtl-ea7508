// type3_model: behavioural model of a CXL Type 3 memory device behind one
// downstream port of the switch, for simulation only.
//
// It accepts standard M2S reads (MemRd) and answers each with an S2M data
// response carrying the row at the request address (eight 16-byte chunks),
// addressed back to the requester (DPID = the request's SPID) with the
// request's Tag. Responses leave in request order after a random latency of
// LAT_MIN..LAT_MAX cycles, so rows from different devices return out of
// order. Memory content is mem_word(address) unless a 64-byte line was
// written over the write channel, in which case the written data are
// returned. Requests with any other opcode are counted in bad_ops.
//
// Interface and timing: one valid/ready request stream, one valid/ready
// response stream and a write channel, all on the rising clock edge; each
// read is answered LAT_MIN..LAT_MAX cycles after it is accepted, in order.
// The paper only says the devices are DDR-based CXL Type 3 memory; the
// latency model and content rule are this testbench's own.
module type3_model
  import pifs_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter int LAT_MIN = 10,
  parameter int LAT_MAX = 40
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  m2s_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output s2m_rsp_t rsp,
  input  logic     wr_valid,
  output logic     wr_ready,
  input  addr_t    wr_addr,
  input  logic [511:0] wr_data,
  output int       reads,
  output int       writes,
  output int       bad_ops
);
  typedef struct {
    longint   due;
    s2m_rsp_t r;
  } pend_t;
  pend_t pend[$];
  logic [511:0] lines [addr_t];
  longint cyc = 0;

  assign req_ready = (pend.size() < 16);
  assign wr_ready  = 1'b1;
  assign rsp_valid = (pend.size() > 0) && (pend[0].due <= cyc);
  assign rsp       = (pend.size() > 0) ? pend[0].r : '0;

  function automatic row_t read_row(addr_t a);
    row_t   d;
    addr_t  la;
    for (int c = 0; c < MAX_CHUNKS; c++)
      for (int l = 0; l < LANES; l++) begin
        addr_t wa = a + addr_t'(c * 16 + l * 4);
        la = {wa[ADDR_W-1:6], 6'd0};
        if (lines.exists(la)) d[c][32*l +: 32] = lines[la][32 * int'(wa[5:2]) +: 32];
        else                  d[c][32*l +: 32] = mem_word(wa);
      end
    return d;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      reads   <= 0;
      writes  <= 0;
      bad_ops <= 0;
    end else begin
      if (rsp_valid && rsp_ready) void'(pend.pop_front());
      if (req_valid && req_ready) begin
        if (req.memopcode == MEMOP_MEMRD) begin
          pend_t p;
          longint last_due;
          last_due  = (pend.size() > 0) ? pend[pend.size()-1].due : 0;
          p.due     = cyc + longint'(LAT_MIN + int'($urandom % (LAT_MAX - LAT_MIN + 1)));
          if (p.due < last_due) p.due = last_due;
          p.r.tag     = req.tag;
          p.r.dpid    = req.spid;
          p.r.address = req.address;
          p.r.data    = read_row(req.address);
          pend.push_back(p);
          reads <= reads + 1;
        end else begin
          bad_ops <= bad_ops + 1;
        end
      end
      if (wr_valid) begin
        lines[{wr_addr[ADDR_W-1:6], 6'd0}] = wr_data;
        writes <= writes + 1;
      end
    end
  end
endmodule

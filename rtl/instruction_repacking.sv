// instruction_repacking: turns a host DataFetch into a request a standard
// Type 3 device serves.
//
// Two fields change, as the paper describes: MemOpcode becomes a standard
// read (MemRd, 0001b) and SPID, the requester ID, becomes the switch's own
// ID, so that the device returns the data to the switch instead of the host.
// All other header fields (Tag, Address, DPID, ...) are kept. The PIFS
// extension fields and the data slot are cleared: the switch-issued request
// in the instruction format figure has no extension, and a device does not
// use them. Combinational, no state. The MemRd encoding and the clearing of
// the extension are this design's choices.
module instruction_repacking
  import pifs_pkg::*;
#(
  parameter logic [ID_W-1:0] SWITCH_ID = 12'hFFE
) (
  input  m2s_req_t        in_req,
  output m2s_req_t        out_req
);
  always_comb begin
    out_req           = in_req;
    out_req.memopcode = MEMOP_MEMRD;
    out_req.spid      = SWITCH_ID;
    out_req.sumtag    = '0;
    out_req.payload   = '0;
    out_req.slot      = '0;
  end
endmodule

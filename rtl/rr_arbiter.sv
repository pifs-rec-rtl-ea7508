// rr_arbiter: round-robin arbiter used wherever several row or request
// streams share one consumer (downstream-port responses into the process
// core, responses towards the host, requests into the VCS).
//
// req[i] asks for the grant; gnt is one-hot and combinational from req and
// the pointer. The pointer moves past the granted requester only when the
// grant is consumed (advance), so a stalled winner keeps its grant. The
// arbitration policy is this design's; the paper does not give one.
//
// Lint notes: the loop index is an int of which only the low bits are used.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (req[idx]) begin
        gnt     = '0;
        gnt[idx] = 1'b1;
        gnt_idx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && (req != '0))
      ptr <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end
endmodule

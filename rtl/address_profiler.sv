// address_profiler: logs how often row addresses are accessed so that the
// on-switch buffer can keep the hottest rows (Hottest Recording, HTR).
//
// A direct-mapped table of ENTRIES counters, each with the full row address
// it counts. An access (acc_valid, acc_addr) to the address a slot holds
// increments its counter (saturating). An access to another address mapping
// to the same slot decrements the incumbent's counter; when that counter is
// zero the slot is taken over by the new address with count 1. Frequently
// accessed rows therefore keep high counts while rarely seen ones lose their
// slot. The query port returns the count of q_addr, zero if not tracked.
// Slot index: row address bits above the 16-byte granule, xor-folded.
// The paper gives the profiler's job (log and rank row accesses by
// frequency); the table organisation, the decay rule and the sizes are this
// design's.
//
// Timing: q_count is combinational from the table; an access updates its
// slot at the next rising edge.
//
// Lint notes: the slot hash uses only the address bits it folds; the others are unused by design.
module address_profiler
  import pifs_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024,
  parameter int unsigned CNT_BITS = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic acc_valid,
  input  addr_t acc_addr,
  input  addr_t q_addr,
  output logic [CNT_BITS-1:0] q_count
);
  localparam int unsigned IW = $clog2(ENTRIES);

  addr_t               tag [ENTRIES];
  logic [CNT_BITS-1:0] cnt [ENTRIES];

  function automatic logic [IW-1:0] slot(addr_t a);
    return a[4 +: IW] ^ a[4 + IW +: IW];
  endfunction

  wire [IW-1:0] ai = slot(acc_addr);
  wire [IW-1:0] qi = slot(q_addr);

  assign q_count = (tag[qi] == q_addr) ? cnt[qi] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        cnt[i] <= '0;
        tag[i] <= '0;
      end
    end else if (acc_valid) begin
      if (tag[ai] == acc_addr) begin
        if (cnt[ai] != '1) cnt[ai] <= cnt[ai] + 1'b1;
      end else if (cnt[ai] == '0) begin
        tag[ai] <= acc_addr;
        cnt[ai] <= CNT_BITS'(1);
      end else begin
        cnt[ai] <= cnt[ai] - 1'b1;
      end
    end
  end
endmodule

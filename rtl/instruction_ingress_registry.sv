// instruction_ingress_registry (IIR): remembers every DataFetch the process
// core has sent towards memory until its row comes back.
//
// DEPTH entries, each holding an iir_entry_t (row address, SumTag, chunk
// count, FP32 weight, host Tag) and a valid bit. A write stores the entry in
// the lowest free slot. When row data arrives, lookup_addr is compared with
// every valid entry's address in parallel (content-addressed, as the paper
// says the instruction is retrieved by comparing the address field); the
// lowest matching slot is reported combinationally on hit/hit_entry, and
// take removes it at the clock edge. Several outstanding fetches of the same
// address are allowed: each returning copy of the row consumes one of them,
// which is correct because the data are identical. full is asserted when no
// slot is free. A write and a take may happen in the same cycle. The depth
// and lowest-slot policies are this design's; the paper gives no size.
//
// Lint notes: the reset also appears synchronously, only in the assertion's disable iff.
module instruction_ingress_registry
  import pifs_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  iir_entry_t wr_entry,
  output logic       full,
  input  addr_t      lookup_addr,
  output logic       hit,
  output iir_entry_t hit_entry,
  input  logic       take,
  output logic [$clog2(DEPTH+1)-1:0] occupancy
);
  localparam int unsigned IW = $clog2(DEPTH);

  iir_entry_t       ent   [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [IW-1:0]    free_idx, hit_idx;
  logic             any_free;

  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    hit      = 1'b0;
    hit_idx  = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        any_free = 1'b1;
        free_idx = IW'(i);
      end
      if (valid[i] && ent[i].address == lookup_addr) begin
        hit     = 1'b1;
        hit_idx = IW'(i);
      end
    end
    hit_entry = ent[hit_idx];
    full      = !any_free;
    occupancy = '0;
    for (int i = 0; i < DEPTH; i++) occupancy += valid[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else begin
      if (take && hit)        valid[hit_idx]  <= 1'b0;
      if (wr_en && any_free)  valid[free_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && any_free) ent[free_idx] <= wr_entry;
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
endmodule

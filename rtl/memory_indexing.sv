// memory_indexing: decides which downstream port (Type 3 device) serves a
// physical address, and where a line of a page being migrated currently is.
//
// Base mapping: 4 KB pages are interleaved over the NUM_DSP downstream ports,
// port = page number mod NUM_DSP, the interleave policy the host uses to
// spread cold pages over the CXL devices. On top of it, REMAP_ENTRIES remap
// entries record pages that are being, or have been, moved by the migration
// controller: entry {src page, dst page, lines_done}. Lines of the source page
// below lines_done have already been copied and are redirected to the same
// line of the destination page (address rewritten, port of the destination);
// the others are still served from the source. A finished migration keeps its
// entry (lines_done = 64) until the entry is overwritten. The one line in
// flight is locked: lk_blocked tells the VCS to hold requests to it. Lookup
// is combinational. Paper: memory indexing directs requests to the devices and,
// after a migration, to the data's new location, at cache-line granularity
// during migration. This design's: the interleave function and the remap
// table.
//
// Lint notes: the lock compares 64-byte lines, so the low six lock-address bits are unused; the port function only reads page-number bits.
module memory_indexing
  import pifs_pkg::*;
#(
  parameter int unsigned NUM_DSP       = 4,
  parameter int unsigned REMAP_ENTRIES = 8
) (
  input  logic clk,
  input  logic rst_n,
  // lookup
  input  addr_t lk_addr,
  output addr_t lk_addr_out,
  output logic [$clog2(NUM_DSP > 1 ? NUM_DSP : 2)-1:0] lk_port,
  output logic  lk_remapped,
  output logic  lk_blocked,
  // second lookup without remapping (destination of a migration write)
  input  addr_t wr_addr,
  output logic [$clog2(NUM_DSP > 1 ? NUM_DSP : 2)-1:0] wr_port,
  // the cache line the migration controller is moving right now
  input  logic  lock_valid,
  input  addr_t lock_addr,
  // remap table update (from the migration controller)
  input  logic  rm_wr,
  input  logic [$clog2(REMAP_ENTRIES)-1:0] rm_idx,
  input  logic [ADDR_W-13:0] rm_src_page,
  input  logic [ADDR_W-13:0] rm_dst_page,
  input  logic [6:0]         rm_lines_done
);
  localparam int unsigned PW = $clog2(NUM_DSP > 1 ? NUM_DSP : 2);
  typedef logic [ADDR_W-13:0] page_t;

  logic [REMAP_ENTRIES-1:0] rm_valid;
  page_t      rm_src  [REMAP_ENTRIES];
  page_t      rm_dst  [REMAP_ENTRIES];
  logic [6:0] rm_done [REMAP_ENTRIES];

  function automatic logic [PW-1:0] port_of(addr_t a);
    return PW'(a[ADDR_W-1:12] % NUM_DSP);
  endfunction

  always_comb begin
    lk_addr_out = lk_addr;
    lk_remapped = 1'b0;
    for (int i = 0; i < REMAP_ENTRIES; i++) begin
      if (rm_valid[i] && rm_src[i] == lk_addr[ADDR_W-1:12] &&
          {1'b0, lk_addr[11:6]} < rm_done[i]) begin
        lk_addr_out = {rm_dst[i], lk_addr[11:0]};
        lk_remapped = 1'b1;
      end
    end
    lk_port    = port_of(lk_addr_out);
    wr_port    = port_of(wr_addr);
    lk_blocked = lock_valid && (lk_addr[ADDR_W-1:6] == lock_addr[ADDR_W-1:6]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rm_valid <= '0;
      for (int i = 0; i < REMAP_ENTRIES; i++) begin
        rm_src[i]  <= '0;
        rm_dst[i]  <= '0;
        rm_done[i] <= '0;
      end
    end else if (rm_wr) begin
      rm_valid[rm_idx] <= 1'b1;
      rm_src[rm_idx]   <= rm_src_page;
      rm_dst[rm_idx]   <= rm_dst_page;
      rm_done[rm_idx]  <= rm_lines_done;
    end
  end
endmodule

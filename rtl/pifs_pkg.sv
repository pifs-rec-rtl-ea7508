// pifs_pkg: types and constants shared by the PIFS-Rec fabric-switch RTL.
//
// The M2S request header follows the enhanced CXL.mem request format: V (1),
// MemOpcode (4), ST/MF/MV (7), Tag (16), Address (46), an unused nibble (4),
// SPID (12), DPID (12) and Others (8). Two added fields follow: SumTag (6)
// and a 9-bit payload that is VectorSize (3, in the low bits) in a DataFetch
// and SumCandidateCount (9) in a Configuration. A 16-byte data slot travels
// with the header; a DataFetch carries its FP32 weight in slot bits [31:0].
// Field widths and the two PIFS opcodes (1110b DataFetch, 1111b
// Configuration) follow the paper; the 46-bit address choice (out of 46/47),
// the 8-bit Others choice (out of 8/22), the MemRd encoding of a standard
// read, and the placement of the weight in the slot are this design's.
//
// Rows are handled whole: a row is 1 to 8 chunks of 16 bytes (four FP32
// values), chunk count = VectorSize + 1.
//
// Lint notes: ROW_W, NUM_SUMTAGS and some opcodes are defined for completeness
// of the instruction format and are not read by every block.
package pifs_pkg;

  localparam int unsigned ADDR_W     = 46;
  localparam int unsigned SUMTAG_W   = 6;
  localparam int unsigned CNT_W      = 9;
  localparam int unsigned VSIZE_W    = 3;
  localparam int unsigned TAG_W      = 16;
  localparam int unsigned ID_W       = 12;
  localparam int unsigned LANES      = 4;               // FP32 values per 16-byte chunk
  localparam int unsigned CHUNK_W    = 32 * LANES;      // 128 bits
  localparam int unsigned MAX_CHUNKS = 8;               // 3-bit VectorSize
  localparam int unsigned ROW_W      = CHUNK_W * MAX_CHUNKS;
  localparam int unsigned NUM_SUMTAGS = 1 << SUMTAG_W;  // 64

  typedef logic [3:0] memop_t;
  localparam memop_t MEMOP_MEMINV    = 4'b0000;
  localparam memop_t MEMOP_MEMRD     = 4'b0001;
  localparam memop_t MEMOP_DATAFETCH = 4'b1110;
  localparam memop_t MEMOP_CONFIG    = 4'b1111;

  typedef logic [ADDR_W-1:0]   addr_t;
  typedef logic [SUMTAG_W-1:0] sumtag_t;
  typedef logic [CNT_W-1:0]    cnt_t;
  typedef logic [CHUNK_W-1:0]  chunk_t;
  typedef chunk_t [MAX_CHUNKS-1:0] row_t;
  typedef logic [$clog2(MAX_CHUNKS+1)-1:0] nchunk_t;   // 1..8

  // M2S request as it crosses the switch (header fields in the order of the
  // instruction format, followed by the PIFS extension and the data slot).
  typedef struct packed {
    logic             v;
    memop_t           memopcode;
    logic [6:0]       st_mf_mv;
    logic [TAG_W-1:0] tag;
    addr_t            address;
    logic [3:0]       na;
    logic [ID_W-1:0]  spid;
    logic [ID_W-1:0]  dpid;
    logic [7:0]       others;
    sumtag_t          sumtag;
    logic [CNT_W-1:0] payload;   // VectorSize in [2:0] or SumCandidateCount
    chunk_t           slot;      // data slot, weight in [31:0]
  } m2s_req_t;

  // S2M data response from a Type 3 device: the whole row in one transfer.
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [ID_W-1:0]  dpid;      // requester the data returns to
    addr_t            address;
    row_t             data;
  } s2m_rsp_t;

  // D2H write of an accumulated row to the host's reserved address.
  typedef struct packed {
    addr_t   address;
    sumtag_t sumtag;
    nchunk_t nchunks;
    row_t    data;
  } d2h_t;

  // Outstanding DataFetch held in the Instruction Ingress Registry.
  typedef struct packed {
    addr_t            address;
    sumtag_t          sumtag;
    nchunk_t          nchunks;
    logic [31:0]      weight;
    logic [TAG_W-1:0] host_tag;
  } iir_entry_t;

  // One row to accumulate.
  typedef struct packed {
    sumtag_t          sumtag;
    nchunk_t          nchunks;
    logic [31:0]      weight;
    logic [TAG_W-1:0] host_tag;
    row_t             data;
  } acc_op_t;

  // Event counters the switch exports for monitoring.
  typedef struct packed {
    logic [31:0] bypass;        // standard requests that bypassed the process core
    logic [31:0] pifs;          // PIFS instructions taken by the process core
    logic [31:0] bp_cycles;     // cycles a Configuration waited on back-pressure
    logic [31:0] iir_full;      // cycles a DataFetch waited on a full IIR
    logic [31:0] done;          // finished accumulations
    logic [31:0] same_tag;      // rows added to the SumTag already in the accumulation register
    logic [31:0] swaps;         // partial sums exchanged with the swap register
    logic [31:0] spills;        // partial-sum accesses to the SRAM spill region
    logic [31:0] acc_stall;     // cycles the accumulate unit stalled on the SRAM
    logic [31:0] buf_hit;       // on-switch buffer hits
    logic [31:0] buf_miss;      // on-switch buffer misses
    logic [31:0] buf_fill;      // rows written into the buffer
    logic [31:0] buf_reject;    // fills refused by HTR
    logic [31:0] mig_lines;     // cache lines migrated
    logic [31:0] mig_pages;     // pages migrated
    logic [31:0] lock_stall;    // cycles a request waited on a locked line
    logic [31:0] orphan;        // rows that matched no IIR entry
  } pifs_stats_t;

  function automatic logic is_pifs_op(memop_t op);
    return (op == MEMOP_DATAFETCH) || (op == MEMOP_CONFIG);
  endfunction

  function automatic nchunk_t vsize_to_chunks(logic [VSIZE_W-1:0] vs);
    return nchunk_t'(vs) + nchunk_t'(1);
  endfunction

endpackage

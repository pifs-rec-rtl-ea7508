// on_switch_buffer: SRAM row cache inside the fabric switch with Hottest
// Recording (HTR) replacement.
//
// Every memory read the process core issues passes through the buffer. The
// request is looked up in a direct-mapped array of LINES lines, one row (up to
// 128 bytes) per line, LINES = BYTES / 128. On a hit the row is returned to
// the process core as if a device had answered (hit port) and no device is
// accessed; on a miss the request continues to the VCS (miss port). Lookups
// take two cycles (request register, then registered array read), matching
// the paper's statement that an SRAM access needs at least two cycles, and
// the pipeline stalls when its output is not taken.
//
// Rows coming back from the devices for the switch are offered for filling
// (fill port). HTR decides: an empty line is always filled; an occupied line
// is replaced only if the address profiler counts the new row as accessed more
// often than the resident row (whose count is refreshed on every hit). Every
// lookup is an access for the profiler. With buffer_en low every lookup
// misses and nothing is filled.
//
// Paper: the SRAM buffer of hot rows, its management in the switch, HTR by
// access frequency, 512 KB in the evaluated configuration. This design's:
// direct mapping, one row per line, the comparison rule, the index hash.
//
// Lint notes: the line index hash uses only the address bits it folds.
module on_switch_buffer
  import pifs_pkg::*;
#(
  parameter int unsigned BYTES         = 512 * 1024,
  parameter int unsigned PROF_ENTRIES  = 1024,
  parameter logic [ID_W-1:0] SWITCH_ID = 12'hFFE
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     buffer_en,
  // lookups
  input  logic     req_valid,
  output logic     req_ready,
  input  m2s_req_t req,
  output logic     miss_valid,
  input  logic     miss_ready,
  output m2s_req_t miss_req,
  output logic     hit_valid,
  input  logic     hit_ready,
  output s2m_rsp_t hit_rsp,
  // fills
  input  logic     fill_valid,
  input  addr_t    fill_addr,
  input  row_t     fill_data,
  // event counters
  output logic [31:0] hit_cnt,
  output logic [31:0] miss_cnt,
  output logic [31:0] fill_cnt,
  output logic [31:0] reject_cnt
);
  localparam int unsigned LINES = BYTES / (CHUNK_W * MAX_CHUNKS / 8);
  localparam int unsigned LW    = $clog2(LINES);
  localparam int unsigned PCB   = 8;

  logic [LINES-1:0] line_valid;
  addr_t            line_tag [LINES];
  logic [PCB-1:0]   line_cnt [LINES];
  row_t             line_data[LINES];

  function automatic logic [LW-1:0] line_of(addr_t a);
    return a[4 +: LW] ^ a[4 + LW +: LW];
  endfunction

  // stage 1: request register; stage 2: array read result
  logic     s1_v, s2_v, s2_hit;
  m2s_req_t s1_req, s2_req;
  row_t     s2_data;

  wire s2_take = s2_hit ? hit_ready : miss_ready;
  wire s2_free = !s2_v || s2_take;
  wire s1_adv  = s1_v && s2_free;
  assign req_ready = !s1_v || s1_adv;

  wire [LW-1:0] s1_li  = line_of(s1_req.address);
  wire          s1_hit = buffer_en && line_valid[s1_li] && (line_tag[s1_li] == s1_req.address);

  assign miss_valid = s2_v && !s2_hit;
  assign miss_req   = s2_req;
  assign hit_valid  = s2_v && s2_hit;
  always_comb begin
    hit_rsp         = '0;
    hit_rsp.tag     = s2_req.tag;
    hit_rsp.dpid    = SWITCH_ID;
    hit_rsp.address = s2_req.address;
    hit_rsp.data    = s2_data;
  end

  // HTR fill decision
  logic [PCB-1:0] fill_prof;
  wire  [LW-1:0]  fli = line_of(fill_addr);
  wire  fill_present  = line_valid[fli] && (line_tag[fli] == fill_addr);
  wire  fill_take     = buffer_en && fill_valid && !fill_present &&
                        (!line_valid[fli] || (fill_prof > line_cnt[fli]));

  address_profiler #(.ENTRIES(PROF_ENTRIES), .CNT_BITS(PCB)) u_prof (
    .clk, .rst_n,
    .acc_valid (req_valid && req_ready),
    .acc_addr  (req.address),
    .q_addr    (fill_addr),
    .q_count   (fill_prof)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v       <= 1'b0;
      s2_v       <= 1'b0;
      s2_hit     <= 1'b0;
      s1_req     <= '0;
      s2_req     <= '0;
      line_valid <= '0;
      hit_cnt    <= '0;
      miss_cnt   <= '0;
      fill_cnt   <= '0;
      reject_cnt <= '0;
    end else begin
      if (req_ready) begin
        s1_v <= req_valid;
        if (req_valid) s1_req <= req;
      end
      if (s2_free) begin
        s2_v <= s1_adv;
        if (s1_adv) begin
          s2_req <= s1_req;
          s2_hit <= s1_hit;
          if (s1_hit) hit_cnt  <= hit_cnt + 1;
          else        miss_cnt <= miss_cnt + 1;
        end
      end
      if (fill_take) begin
        line_valid[fli] <= 1'b1;
        fill_cnt        <= fill_cnt + 1;
      end else if (fill_valid && buffer_en && !fill_present) begin
        reject_cnt <= reject_cnt + 1;
      end
    end
  end

  // array: registered read, tag/count/data writes
  always_ff @(posedge clk) begin
    if (s2_free && s1_adv) s2_data <= line_data[s1_li];
    if (fill_take) begin
      line_tag[fli]  <= fill_addr;
      line_cnt[fli]  <= fill_prof;
      line_data[fli] <= fill_data;
    end else if (s2_free && s1_adv && s1_hit && line_cnt[s1_li] != '1) begin
      line_cnt[s1_li] <= line_cnt[s1_li] + 1'b1;
    end
  end
endmodule

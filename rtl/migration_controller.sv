// migration_controller: moves a 4 KB page from one place in CXL memory to
// another one cache line (64 B) at a time, inside the switch.
//
// A command gives the source and destination page numbers. For each of the
// 64 lines in turn the controller (1) locks the line, so the VCS holds any
// other request to it, (2) reads it from the source with a switch-issued
// MemRd (SPID = MC_ID, the controller's own requester ID), (3) keeps
// the returned line in its line buffer, the temporary location in the
// switch, (4) writes it to the destination line over the write channel, and
// (5) advances the remap entry of memory indexing, so requests for that line
// now go to the destination. Only the line in flight is ever inaccessible,
// not the whole page. Remap entries are used round-robin.
// Paper: the migration controller in the FM endpoint extension, migration at
// cache-line granularity with the line held in the switch. This design's: the
// command interface, the separate requester ID, the posted write (complete when the
// write channel accepts it) and the remap-entry policy.
//
// Lint notes: only the data of the response is used; its header bits are not needed because one read is outstanding at a time.
module migration_controller
  import pifs_pkg::*;
#(
  parameter int unsigned REMAP_ENTRIES = 8,
  parameter logic [ID_W-1:0] MC_ID = 12'hFFF
) (
  input  logic clk,
  input  logic rst_n,
  // command
  input  logic cmd_valid,
  output logic cmd_ready,
  input  logic [ADDR_W-13:0] cmd_src_page,
  input  logic [ADDR_W-13:0] cmd_dst_page,
  // reads
  output logic     rd_valid,
  input  logic     rd_ready,
  output m2s_req_t rd_req,
  input  logic     rsp_valid,
  output logic     rsp_ready,
  input  s2m_rsp_t rsp,
  // writes
  output logic         wr_valid,
  input  logic         wr_ready,
  output addr_t        wr_addr,
  output logic [511:0] wr_data,
  // lock and remap
  output logic  lock_valid,
  output addr_t lock_addr,
  output logic  rm_wr,
  output logic [$clog2(REMAP_ENTRIES)-1:0] rm_idx,
  output logic [ADDR_W-13:0] rm_src_page,
  output logic [ADDR_W-13:0] rm_dst_page,
  output logic [6:0]         rm_lines_done,
  // status
  output logic        busy,
  output logic [31:0] lines_moved,
  output logic [31:0] pages_moved
);
  typedef enum logic [2:0] {M_IDLE, M_INIT, M_READ, M_WAIT, M_WRITE, M_ADV} mstate_t;
  mstate_t st;

  logic [ADDR_W-13:0] src, dst;
  logic [5:0]   line;
  logic [511:0] line_buf;
  logic [$clog2(REMAP_ENTRIES)-1:0] entry;

  assign busy       = (st != M_IDLE);
  assign cmd_ready  = (st == M_IDLE);
  assign lock_valid = (st == M_READ) || (st == M_WAIT) || (st == M_WRITE);
  assign lock_addr  = {src, line, 6'd0};

  always_comb begin
    rd_req           = '0;
    rd_req.v         = 1'b1;
    rd_req.memopcode = MEMOP_MEMRD;
    rd_req.tag       = {10'd0, line};
    rd_req.address   = {src, line, 6'd0};
    rd_req.spid      = MC_ID;
  end
  assign rd_valid  = (st == M_READ);
  assign rsp_ready = (st == M_WAIT);
  assign wr_valid  = (st == M_WRITE);
  assign wr_addr   = {dst, line, 6'd0};
  assign wr_data   = line_buf;

  assign rm_wr         = (st == M_INIT) || (st == M_ADV);
  assign rm_idx        = entry;
  assign rm_src_page   = src;
  assign rm_dst_page   = dst;
  assign rm_lines_done = (st == M_INIT) ? 7'd0 : 7'(line) + 7'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= M_IDLE;
      src         <= '0;
      dst         <= '0;
      line        <= '0;
      line_buf    <= '0;
      entry       <= '0;
      lines_moved <= '0;
      pages_moved <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (cmd_valid) begin
          src  <= cmd_src_page;
          dst  <= cmd_dst_page;
          line <= '0;
          st   <= M_INIT;
        end
        M_INIT:  st <= M_READ;
        M_READ:  if (rd_ready) st <= M_WAIT;
        M_WAIT:  if (rsp_valid) begin
          line_buf <= rsp.data[3:0];   // chunks 0..3 = the 64-byte line
          st       <= M_WRITE;
        end
        M_WRITE: if (wr_ready) st <= M_ADV;
        M_ADV: begin
          lines_moved <= lines_moved + 1;
          if (line == 6'd63) begin
            pages_moved <= pages_moved + 1;
            entry       <= entry + 1'b1;
            st          <= M_IDLE;
          end else begin
            line <= line + 1'b1;
            st   <= M_READ;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule

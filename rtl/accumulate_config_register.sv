// accumulate_config_register (ACR): one entry per SumTag holding the host
// address reserved for that accumulation's result and its remaining
// SumCandidateCount.
//
// Write port: a Configuration instruction sets entry cfg_tag valid with its
// address and count. Decrement port: dec_en lowers entry dec_tag's count by
// one (the row candidate has been accumulated); when the count reaches zero
// the entry becomes invalid in the same edge. Read port: combinational
// address, count and valid of rd_tag. A write and a decrement to different
// tags can happen in one cycle; the same tag in one cycle is not allowed.
// The table layout (SumTag, Sum Address, SumCandidateCount) is the paper's;
// the 64 entries follow from the 6-bit SumTag.
//
// Lint notes: the reset also appears synchronously, only in the assertion's disable iff.
module accumulate_config_register
  import pifs_pkg::*;
#(
  parameter int unsigned ENTRIES = NUM_SUMTAGS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cfg_en,
  input  sumtag_t cfg_tag,
  input  addr_t   cfg_addr,
  input  cnt_t    cfg_count,
  input  logic    dec_en,
  input  sumtag_t dec_tag,
  input  sumtag_t rd_tag,
  output logic    rd_valid,
  output addr_t   rd_addr,
  output cnt_t    rd_count,
  output logic [ENTRIES-1:0] valid
);
  localparam int unsigned TW = $clog2(ENTRIES);

  addr_t sum_addr [ENTRIES];
  cnt_t  count    [ENTRIES];

  wire [TW-1:0] ci = cfg_tag[TW-1:0];
  wire [TW-1:0] di = dec_tag[TW-1:0];
  wire [TW-1:0] ri = rd_tag[TW-1:0];

  assign rd_valid = valid[ri];
  assign rd_addr  = sum_addr[ri];
  assign rd_count = count[ri];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int i = 0; i < ENTRIES; i++) count[i] <= '0;
    end else begin
      if (dec_en && valid[di]) begin
        count[di] <= count[di] - 1'b1;
        if (count[di] == cnt_t'(1)) valid[di] <= 1'b0;
      end
      if (cfg_en) begin
        valid[ci] <= 1'b1;
        count[ci] <= cfg_count;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_en) sum_addr[ci] <= cfg_addr;
  end

  a_no_same_tag: assert property (@(posedge clk) disable iff (!rst_n)
    (cfg_en && dec_en) |-> (cfg_tag != dec_tag));
  a_cfg_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_en |-> (cfg_count != '0));
endmodule

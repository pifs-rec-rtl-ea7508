// accumulate_config_logic: bookkeeping of the row accumulations in flight.
//
// It owns the Accumulate Configuration Register and three small pieces of
// logic around it:
//  * SumCandidateCounter update: when the accumulate unit has added a whole
//    row of sumtag row_tag (row_done), that entry's count is decremented.
//    The query port tells the accumulate unit, before it finishes a row,
//    whether this row is the last candidate (count == 1) and where the result
//    must be written.
//  * CapacityCounter: +1 for every accepted Configuration, -1 for every
//    finished accumulation. It is the number of SumTags in use.
//  * BP module: a Configuration is refused (cfg_ready low, back-pressure on
//    the upstream path) while CapacityCounter equals cap_limit, or while its
//    SumTag is still in use.
// Counting down to zero and back-pressure at the capacity limit follow the
// paper. Stalling a Configuration whose SumTag is busy, and taking the limit
// from the functional configuration register, are this design's choices.
//
// Timing: the query and cfg_ready are combinational; counters and the
// register table update at the rising edge after a handshake or row_done.
//
// Lint notes: the reset also appears synchronously, only in the assertion's disable iff; header fields of the package not needed here are unused.
module accumulate_config_logic
  import pifs_pkg::*;
#(
  parameter int unsigned CAPACITY = NUM_SUMTAGS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic [$clog2(CAPACITY+1)-1:0] cap_limit,
  // configuration
  input  logic    cfg_valid,
  output logic    cfg_ready,
  input  sumtag_t cfg_tag,
  input  addr_t   cfg_addr,
  input  cnt_t    cfg_count,
  // query by the accumulate unit
  input  sumtag_t q_tag,
  output logic    q_active,
  output logic    q_final,
  output addr_t   q_addr,
  // row finished
  input  logic    row_done,
  input  sumtag_t row_tag,
  // status
  output logic [$clog2(CAPACITY+1)-1:0] capacity_counter,
  output logic    bp,
  output logic [31:0] bp_cycles,
  output logic [31:0] done_cnt
);

  logic [NUM_SUMTAGS-1:0] valid;
  logic  rd_valid;
  addr_t rd_addr;
  cnt_t  rd_count;

  accumulate_config_register #(.ENTRIES(NUM_SUMTAGS)) u_acr (
    .clk, .rst_n,
    .cfg_en   (cfg_valid && cfg_ready),
    .cfg_tag, .cfg_addr, .cfg_count,
    .dec_en   (row_done),
    .dec_tag  (row_tag),
    .rd_tag   (q_tag),
    .rd_valid (rd_valid),
    .rd_addr  (rd_addr),
    .rd_count (rd_count),
    .valid    (valid)
  );

  assign q_active = rd_valid;
  assign q_final  = rd_valid && (rd_count == cnt_t'(1));
  assign q_addr   = rd_addr;

  // the row that finishes ends its accumulation if its count is one
  wire finishing = row_done && q_final;

  assign bp        = (capacity_counter >= cap_limit);
  assign cfg_ready = !bp && !valid[cfg_tag];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      capacity_counter <= '0;
      bp_cycles        <= '0;
      done_cnt         <= '0;
    end else begin
      case ({cfg_valid && cfg_ready, finishing})
        2'b10:   capacity_counter <= capacity_counter + 1'b1;
        2'b01:   capacity_counter <= capacity_counter - 1'b1;
        default: ;
      endcase
      if (finishing) done_cnt <= done_cnt + 1;
      if (cfg_valid && !cfg_ready) bp_cycles <= bp_cycles + 1;
    end
  end

  // the accumulate unit always queries the tag of the row it finishes
  a_query_matches: assert property (@(posedge clk) disable iff (!rst_n)
    row_done |-> (row_tag == q_tag && valid[row_tag]));
endmodule

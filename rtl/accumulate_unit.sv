// accumulate_unit: the accumulate register/logic of the process core, with
// its swap register, performing out-of-order weighted row accumulation
// (SparseLengthSum): result[tag] += weight * row, over SumCandidateCount rows.
//
// Rows arrive in whatever order the memory devices return them and may belong
// to any SumTag. The accumulation register holds the partial sum of one
// SumTag. When a row of another SumTag arrives, the partial sum in the
// accumulation register is exchanged with that SumTag's partial sum in the
// swap register (or with zeros for a SumTag's first row) in the same cycle the
// row is accepted, so a change of SumTag costs no cycle. The paper does this
// exchange in the first half of a clock cycle; here it is one register
// transfer at the accepting edge. If the swap register has no free slot and
// spilling is enabled in the FCR, the displaced partial sum is written to a
// spill region of the on-switch SRAM, and a partial sum found there is read
// back; each such SRAM access stalls the unit for SPILL_LAT cycles (the paper:
// at least two). Without spilling, the back-pressure logic keeps at most
// SWAP_DEPTH + 1 SumTags in flight, so a slot is always free.
//
// Datapath: one 16-byte chunk (LANES FP32 values) per cycle, a row of n chunks
// takes n cycles; each lane computes acc + weight * x (FP32 multiply, then
// FP32 add). On a row's last chunk the unit reports row_done to the
// configuration logic; if the query said it was the SumTag's last candidate,
// the finished row is offered on res (valid/ready) with the host address for
// the result, and the SumTag's partial sum is released.
//
// Interface: op_valid/op_ready/op (a row with SumTag, chunk count, weight);
// q_tag/q_final/q_addr query the configuration logic; row_done/row_tag;
// res_valid/res_ready/res. Timing: accept in cycle 0 (plus SPILL_LAT per
// SRAM access), chunks in the following n cycles, result one cycle after
// the last chunk. Paper: the exchange through a swap register, the SRAM
// spill with a multi-cycle penalty and its FCR switch. This design's: the
// chunk-serial datapath, the swap depth, and the spill region holding one
// row per SumTag.
//
// Lint notes: the reset also appears synchronously, only in the assertion's disable iff; the header bits of the operation (sumtag, count, tag) above the row data are not all read in every path.
module accumulate_unit
  import pifs_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned SWAP_DEPTH = 4,
  parameter int unsigned SPILL_LAT  = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    spill_en,
  // rows in
  input  logic    op_valid,
  output logic    op_ready,
  input  acc_op_t op,
  // configuration-logic query
  output sumtag_t q_tag,
  input  logic    q_final,
  input  addr_t   q_addr,
  output logic    row_done,
  output sumtag_t row_tag,
  // result out
  output logic    res_valid,
  input  logic    res_ready,
  output d2h_t    res,
  // event counters
  output logic [31:0] same_tag_cnt,
  output logic [31:0] swap_cnt,
  output logic [31:0] spill_cnt,
  output logic [31:0] stall_cycles
);
  localparam int unsigned SW = (SWAP_DEPTH > 1) ? $clog2(SWAP_DEPTH) : 1;
  localparam int unsigned CI = $clog2(MAX_CHUNKS);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_COMP, S_OUT} state_t;
  state_t state;

  // accumulation register
  logic    acc_valid;
  sumtag_t acc_tag;
  row_t    acc_data;
  // swap register
  logic [SWAP_DEPTH-1:0] swp_valid;
  sumtag_t swp_tag  [SWAP_DEPTH];
  row_t    swp_data [SWAP_DEPTH];
  // spill region (one row per SumTag)
  logic [NUM_SUMTAGS-1:0] spl_valid;
  row_t    spl_data [NUM_SUMTAGS];

  acc_op_t cur;
  logic [CI-1:0] chunk;
  logic [7:0]    wait_cnt;
  addr_t   res_addr;
  nchunk_t res_n;
  sumtag_t res_tag;

  // where does the incoming row's partial sum live?
  logic          in_acc, swp_hit, any_free;
  logic [SW-1:0] swp_idx, free_idx;
  always_comb begin
    in_acc   = acc_valid && (acc_tag == op.sumtag);
    swp_hit  = 1'b0;
    swp_idx  = '0;
    any_free = 1'b0;
    free_idx = '0;
    for (int i = SWAP_DEPTH - 1; i >= 0; i--) begin
      if (swp_valid[i] && swp_tag[i] == op.sumtag) begin
        swp_hit = 1'b1;
        swp_idx = SW'(i);
      end
      if (!swp_valid[i]) begin
        any_free = 1'b1;
        free_idx = SW'(i);
      end
    end
  end
  wire spl_hit = !in_acc && !swp_hit && spl_valid[op.sumtag];
  // the displaced partial sum needs the SRAM if no swap slot takes it
  wire evict     = acc_valid && !in_acc;
  wire evict_spl = evict && !swp_hit && !any_free;

  assign op_ready = (state == S_IDLE);
  wire   accept   = op_valid && op_ready;

  assign q_tag    = cur.sumtag;
  wire   last     = (state == S_COMP) && (nchunk_t'(chunk) == cur.nchunks - 1'b1);
  assign row_done = last;
  assign row_tag  = cur.sumtag;

  // one chunk of lanes: acc + weight * x
  chunk_t new_chunk;
  always_comb begin
    for (int l = 0; l < LANES; l++)
      new_chunk[32*l +: 32] = fp32_add(acc_data[chunk][32*l +: 32],
                                       fp32_mul(cur.weight, cur.data[chunk][32*l +: 32]));
  end

  assign res_valid   = (state == S_OUT);
  assign res.address = res_addr;
  assign res.sumtag  = res_tag;
  assign res.nchunks = res_n;
  assign res.data    = acc_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      acc_valid    <= 1'b0;
      acc_tag      <= '0;
      acc_data     <= '0;
      swp_valid    <= '0;
      spl_valid    <= '0;
      chunk        <= '0;
      wait_cnt     <= '0;
      cur          <= '0;
      res_addr     <= '0;
      res_n        <= '0;
      res_tag      <= '0;
      same_tag_cnt <= '0;
      swap_cnt     <= '0;
      spill_cnt    <= '0;
      stall_cycles <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (accept) begin
          cur      <= op;
          chunk    <= '0;
          wait_cnt <= '0;
          if (in_acc) begin
            same_tag_cnt <= same_tag_cnt + 1;
          end else begin
            if (evict) swap_cnt <= swap_cnt + 1;
            // bring the partial sum of the new SumTag into the register
            if (swp_hit)      acc_data <= swp_data[swp_idx];
            else if (spl_hit) acc_data <= spl_data[op.sumtag];
            else              acc_data <= '0;
            if (swp_hit && !evict) swp_valid[swp_idx] <= 1'b0;
            if (spl_hit)           spl_valid[op.sumtag] <= 1'b0;
            // park the displaced partial sum
            if (evict) begin
              if (swp_hit) begin
                swp_tag[swp_idx]  <= acc_tag;
                swp_data[swp_idx] <= acc_data;
              end else if (any_free) begin
                swp_valid[free_idx] <= 1'b1;
                swp_tag[free_idx]   <= acc_tag;
                swp_data[free_idx]  <= acc_data;
              end else begin
                spl_valid[acc_tag] <= 1'b1;
                spl_data[acc_tag]  <= acc_data;
              end
            end
            acc_valid <= 1'b1;
            acc_tag   <= op.sumtag;
            if (spl_hit || evict_spl) begin
              spill_cnt <= spill_cnt + 32'(spl_hit) + 32'(evict_spl);
              wait_cnt  <= 8'(SPILL_LAT * (int'(spl_hit) + int'(evict_spl)));
            end
          end
          state <= (spl_hit || evict_spl) ? S_WAIT : S_COMP;
        end
        S_WAIT: begin
          stall_cycles <= stall_cycles + 1;
          wait_cnt     <= wait_cnt - 1'b1;
          if (wait_cnt == 8'd1) state <= S_COMP;
        end
        S_COMP: begin
          acc_data[chunk] <= new_chunk;
          chunk           <= chunk + 1'b1;
          if (last) begin
            if (q_final) begin
              res_addr <= q_addr;
              res_n    <= cur.nchunks;
              res_tag  <= cur.sumtag;
              state    <= S_OUT;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        S_OUT: if (res_ready) begin
          acc_valid <= 1'b0;
          acc_data  <= '0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // without spilling, the back-pressure logic must prevent a full swap register
  a_spill_allowed: assert property (@(posedge clk) disable iff (!rst_n)
    (accept && evict_spl) |-> spill_en);
endmodule

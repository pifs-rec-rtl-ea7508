// functional_config_register (FCR): run-time switches of the process core.
//
// A register written over a small configuration port (driven by the fabric
// manager side of the switch). Bit 0, spill_en, lets the accumulate logic
// park intermediate sums in the on-switch SRAM when the swap register is
// full; bit 1, buffer_en, enables the on-switch row cache. From spill_en
// the FCR derives the capacity limit that the back-pressure logic enforces:
// with spilling, every SumTag may be in flight; without it, only as many
// SumTags as the accumulation register and the swap register can hold at
// once (SWAP_DEPTH + 1), so that a partial sum always has a place to go.
// Reset value: both enabled. The paper says the spill function is made
// configurable through the FCR; the bit layout, the buffer enable and the
// derived limit are this design's.
//
// Timing: a write takes effect at the next rising edge; outputs are
// combinational from the register.
//
// Lint notes: only the two defined FCR bits of the 8-bit write are stored; the rest are reserved.
module functional_config_register
  import pifs_pkg::*;
#(
  parameter int unsigned CAPACITY   = NUM_SUMTAGS,
  parameter int unsigned SWAP_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  logic [7:0] wr_data,
  output logic [7:0] rd_data,
  output logic       spill_en,
  output logic       buffer_en,
  output logic [$clog2(CAPACITY+1)-1:0] cap_limit
);
  localparam int unsigned CW = $clog2(CAPACITY+1);
  localparam int unsigned NO_SPILL_LIMIT =
    (SWAP_DEPTH + 1 < CAPACITY) ? SWAP_DEPTH + 1 : CAPACITY;

  logic [1:0] fcr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     fcr <= 2'b11;
    else if (wr_en) fcr <= wr_data[1:0];
  end

  assign spill_en  = fcr[0];
  assign buffer_en = fcr[1];
  assign rd_data   = {6'd0, fcr};
  assign cap_limit = spill_en ? CW'(CAPACITY) : CW'(NO_SPILL_LIMIT);
endmodule

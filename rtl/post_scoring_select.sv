// post_scoring_select: dynamic post-scoring approximation.
//
// After the dot products of the candidate rows are known, a row is kept for the
// softmax and the weighted sum only if its dot product is within threshold t of
// the largest one: max - dp <= t. A row further away would get a softmax weight
// below exp(-t) times the top row's weight. The selector compares LANES (16)
// consecutive entries per cycle with 16 subtractors and comparators and reports
// the first one that qualifies, so the exponent stage receives one selected row
// per cycle while non-selected rows are skipped 16 at a time.
// With `enable` low (base mode, no approximation) every valid entry qualifies.
// Interface: dp[k] is entry base+k of the dot-product register file, valid[k]
// says whether that entry exists. t has the dot product's format (2f fraction
// bits). Purely combinational.
module post_scoring_select
  import a3_pkg::*;
#(
  parameter int DPW   = 24,
  parameter int LANES = SCAN_W
) (
  input  logic                      enable,
  input  logic signed [DPW-1:0]     max_dp,
  input  logic        [DPW:0]       t,
  input  logic signed [DPW-1:0]     dp [LANES],
  input  logic        [LANES-1:0]   valid,
  output logic        [LANES-1:0]   keep,
  output logic                      found,
  output logic [$clog2(LANES)-1:0]  idx
);

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    logic signed [DPW:0] diff;
    assign diff    = (DPW+1)'(max_dp) - (DPW+1)'(dp[k]);
    assign keep[k] = valid[k] && (!enable || (diff <= $signed(t)));
  end

  first_set #(.W(LANES)) u_first (.flags(keep), .found(found), .idx(idx));

endmodule

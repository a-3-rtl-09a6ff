// softmax_divider: weight = score / expsum, pipelined over 7 cycles.
//
// Normalises one softmax score per cycle. Both operands carry 2f = 8 fraction
// bits; the quotient keeps 8 fraction bits as well, computed as
// floor((score << 8) / expsum). Because every score is one of the summands of
// expsum, the quotient never exceeds 1.0 (256).
// Implementation: restoring long division, QB = STAGES * BPS quotient bits,
// BPS bits per pipeline stage. Quotient bits above QB are known to be zero
// (quotient <= 256 < 2^QB), so the remainder starts from the dividend bits above
// QB. A zero divisor yields an all-ones quotient (never happens in use).
// Reset clears only the valid bits of the pipeline.
// Timing: in_valid/operands at cycle t, out_valid/weight at cycle t + STAGES.
// The 7-cycle latency is the source's figure; the radix-2 restoring
// algorithm is this design's choice.
module softmax_divider
  import a3_pkg::*;
#(
  parameter int STAGES = DIV_STAGES,
  parameter int BPS    = 2,
  parameter int DEN_W  = 18
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [SCORE_W-1:0]  score,
  input  logic [DEN_W-1:0]    expsum,
  output logic                out_valid,
  output logic [WEIGHT_W-1:0] weight
);

  localparam int QB    = STAGES * BPS;
  localparam int NUM_W = SCORE_W + 2 * F_BITS;      // score << 8
  localparam int REM_W = DEN_W + 1;

  typedef struct packed {
    logic             v;
    logic [REM_W-1:0] rem;
    logic [QB-1:0]    num;   // dividend bits still to bring down (MSB first)
    logic [QB-1:0]    quo;
    logic [DEN_W-1:0] den;
  } div_st_t;

  div_st_t st0;
  div_st_t pipe [STAGES];    // data part; the .v field is unused here
  logic    vld  [STAGES];    // valid bits, the only reset state

  always_comb begin
    logic [NUM_W+QB-1:0] ext;
    ext = (NUM_W+QB)'(score) << (2 * F_BITS);
    st0.v   = in_valid;
    st0.rem = REM_W'(ext >> QB);
    st0.num = ext[QB-1:0];
    st0.quo = '0;
    st0.den = expsum;
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    div_st_t cur, nxt;
    if (s == 0) begin : g_first
      assign cur = st0;
    end else begin : g_next
      always_comb begin
        cur   = pipe[s-1];
        cur.v = vld[s-1];
      end
    end
    always_comb begin
      nxt = cur;
      for (int b = 0; b < BPS; b++) begin
        nxt.rem = {nxt.rem[REM_W-2:0], nxt.num[QB-1]};
        nxt.num = nxt.num << 1;
        if (nxt.rem >= REM_W'(nxt.den)) begin
          nxt.rem = nxt.rem - REM_W'(nxt.den);
          nxt.quo = {nxt.quo[QB-2:0], 1'b1};
        end else begin
          nxt.quo = {nxt.quo[QB-2:0], 1'b0};
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[s] <= 1'b0;
      else        vld[s] <= nxt.v;
    end
    always_ff @(posedge clk) pipe[s] <= nxt;
  end

  assign out_valid = vld[STAGES-1];
  assign weight    = (pipe[STAGES-1].quo > QB'((1 << WEIGHT_W) - 1)) ? '1 : pipe[STAGES-1].quo[WEIGHT_W-1:0];

endmodule

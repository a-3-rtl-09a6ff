// exp_lut: exp(-x) for x >= 0 from two small lookup tables.
//
// The exponent stage needs exp(dot_product - max), whose argument is never
// positive. Instead of one table addressed by the whole 16-bit argument
// (65,536 entries), the argument x = u + l/256 is split into its upper byte u
// (integer part) and lower byte l (fraction), and
//     exp(-x) = exp(-u) * exp(-l/256),
// so two 256-entry tables and one multiplier give the result.
//   hi_tab[u] = round(256 * exp(-u))        (9 bits, 1.0 = 256)
//   lo_tab[l] = round(256 * exp(-l / 256))  (9 bits)
//   score     = round(hi_tab[u] * lo_tab[l] / 256)
// The score keeps 2f = 8 fraction bits plus one integer bit so that exp(0) = 1.0
// is exact. Arguments of 256 or more (or with any bit set above the 16 table
// bits, `big`) give 0. The tables are computed at elaboration from $exp.
// Timing: one register stage after the tables (latency 1 cycle, one result per
// cycle); `in_valid` is carried along to `out_valid`.
module exp_lut
  import a3_pkg::*;
(
  input  logic                 clk,
  input  logic                 in_valid,
  input  logic [EXP_IN_W-1:0]  x,
  input  logic                 big,
  output logic                 out_valid,
  output logic [SCORE_W-1:0]   score
);

  localparam int HALF = EXP_IN_W / 2;
  localparam int ENTRIES = 1 << HALF;

  logic [SCORE_W-1:0] hi_tab [ENTRIES];
  logic [SCORE_W-1:0] lo_tab [ENTRIES];

  for (genvar g = 0; g < ENTRIES; g++) begin : g_tab
    localparam int unsigned HI = int'($exp(-real'(g)) * 256.0);
    localparam int unsigned LO = int'($exp(-real'(g) / real'(ENTRIES)) * 256.0);
    assign hi_tab[g] = SCORE_W'(HI);
    assign lo_tab[g] = SCORE_W'(LO);
  end

  logic [SCORE_W-1:0]   hi_q, lo_q;
  logic                 big_q;
  logic [2*SCORE_W-1:0] prod;

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    hi_q      <= hi_tab[x[EXP_IN_W-1:HALF]];
    lo_q      <= lo_tab[x[HALF-1:0]];
    big_q     <= big;
  end

  assign prod  = hi_q * lo_q + (2*SCORE_W)'(1 << (2*F_BITS - 1));
  assign score = big_q ? '0 : prod[2*F_BITS +: SCORE_W];

endmodule

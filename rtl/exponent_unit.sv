// exponent_unit: Module 2 of the attention pipeline, with the post-scoring
// selector at its input.
//
// Reads the dot-product register file written by the previous stage. A window
// of 16 consecutive entries is examined per cycle by post_scoring_select; the
// first entry whose dot product lies within t of the maximum (every entry in
// base mode) is processed, and the window moves just past it. Entries that are
// rejected are skipped 16 per cycle. For each processed entry:
//   diff  = max - dp                (>= 0, one bit wider than dp)
//   score = exp(-diff)              (exp_lut: two 256-entry tables + multiply)
//   score register file[k] <= {row ID, score};  expsum += score;  k++
// Subtracting the maximum first keeps every score in [0, 1] so the fixed-point
// exp cannot overflow (softmax is unchanged by a common offset).
//
// Timing: start at cycle 0 latches count, max and t; one selected entry per
// cycle enters exp_lut, its score is written one cycle later. done pulses one
// cycle after the last write; out_count (K) and expsum are then valid.
// In base mode with count = n the unit is busy for n + 3 cycles.
module exponent_unit
  import a3_pkg::*;
#(
  parameter int N = N_ROWS,
  parameter int D = D_DIM,
  localparam int RW  = $clog2(N),
  localparam int CW  = $clog2(N + 1),
  localparam int DPW = PROD_W + $clog2(D),
  localparam int ESW = SCORE_W + $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [CW-1:0]         count,
  input  logic signed [DPW-1:0] max_dp,
  input  logic                  approx,
  input  logic [DPW:0]          threshold,
  // dot-product register file, window of SCAN_W read ports: {row ID, dp}
  output logic [RW-1:0]         dp_rd_addr [SCAN_W],
  input  logic [RW+DPW-1:0]     dp_rd_data [SCAN_W],
  // score register file (write port): {row ID, score}
  output logic                  sc_wr_en,
  output logic [RW-1:0]         sc_wr_addr,
  output logic [RW+SCORE_W-1:0] sc_wr_data,
  // results
  output logic [CW-1:0]         out_count,
  output logic [ESW-1:0]        expsum,
  output logic                  done
);

  localparam int PW = CW + 1;           // window position may pass count by < 16

  logic                  busy;
  logic [PW-1:0]         pos;
  logic [CW-1:0]         cnt_q, k_idx;
  logic signed [DPW-1:0] max_q;
  logic                  approx_q;
  logic [DPW:0]          t_q;

  // ---- post-scoring selection over the window --------------------------
  logic signed [DPW-1:0]      win_dp [SCAN_W];
  logic [RW-1:0]              win_rid [SCAN_W];
  logic [SCAN_W-1:0]          win_valid, keep;
  logic                       found;
  logic [$clog2(SCAN_W)-1:0]  sel;

  for (genvar k = 0; k < SCAN_W; k++) begin : g_win
    logic [PW-1:0] a;
    assign a             = pos + PW'(k);
    assign dp_rd_addr[k] = (a < PW'(N)) ? RW'(a) : '0;
    assign win_valid[k]  = busy && (a < PW'(cnt_q));
    assign win_dp[k]     = dp_rd_data[k][DPW-1:0];
    assign win_rid[k]    = dp_rd_data[k][RW+DPW-1:DPW];
  end

  post_scoring_select #(.DPW(DPW), .LANES(SCAN_W)) u_pss (
    .enable (approx_q),
    .max_dp (max_q),
    .t      (t_q),
    .dp     (win_dp),
    .valid  (win_valid),
    .keep   (keep),
    .found  (found),
    .idx    (sel)
  );

  // ---- subtract the maximum, exp lookup --------------------------------
  logic [DPW:0]          diff;
  logic                  big;
  logic                  ev;
  logic [SCORE_W-1:0]    score;
  logic [RW-1:0]         rid_q;

  assign diff = (DPW+1)'(max_q) - (DPW+1)'(win_dp[sel]);
  assign big  = |diff[DPW:EXP_IN_W];

  exp_lut u_exp (
    .clk       (clk),
    .in_valid  (found),
    .x         (diff[EXP_IN_W-1:0]),
    .big       (big),
    .out_valid (ev),
    .score     (score)
  );

  always_ff @(posedge clk) rid_q <= win_rid[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pos <= '0; cnt_q <= '0; k_idx <= '0; max_q <= '0;
      approx_q <= 1'b0; t_q <= '0; expsum <= '0; out_count <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        pos      <= '0;
        cnt_q    <= count;
        max_q    <= max_dp;
        approx_q <= approx;
        t_q      <= threshold;
        k_idx    <= '0;
        expsum   <= '0;
      end else if (busy) begin
        if (found) pos <= pos + PW'(sel) + 1'b1;
        else if (pos < PW'(cnt_q)) pos <= pos + PW'(SCAN_W);
        if (ev) begin
          k_idx  <= k_idx + 1'b1;
          expsum <= expsum + ESW'(score);
        end
        if (!found && !ev && pos >= PW'(cnt_q)) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          out_count <= ev ? k_idx + 1'b1 : k_idx;
        end
      end
    end
  end

  assign sc_wr_en   = busy && ev;
  assign sc_wr_addr = RW'(k_idx);
  assign sc_wr_data = {rid_q, score};

endmodule

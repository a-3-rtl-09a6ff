// candidate_selection: greedy candidate search over the sorted key matrix.
//
// Estimates which key rows will score high against the query without computing
// any dot product. The element-wise products key[r][j] * query[j] are visited
// from the largest down (max side) and from the smallest up (min side), one of
// each per iteration, for M iterations. A visited positive product is added to
// greedy_score[r] by the max side, a visited negative product by the min side.
// Rows whose greedy score ends positive are the candidates.
// Heuristic: while the running sum of all values added so far is negative, the
// min side skips its iteration, so that few candidates are not pruned further
// when the overall similarity is low.
//
// Structure: two cs_side units (pointers, 4-deep circular queues per column,
// multipliers, d-way comparator tree), n greedy-score registers, and a scan
// that inspects SCAN_W (16) greedy scores per cycle and emits one positive row
// ID per cycle into the candidate list, in ascending row order.
//
// Sequence after start (cycle 0 latches query, n and M):
//   INIT  CMB_DEPTH+1 cycles  fill every queue (all columns in parallel)
//   ITER  M cycles            one max-side and one min-side pop per cycle
//   WAIT  1 cycle             last greedy-score update lands
//   SCAN  ~C + (n-C)/16       emit candidates
// done pulses after the scan; cand_count (C) is then valid.
// Greedy scores are updated one cycle after the pop that produced them.
module candidate_selection
  import a3_pkg::*;
#(
  parameter int N = N_ROWS,
  parameter int D = D_DIM,
  localparam int RW  = $clog2(N),
  localparam int CW  = $clog2(N + 1),
  localparam int GSW = PROD_W + $clog2(N) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  elem_t         query [D],
  input  logic [CW-1:0] n_rows,
  input  logic [15:0]   m_iter,
  // sorted key SRAM, max side (a) and min side (b)
  output logic [D-1:0]  rd_en_a,
  output logic [RW-1:0] rd_addr_a [D],
  input  elem_t         rd_val_a [D],
  input  logic [RW-1:0] rd_rid_a [D],
  output logic [D-1:0]  rd_en_b,
  output logic [RW-1:0] rd_addr_b [D],
  input  elem_t         rd_val_b [D],
  input  logic [RW-1:0] rd_rid_b [D],
  // candidate list (write port)
  output logic          cand_wr_en,
  output logic [RW-1:0] cand_wr_addr,
  output logic [RW-1:0] cand_wr_rid,
  output logic [CW-1:0] cand_count,
  output logic          done,
  // one pulse per iteration in which the min side was skipped
  output logic          min_skip
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_ITER, S_WAIT, S_SCAN} cs_state_t;
  cs_state_t state;

  logic [CW-1:0] n_q;
  logic [15:0]   m_q, iter;
  logic [2:0]    init_cnt;
  logic signed [GSW-1:0] gs [N];
  logic signed [GSW-1:0] cum;

  // ---- the two sides ------------------------------------------------------
  logic  init_load, it;
  assign init_load = (state == S_INIT) && (init_cnt < 3'(CMB_DEPTH));
  assign it        = (state == S_ITER);

  logic          pv_a, pv_b;
  prod_t         val_a, val_b;
  logic [RW-1:0] rid_a, rid_b;
  logic [$clog2(D)-1:0] col_a, col_b;
  logic          skip_min;

  assign skip_min = cum < 0;

  cs_side #(.N(N), .D(D), .IS_MIN(1'b0)) u_max (
    .clk, .rst_n, .start, .n_rows, .query, .init_load, .pop_en(it),
    .rd_en(rd_en_a), .rd_addr(rd_addr_a), .rd_val(rd_val_a), .rd_rid(rd_rid_a),
    .pop_valid(pv_a), .pop_val(val_a), .pop_rid(rid_a), .pop_col(col_a)
  );

  cs_side #(.N(N), .D(D), .IS_MIN(1'b1)) u_min (
    .clk, .rst_n, .start, .n_rows, .query, .init_load, .pop_en(it && !skip_min),
    .rd_en(rd_en_b), .rd_addr(rd_addr_b), .rd_val(rd_val_b), .rd_rid(rd_rid_b),
    .pop_valid(pv_b), .pop_val(val_b), .pop_rid(rid_b), .pop_col(col_b)
  );

  assign min_skip = it && skip_min;

  // ---- greedy score update (one cycle after the pop) ----------------------
  logic          add_a, add_b;
  prod_t         av, bv;
  logic [RW-1:0] ar, br;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      add_a <= 1'b0; add_b <= 1'b0; av <= '0; bv <= '0; ar <= '0; br <= '0;
    end else begin
      add_a <= pv_a && (val_a > 0);
      add_b <= pv_b && (val_b < 0);
      av <= val_a; ar <= rid_a;
      bv <= val_b; br <= rid_b;
    end
  end

  // ---- scan of the greedy scores ------------------------------------------
  localparam int PW = CW + 1;
  logic [PW-1:0]  pos;
  logic [SCAN_W-1:0] flags;
  logic           found;
  logic [$clog2(SCAN_W)-1:0] fidx;

  for (genvar k = 0; k < SCAN_W; k++) begin : g_scan
    logic [PW-1:0] a;
    assign a        = pos + PW'(k);
    assign flags[k] = (state == S_SCAN) && (a < PW'(n_q)) && (gs[(a < PW'(N)) ? RW'(a) : '0] > 0);
  end

  first_set #(.W(SCAN_W)) u_first (.flags(flags), .found(found), .idx(fidx));

  assign cand_wr_en   = found;
  assign cand_wr_addr = RW'(cand_count);
  assign cand_wr_rid  = RW'(pos + PW'(fidx));

  // ---- control ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_q <= '0; m_q <= '0; iter <= '0; init_cnt <= '0;
      cum <= '0; pos <= '0; cand_count <= '0; done <= 1'b0;
      for (int r = 0; r < N; r++) gs[r] <= '0;
    end else begin
      done <= 1'b0;
      for (int r = 0; r < N; r++)
        gs[r] <= gs[r] + ((add_a && ar == RW'(r)) ? GSW'(av) : '0)
                       + ((add_b && br == RW'(r)) ? GSW'(bv) : '0);
      cum <= cum + (add_a ? GSW'(av) : '0) + (add_b ? GSW'(bv) : '0);
      unique case (state)
        S_IDLE: ;
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == 3'(CMB_DEPTH)) state <= (m_q == '0) ? S_WAIT : S_ITER;
        end
        S_ITER: begin
          iter <= iter + 1'b1;
          if (iter == m_q - 1'b1) state <= S_WAIT;
        end
        S_WAIT: state <= S_SCAN;
        S_SCAN: begin
          if (found) begin
            pos        <= pos + PW'(fidx) + 1'b1;
            cand_count <= cand_count + 1'b1;
          end else if (pos < PW'(n_q)) begin
            pos <= pos + PW'(SCAN_W);
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (start) begin
        state <= S_INIT; n_q <= n_rows; m_q <= m_iter; iter <= '0; init_cnt <= '0;
        cum <= '0; pos <= '0; cand_count <= '0;
        for (int r = 0; r < N; r++) gs[r] <= '0;
      end
    end
  end

endmodule

// cs_side: one side (max or min) of the candidate selection module.
//
// Holds, for every key column j, a pointer into the sorted column (max_ptr[j]
// or min_ptr[j]) and a circular queue of CMB_DEPTH component multiplication
// results (sortedKey[ptr][j].val * query[j] with the row ID). The max side
// walks each column from the entry with the largest product downwards: from
// the top of the sorted column if query[j] > 0, from the bottom otherwise. The
// min side walks the opposite way and so sees the smallest products first.
//
// Init (init_load high for CMB_DEPTH cycles): every column loads its next entry
// each cycle, all columns in parallel, using one multiplier per column.
// Steady state (pop_en high): the comparator tree picks the column whose oldest
// queued product is largest (smallest for the min side); that entry is popped
// and presented on pop_* in the same cycle, and the same column issues a
// refill read. The refill is multiplied by the side's single steady-state
// multiplier and pushed one cycle after the read, so a popped column is
// refilled two cycles after the pop. A column whose n entries are all loaded
// is not refilled; an empty queue does not take part in the comparison.
//
// Timing: sorted-key SRAM reads are synchronous (data the cycle after rd_en).
// The per-column init multipliers stand in for the dot-product and output
// multipliers that the source borrows for the initial fill.
module cs_side
  import a3_pkg::*;
#(
  parameter int N      = N_ROWS,
  parameter int D      = D_DIM,
  parameter bit IS_MIN = 1'b0,
  localparam int RW = $clog2(N),
  localparam int CW = $clog2(N + 1),
  localparam int IW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,          // set pointers from query signs, clear queues
  input  logic [CW-1:0] n_rows,
  input  elem_t         query [D],
  input  logic          init_load,      // load one entry into every column
  input  logic          pop_en,         // steady-state iteration on this side
  // sorted key SRAM port of this side
  output logic [D-1:0]  rd_en,
  output logic [RW-1:0] rd_addr [D],
  input  elem_t         rd_val [D],
  input  logic [RW-1:0] rd_rid [D],
  // popped entry
  output logic          pop_valid,
  output prod_t         pop_val,
  output logic [RW-1:0] pop_rid,
  output logic [IW-1:0] pop_col
);

  localparam int QA = $clog2(CMB_DEPTH);
  localparam int QC = $clog2(CMB_DEPTH + 1);

  elem_t         q_reg [D];
  logic [D-1:0]  down;               // pointer moves towards entry 0
  logic [RW-1:0] ptr  [D];
  logic [CW-1:0] left [D];           // entries of the column not yet loaded

  prod_t         qv   [D][CMB_DEPTH];
  logic [RW-1:0] qr   [D][CMB_DEPTH];
  logic [QA-1:0] head [D];
  logic [QA-1:0] tail [D];
  logic [QC-1:0] cnt  [D];

  // ---- comparator tree over the oldest entry of each queue ----------------
  prod_t         hv  [D];
  logic [RW-1:0] hr  [D];
  logic [D-1:0]  hval;
  logic          found;
  logic [IW-1:0] sel;
  prod_t         best;
  logic [RW-1:0] best_rid;

  for (genvar j = 0; j < D; j++) begin : g_head
    assign hv[j]   = qv[j][head[j]];
    assign hr[j]   = qr[j][head[j]];
    assign hval[j] = (cnt[j] != '0);
  end

  cmp_tree #(.D(D), .W(PROD_W), .RIDW(RW), .IS_MIN(IS_MIN)) u_tree (
    .val(hv), .rid(hr), .valid(hval),
    .found(found), .idx(sel), .best(best), .best_rid(best_rid)
  );

  assign pop_valid = pop_en && found;
  assign pop_val   = best;
  assign pop_rid   = best_rid;
  assign pop_col   = sel;

  // ---- loads --------------------------------------------------------------
  logic [D-1:0] pop_hot;
  always_comb begin
    for (int j = 0; j < D; j++) begin
      pop_hot[j] = pop_valid && (sel == IW'(j));
      rd_en[j]   = (left[j] != '0) && (init_load || pop_hot[j]);
      rd_addr[j] = ptr[j];
    end
  end

  // loaded data returns one cycle later
  logic [D-1:0]  ld_mask;
  logic          ld_init;
  logic [IW-1:0] ld_col;

  // steady-state multiplier: one per side
  prod_t ss_prod;
  assign ss_prod = PROD_W'(rd_val[ld_col]) * PROD_W'(q_reg[ld_col]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_mask <= '0; ld_init <= 1'b0; ld_col <= '0; down <= '0;
      for (int j = 0; j < D; j++) begin
        ptr[j] <= '0; left[j] <= '0; head[j] <= '0; tail[j] <= '0; cnt[j] <= '0;
      end
    end else if (start) begin
      ld_mask <= '0;
      for (int j = 0; j < D; j++) begin
        // max side: start at the largest product; min side: at the smallest
        down[j] <= IS_MIN ? !(query[j] > 0) : (query[j] > 0);
        ptr[j]  <= (IS_MIN ? !(query[j] > 0) : (query[j] > 0)) ? RW'(n_rows - 1'b1) : '0;
        left[j] <= n_rows;
        head[j] <= '0; tail[j] <= '0; cnt[j] <= '0;
      end
    end else begin
      ld_mask <= rd_en;
      ld_init <= init_load;
      ld_col  <= sel;
      for (int j = 0; j < D; j++) begin
        if (rd_en[j]) begin
          left[j] <= left[j] - 1'b1;
          ptr[j]  <= down[j] ? ptr[j] - 1'b1 : ptr[j] + 1'b1;
        end
        if (ld_mask[j]) begin
          qv[j][tail[j]] <= ld_init ? PROD_W'(rd_val[j]) * PROD_W'(q_reg[j]) : ss_prod;
          qr[j][tail[j]] <= rd_rid[j];
          tail[j] <= (tail[j] == QA'(CMB_DEPTH - 1)) ? '0 : tail[j] + 1'b1;
        end
        if (pop_hot[j]) head[j] <= (head[j] == QA'(CMB_DEPTH - 1)) ? '0 : head[j] + 1'b1;
        cnt[j] <= cnt[j] + QC'(ld_mask[j]) - QC'(pop_hot[j]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) q_reg <= query;
  end

  // a queue is never pushed while full, nor popped while empty
  for (genvar j = 0; j < D; j++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n || start)
      (ld_mask[j] && !pop_hot[j]) |-> (cnt[j] < QC'(CMB_DEPTH)));
    a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || start)
      pop_hot[j] |-> (cnt[j] != '0));
  end

endmodule

// cmp_tree: d-way comparator tree, finds the largest (or smallest) of d values.
//
// Used by the candidate selection module to pick, in a single cycle, the column
// whose oldest component-multiplication result is the largest (max side) or
// the smallest (min side). Only entries with valid set take part. The tree has
// log2(d) levels of two-input compare-and-select nodes; on equal values the
// lower column index wins. `found` is low when no entry is valid.
// Purely combinational.
module cmp_tree #(
  parameter int D      = 64,
  parameter int W      = 18,
  parameter int RIDW   = 9,
  parameter bit IS_MIN = 1'b0,
  localparam int IW = (D > 1) ? $clog2(D) : 1
) (
  input  logic signed [W-1:0] val   [D],
  input  logic [RIDW-1:0]     rid   [D],
  input  logic [D-1:0]        valid,
  output logic                found,
  output logic [IW-1:0]       idx,
  output logic signed [W-1:0] best,
  output logic [RIDW-1:0]     best_rid
);

  localparam int LV = $clog2(D);
  localparam int P  = 1 << LV;

  typedef struct packed {
    logic                v;
    logic [IW-1:0]       i;
    logic signed [W-1:0] x;
    logic [RIDW-1:0]     r;
  } node_t;

  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    node_t nd [P >> l];
    if (l == 0) begin : g_leaf
      for (genvar k = 0; k < P; k++) begin : g_in
        if (k < D) begin : g_real
          assign nd[k] = '{v: valid[k], i: IW'(k), x: val[k], r: rid[k]};
        end else begin : g_pad
          assign nd[k] = '0;
        end
      end
    end else begin : g_cmp
      for (genvar k = 0; k < (P >> l); k++) begin : g_node
        node_t a, b;
        logic  take_a;
        assign a      = g_lvl[l-1].nd[2*k];
        assign b      = g_lvl[l-1].nd[2*k+1];
        assign take_a = a.v && (!b.v || (IS_MIN ? (a.x <= b.x) : (a.x >= b.x)));
        assign nd[k]  = take_a ? a : b;
      end
    end
  end

  node_t root;
  assign root = g_lvl[LV].nd[0];

  assign found    = root.v;
  assign idx      = root.i;
  assign best     = root.x;
  assign best_rid = root.r;

endmodule

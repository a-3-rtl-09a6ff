// dot_product: Module 1 of the attention pipeline.
//
// For each row to be scored, the whole key row (d elements) is read from the
// key SRAM, multiplied element by element with the query by d multipliers and
// summed by a d-way adder tree. Each result is written, with its row ID, to the
// next free entry of the dot-product register file, and the running maximum of
// all results is kept for the exponent stage (which subtracts it before exp).
// One row enters per cycle.
//
// Rows: in base mode (use_list = 0) rows 0..count-1 are scored in order; in
// approximate mode (use_list = 1) the row IDs come from the candidate list
// written by the candidate selection module, entries 0..count-1.
//
// Timing (start at cycle 0, row k issued at cycle k):
//   cycle k     candidate list read (combinational), key SRAM read issued
//   cycle k+1   key row available, d products registered
//   cycle k+2   adder tree result registered
//   cycle k+3   register file write, max update
// done pulses at cycle count+3 (cycle 3 when count = 0); max_dp and
// out_count are valid from then on. A new start may follow done.
// Widths: products 2*DATA_W bits, sums DP_W = PROD_W + log2(d) bits, both
// with 2f fraction bits, so nothing overflows or rounds.
module dot_product
  import a3_pkg::*;
#(
  parameter int N = N_ROWS,
  parameter int D = D_DIM,
  localparam int RW  = $clog2(N),
  localparam int CW  = $clog2(N + 1),
  localparam int DPW = PROD_W + $clog2(D)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [CW-1:0]         count,
  input  logic                  use_list,
  input  elem_t                 query [D],
  // candidate list (read port)
  output logic [RW-1:0]         list_addr,
  input  logic [RW-1:0]         list_rid,
  // key SRAM (read port)
  output logic                  key_rd_en,
  output logic [RW-1:0]         key_rd_addr,
  input  elem_t                 key_row [D],
  // dot-product register file (write port): {row ID, dot product}
  output logic                  dp_wr_en,
  output logic [RW-1:0]         dp_wr_addr,
  output logic [RW+DPW-1:0]     dp_wr_data,
  // results
  output logic signed [DPW-1:0] max_dp,
  output logic [CW-1:0]         out_count,
  output logic                  done
);

  logic          busy;
  logic [CW-1:0] idx, cnt_q;
  elem_t         q_reg [D];

  // issue stage
  logic issue;
  logic use_list_q;
  assign issue       = busy && (idx < cnt_q);
  assign list_addr   = RW'(idx);
  assign key_rd_en   = issue;
  assign key_rd_addr = use_list_q ? list_rid : RW'(idx);

  // stage 1: key row arrives, multiply
  logic          v1;
  logic [RW-1:0] rid1;
  // stage 2: products registered
  logic          v2;
  logic [RW-1:0] rid2;
  prod_t         prod2 [D];
  // stage 3: sum registered
  logic                  v3;
  logic [RW-1:0]         rid3;
  logic signed [DPW-1:0] sum3;
  logic [CW-1:0]         wr_idx;

  logic signed [DPW-1:0] tree_sum;
  always_comb begin
    tree_sum = '0;
    for (int j = 0; j < D; j++) tree_sum = tree_sum + DPW'(prod2[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; cnt_q <= '0; use_list_q <= 1'b0;
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; wr_idx <= '0;
      done <= 1'b0; out_count <= '0;
      max_dp <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy       <= 1'b1;
        idx        <= '0;
        cnt_q      <= count;
        use_list_q <= use_list;
        wr_idx     <= '0;
        max_dp     <= {1'b1, {(DPW-1){1'b0}}};   // most negative value
      end else if (busy) begin
        if (issue) idx <= idx + 1'b1;
        v1 <= issue;
        v2 <= v1;
        v3 <= v2;
        if (v3) begin
          wr_idx <= wr_idx + 1'b1;
          if (sum3 > max_dp) max_dp <= sum3;
        end
        // finished when every issued row has been written
        if (!issue && !v1 && !v2 && !v3) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          out_count <= cnt_q;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) q_reg <= query;
    rid1 <= key_rd_addr;
    rid2 <= rid1;
    for (int j = 0; j < D; j++) prod2[j] <= PROD_W'(key_row[j]) * PROD_W'(q_reg[j]);
    rid3 <= rid2;
    sum3 <= tree_sum;
  end

  assign dp_wr_en   = busy && v3;
  assign dp_wr_addr = RW'(wr_idx);
  assign dp_wr_data = {rid3, sum3};

endmodule

// sorted_key_sram: the preprocessed (column-sorted) key matrix.
//
// Column j holds the n values of key column j in ascending order, each with the
// row ID it came from in the original key matrix (the sortedKey[][] structure).
// The candidate selection module walks every column from both ends at once:
// the max_ptr side and the min_ptr side each have a read port into every column.
// During initialization all columns are read in the same cycle; in steady state
// one column per side is read.
//
// Interface: the host writes one sorted row (entry wr_addr of every column) per
// write. Per column j, port a (max side) and port b (min side) read entry
// rd_addr_a[j] / rd_addr_b[j] when rd_en_a[j] / rd_en_b[j] is set.
// Timing: synchronous read, data valid the following cycle.
// Entry format: {value (DATA_W bits), row ID (log2 n bits)}. Sorting is done
// before loading, off the accelerator.
module sorted_key_sram
  import a3_pkg::*;
#(
  parameter int N = N_ROWS,
  parameter int D = D_DIM
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_addr,
  input  elem_t                wr_val [D],
  input  logic [$clog2(N)-1:0] wr_rid [D],
  input  logic [D-1:0]         rd_en_a,
  input  logic [$clog2(N)-1:0] rd_addr_a [D],
  output elem_t                rd_val_a [D],
  output logic [$clog2(N)-1:0] rd_rid_a [D],
  input  logic [D-1:0]         rd_en_b,
  input  logic [$clog2(N)-1:0] rd_addr_b [D],
  output elem_t                rd_val_b [D],
  output logic [$clog2(N)-1:0] rd_rid_b [D]
);

  localparam int RW = $clog2(N);
  localparam int EW = DATA_W + RW;

  for (genvar j = 0; j < D; j++) begin : g_col
    logic [EW-1:0] col [N];
    logic [EW-1:0] word_a, word_b;
    always_ff @(posedge clk) begin
      if (wr_en) col[wr_addr] <= {wr_val[j], wr_rid[j]};
      if (rd_en_a[j]) word_a <= col[rd_addr_a[j]];
      if (rd_en_b[j]) word_b <= col[rd_addr_b[j]];
    end
    assign rd_val_a[j] = elem_t'(word_a[EW-1:RW]);
    assign rd_rid_a[j] = word_a[RW-1:0];
    assign rd_val_b[j] = elem_t'(word_b[EW-1:RW]);
    assign rd_rid_b[j] = word_b[RW-1:0];
  end

endmodule

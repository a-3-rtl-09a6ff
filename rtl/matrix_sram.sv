// matrix_sram: row-wide SRAM for the key matrix or the value matrix.
//
// Holds n rows of d elements. One whole row (d elements) is read per cycle,
// which is what the dot-product module (key matrix) and the output computation
// module (value matrix) consume. The host fills the matrix before any query
// arrives, one row per write.
//
// Interface: wr_en/wr_addr/wr_row write one row; rd_en/rd_addr read one row.
// Timing: synchronous read, rd_row is valid the cycle after rd_en and holds its
// value until the next read. A single-port macro would serve here; two ports are
// kept so that loading and reading are independent in simulation.
module matrix_sram
  import a3_pkg::*;
#(
  parameter int N = N_ROWS,
  parameter int D = D_DIM
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_addr,
  input  elem_t                wr_row [D],
  input  logic                 rd_en,
  input  logic [$clog2(N)-1:0] rd_addr,
  output elem_t                rd_row [D]
);

  logic [D*DATA_W-1:0] mem [N];
  logic [D*DATA_W-1:0] wr_word, rd_word;

  always_comb begin
    for (int j = 0; j < D; j++) wr_word[j*DATA_W +: DATA_W] = wr_row[j];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_word;
    if (rd_en) rd_word <= mem[rd_addr];
  end

  always_comb begin
    for (int j = 0; j < D; j++) rd_row[j] = elem_t'(rd_word[j*DATA_W +: DATA_W]);
  end

endmodule

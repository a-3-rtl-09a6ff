// pingpong_regfile: register file between two pipeline stages.
//
// The stages of the accelerator work on different queries at the same time:
// while the exponent stage reads the dot products of query q, the dot-product
// stage already writes those of query q+1. The register file therefore has two
// banks. The writer uses bank `wr_bank`, the reader bank `rd_bank`; the
// sequencer swaps them when all stages hand their query on. The two banks are
// this design's choice: the source draws a single n-entry register file.
//
// Interface: one write port; RP combinational read ports on the read bank
// (the exponent stage reads a window of 16 consecutive entries per cycle).
// Timing: write at the clock edge, reads are combinational.
module pingpong_regfile #(
  parameter int W     = 8,
  parameter int DEPTH = 320,
  parameter int RP    = 1
) (
  input  logic                     clk,
  input  logic                     wr_bank,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_bank,
  input  logic [$clog2(DEPTH)-1:0] rd_addr [RP],
  output logic [W-1:0]             rd_data [RP]
);

  logic [W-1:0] bank0 [DEPTH];
  logic [W-1:0] bank1 [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) bank0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) bank1[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int p = 0; p < RP; p++)
      rd_data[p] = rd_bank ? bank1[rd_addr[p]] : bank0[rd_addr[p]];
  end

endmodule

// output_computation: Module 3 of the attention pipeline.
//
// For each of the K selected rows, in the order they were written to the score
// register file:
//   weight    = score / expsum                     (softmax_divider, 7 cycles)
//   output[j] += weight * value[row][j]  for all j  (d multipliers, d adders)
// The value row is read from the value SRAM by the row ID stored with the
// score and delayed to meet the weight. The d accumulators have 3f fraction
// bits (2f from the weight, f from the value) and i + log2(n) integer bits.
//
// Timing: start at cycle 0; entry k is read at cycle k; its weight leaves the
// divider at cycle k+7, the products are registered at k+8 and accumulated at
// k+9. done pulses after the last accumulation, so the stage takes K + 9
// cycles beyond the start cycle: 7 for the division, 2 for multiply and
// accumulate, as in the source's n + 9. `outputs` is valid from done until the
// next start.
module output_computation
  import a3_pkg::*;
#(
  parameter int N = N_ROWS,
  parameter int D = D_DIM,
  localparam int RW  = $clog2(N),
  localparam int CW  = $clog2(N + 1),
  localparam int ESW = SCORE_W + $clog2(N),
  localparam int OW  = 1 + I_BITS + $clog2(N) + 3 * F_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [CW-1:0]         count,
  input  logic [ESW-1:0]        expsum,
  // score register file (read port): {row ID, score}
  output logic [RW-1:0]         sc_rd_addr,
  input  logic [RW+SCORE_W-1:0] sc_rd_data,
  // value SRAM (read port)
  output logic                  val_rd_en,
  output logic [RW-1:0]         val_rd_addr,
  input  elem_t                 val_row [D],
  // results
  output logic signed [OW-1:0]  outputs [D],
  output logic                  done
);

  localparam int PW = WEIGHT_W + DATA_W + 1;   // signed weight * value

  logic          busy;
  logic [CW-1:0] idx, cnt_q;
  logic [ESW-1:0] es_q;
  logic          issue;
  logic [DIV_STAGES-2:0] inflight;     // rows still inside the divider
  logic          u_div_busy;

  assign issue       = busy && (idx < cnt_q);
  assign sc_rd_addr  = RW'(idx);
  assign val_rd_en   = issue;
  assign val_rd_addr = sc_rd_data[RW+SCORE_W-1:SCORE_W];

  // divider
  logic                wv;
  logic [WEIGHT_W-1:0] weight;
  softmax_divider #(.DEN_W(ESW)) u_div (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (issue),
    .score     (sc_rd_data[SCORE_W-1:0]),
    .expsum    (es_q),
    .out_valid (wv),
    .weight    (weight)
  );

  // value rows: SRAM gives the row at k+1, delay it to k+7
  localparam int VDLY = DIV_STAGES - 1;
  elem_t vpipe [VDLY][D];
  always_ff @(posedge clk) begin
    vpipe[0] <= val_row;
    for (int s = 1; s < VDLY; s++) vpipe[s] <= vpipe[s-1];
  end

  // multiply (registered at k+8), accumulate (at k+9)
  logic                   mv;
  logic signed [PW-1:0]   prod [D];
  always_ff @(posedge clk) begin
    for (int j = 0; j < D; j++)
      prod[j] <= $signed({1'b0, weight}) * PW'(vpipe[VDLY-1][j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; cnt_q <= '0; es_q <= '0; mv <= 1'b0; done <= 1'b0;
      for (int j = 0; j < D; j++) outputs[j] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        idx   <= '0;
        cnt_q <= count;
        es_q  <= expsum;
        mv    <= 1'b0;
        for (int j = 0; j < D; j++) outputs[j] <= '0;
      end else if (busy) begin
        if (issue) idx <= idx + 1'b1;
        mv <= wv;
        if (mv)
          for (int j = 0; j < D; j++) outputs[j] <= outputs[j] + OW'(prod[j]);
        if (idx == cnt_q && !wv && !u_div_busy && (mv || cnt_q == 0)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= {inflight[DIV_STAGES-3:0], issue};
  end
  assign u_div_busy = |inflight || issue;

endmodule

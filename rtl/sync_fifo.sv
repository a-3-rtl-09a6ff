// sync_fifo: query queue and output queue.
//
// The host pushes query vectors into one instance; the pipeline pushes finished
// output vectors into another, from which the host pops. A plain synchronous
// FIFO with a first-word-fall-through output: rd_data shows the oldest entry
// whenever empty is low, and rd_en removes it at the clock edge. Pushing when
// full or popping when empty is a protocol error (asserted). The queue depth is
// this design's choice; the queues themselves are only named in the source.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty   = (count == 0);
  assign full    = (count == CW'(DEPTH));
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= inc(wr_ptr);
      if (rd_en) rd_ptr <= inc(rd_ptr);
      count <= count + CW'(wr_en) - CW'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule

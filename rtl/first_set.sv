// first_set: index of the lowest set bit of a small window.
//
// Both scans of the accelerator (the greedy-score scan that emits candidate
// rows, and the post-scoring selector) look at 16 consecutive entries per
// cycle and pick the first one that qualifies. This is that priority encoder.
// Purely combinational.
module first_set #(
  parameter int W = 16
) (
  input  logic [W-1:0]         flags,
  output logic                 found,
  output logic [$clog2(W)-1:0] idx
);

  always_comb begin
    found = 1'b0;
    idx   = '0;
    for (int k = W - 1; k >= 0; k--) begin
      if (flags[k]) begin
        found = 1'b1;
        idx   = ($clog2(W))'(k);
      end
    end
  end

endmodule

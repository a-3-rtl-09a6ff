// tb_post_scoring_select: random windows of 16 dot products; checks the keep
// mask (max - dp <= t, or every valid entry when disabled) and the first kept
// index.
module tb_post_scoring_select;
  import a3_pkg::*;
  localparam int DPW = 24, LANES = 16;
  int checks = 0, failures = 0;

  logic enable;
  logic signed [DPW-1:0] max_dp;
  logic [DPW:0] t;
  logic signed [DPW-1:0] dp [LANES];
  logic [LANES-1:0] valid, keep;
  logic found;
  logic [3:0] idx;

  post_scoring_select #(.DPW(DPW), .LANES(LANES)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int mx, tv, first;
      logic [LANES-1:0] want;
      mx = int'($urandom_range(2000000)) - 1000000;
      tv = int'($urandom_range(3000));
      enable = (i % 4 != 0);
      max_dp = DPW'(mx);
      t = (DPW+1)'(tv);
      valid = LANES'($urandom);
      first = -1;
      for (int k = 0; k < LANES; k++) begin
        int v;
        v = mx - int'($urandom_range((i % 2) ? 4000 : 400000));
        dp[k] = DPW'(v);
        want[k] = valid[k] && (!enable || (mx - v <= tv));
        if (want[k] && first < 0) first = k;
      end
      #1;
      checks += 2;
      if (keep != want) failures++;
      if (found != (first >= 0) || (first >= 0 && int'(idx) != first)) failures++;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

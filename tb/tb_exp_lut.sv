// tb_exp_lut: sweeps arguments of the exponent table pair and compares the
// result with exp(-x) computed in floating point (error at most 2/256) and
// with the exact two-table rounding rule; checks the one-cycle latency.
module tb_exp_lut;
  import a3_pkg::*;
  import a3_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, big = 0, out_valid;
  logic [EXP_IN_W-1:0] x = '0;
  logic [SCORE_W-1:0] score;

  exp_lut dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int i = 0; i < 1500; i++) begin
      int xv;
      real want;
      xv = (i < 512) ? i : int'($urandom_range(65535));
      if (i == 600) xv = 65535;
      x <= 16'(xv); in_valid <= 1; big <= (i == 700);
      @(posedge clk);
      in_valid <= 0;
      #1;
      want = (i == 700) ? 0.0 : $exp(-real'(xv) / 256.0) * 256.0;
      checks += 3;
      if (!out_valid) failures++;
      if ((real'(score) - want) > 2.0 || (want - real'(score)) > 2.0) begin
        failures++;
        $display("x=%0d got %0d want %f", xv, score, want);
      end
      if (int'(score) != ((i == 700) ? 0 : exp_score(xv))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

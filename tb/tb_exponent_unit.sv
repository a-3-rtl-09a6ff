// tb_exponent_unit: feeds random dot-product register files (a few rows close
// to the maximum, the rest far below) and checks, in base mode and with
// post-scoring selection enabled, which rows are kept, each score
// (exp(dp - max) on the two-table scheme), their order, the sum of exponents,
// the kept count and the base-mode latency of count + 3 cycles.
module tb_exponent_unit;
  import a3_pkg::*;
  import a3_ref_pkg::*;
  localparam int N = 40, D = 8, RW = $clog2(N), CW = $clog2(N + 1);
  localparam int DPW = PROD_W + $clog2(D), ESW = SCORE_W + $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0, approx = 0;
  logic [CW-1:0] count = '0;
  logic signed [DPW-1:0] max_dp = '0;
  logic [DPW:0] threshold = '0;
  logic [RW-1:0] dp_rd_addr [SCAN_W];
  logic [RW+DPW-1:0] dp_rd_data [SCAN_W];
  logic sc_wr_en;
  logic [RW-1:0] sc_wr_addr;
  logic [RW+SCORE_W-1:0] sc_wr_data;
  logic [CW-1:0] out_count;
  logic [ESW-1:0] expsum;
  logic done;

  exponent_unit #(.N(N), .D(D)) dut (.*);

  int dpv [N], rid [N];
  int got_sc [N], got_rid [N];
  int start_cyc, done_cyc;

  for (genvar k = 0; k < SCAN_W; k++) begin : g_rd
    assign dp_rd_data[k] = {RW'(rid[dp_rd_addr[k]]), DPW'(dpv[dp_rd_addr[k]])};
  end

  always @(posedge clk) begin
    if (sc_wr_en) begin
      got_sc[sc_wr_addr]  = int'(sc_wr_data[SCORE_W-1:0]);
      got_rid[sc_wr_addr] = int'(sc_wr_data[RW+SCORE_W-1:SCORE_W]);
    end
    if (start) start_cyc = cyc;
    if (done) done_cyc = cyc;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dropped = 0;

  task automatic run(input int cnt, input bit ap, input int t);
    int mx, k, es;
    mx = 0;
    for (int i = 0; i < cnt; i++) begin
      // mostly far from the top, some within a few units
      dpv[i] = ($urandom_range(3) == 0) ? 200000 - int'($urandom_range(1500))
                                        : int'($urandom_range(200000)) - 100000;
      rid[i] = int'($urandom_range(N - 1));
      if (i == 0 || dpv[i] > mx) mx = dpv[i];
    end
    @(negedge clk);
    start = 1; count = CW'(cnt); approx = ap; threshold = (DPW+1)'(t); max_dp = DPW'(mx);
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(posedge clk); #1;
    k = 0; es = 0;
    for (int i = 0; i < cnt; i++) begin
      if (!ap || mx - dpv[i] <= t) begin
        int s;
        s = exp_score(mx - dpv[i]);
        es += s;
        checks += 2;
        if (got_sc[k] != s) begin failures++; $display("score %0d: %0d want %0d", k, got_sc[k], s); end
        if (got_rid[k] != rid[i]) failures++;
        k++;
      end else dropped++;
    end
    checks += 2;
    if (int'(out_count) != k) begin failures++; $display("K %0d want %0d", out_count, k); end
    if (int'(expsum) != es) begin failures++; $display("expsum %0d want %0d", expsum, es); end
    if (!ap) begin
      checks++;
      if (done_cyc - start_cyc != cnt + 3) begin failures++; $display("latency %0d", done_cyc - start_cyc); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(N, 0, 0);
    run(N, 1, 256 * 3);       // keep rows with weight >= exp(-3) of the top one (T ~ 5%)
    run(23, 1, 590);          // T ~ 10%
    run(17, 0, 0);
    run(1, 1, 0);
    checks++;
    if (dropped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_candidate_selection: random key matrices and queries; the key columns are
// sorted here, loaded into a behavioural two-port sorted-key SRAM, and the
// candidate list produced by the module is compared, entry by entry, with a
// software run of the greedy search (max side, min side, skip heuristic).
// Also checked: the candidate count, the number of skipped min-side
// iterations, and the latency M + s + 8 cycles, where s is the number of scan
// steps (one per emitted row or per 16 rows passed over).
module tb_candidate_selection;
  import a3_pkg::*;
  import a3_ref_pkg::*;
  localparam int N = 24, D = 6, RW = $clog2(N), CW = $clog2(N + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  elem_t query [D];
  logic [CW-1:0] n_rows = '0;
  logic [15:0] m_iter = '0;
  logic [D-1:0] rd_en_a, rd_en_b;
  logic [RW-1:0] rd_addr_a [D], rd_addr_b [D], rd_rid_a [D], rd_rid_b [D];
  elem_t rd_val_a [D], rd_val_b [D];
  logic cand_wr_en;
  logic [RW-1:0] cand_wr_addr, cand_wr_rid;
  logic [CW-1:0] cand_count;
  logic done, min_skip;

  candidate_selection #(.N(N), .D(D)) dut (.*);

  int key [], sval [], srid [], qv [];
  int got [N];
  int start_cyc, done_cyc, skip_cnt, total_skips = 0, total_pruned = 0;

  always @(posedge clk) begin
    for (int j = 0; j < D; j++) begin
      if (rd_en_a[j]) begin
        rd_val_a[j] <= elem_t'(sval[rd_addr_a[j]*D + j]);
        rd_rid_a[j] <= RW'(srid[rd_addr_a[j]*D + j]);
      end
      if (rd_en_b[j]) begin
        rd_val_b[j] <= elem_t'(sval[rd_addr_b[j]*D + j]);
        rd_rid_b[j] <= RW'(srid[rd_addr_b[j]*D + j]);
      end
    end
    if (cand_wr_en) got[cand_wr_addr] = int'(cand_wr_rid);
    if (min_skip) skip_cnt++;
    if (start) start_cyc = cyc;
    if (done) done_cyc = cyc;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int m, input int bias);
    int cands [$];
    int skips, steps, pos;
    bit flag [];
    key = new[N * D];
    qv  = new[D];
    for (int i = 0; i < N * D; i++) key[i] = int'($urandom_range(510)) - 255;
    for (int j = 0; j < D; j++) qv[j] = int'($urandom_range(510)) - 255 + bias;
    for (int j = 0; j < D; j++) begin
      if (qv[j] > 255) qv[j] = 255;
      if (qv[j] < -255) qv[j] = -255;
    end
    sort_columns(key, n, D, sval, srid);
    // pad rows beyond n (never read)
    sval = new[N * D](sval);
    srid = new[N * D](srid);
    greedy(sval, srid, qv, n, D, m, cands, skips);
    @(negedge clk);
    for (int j = 0; j < D; j++) query[j] = elem_t'(qv[j]);
    n_rows = CW'(n); m_iter = 16'(m); start = 1; skip_cnt = 0;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(posedge clk); #1;
    checks += 2;
    if (int'(cand_count) != cands.size()) begin
      failures++; $display("n=%0d m=%0d: C=%0d want %0d", n, m, cand_count, cands.size());
    end
    if (skip_cnt != skips) begin failures++; $display("skips %0d want %0d", skip_cnt, skips); end
    foreach (cands[i]) begin
      checks++;
      if (i < N && got[i] != cands[i]) failures++;
    end
    // expected scan steps
    flag = new[n];
    foreach (flag[r]) flag[r] = 0;
    foreach (cands[i]) flag[cands[i]] = 1;
    steps = 0; pos = 0;
    while (pos < n) begin
      int f;
      f = -1;
      for (int k = 0; k < SCAN_W && pos + k < n; k++) if (f < 0 && flag[pos + k]) f = k;
      steps++;
      pos = (f >= 0) ? pos + f + 1 : pos + SCAN_W;
    end
    checks++;
    if (done_cyc - start_cyc != m + steps + 8) begin
      failures++; $display("latency %0d want %0d", done_cyc - start_cyc, m + steps + 8);
    end
    total_skips += skip_cnt;
    if (cands.size() < n) total_pruned++;
  endtask

  initial begin
    foreach (query[j]) query[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(N, N / 2, 0);
    run(N, N / 8, 0);
    run(N, N, 0);
    run(N, 3 * N * D, 0);      // runs every column dry
    run(17, 9, 0);
    run(3, 40, 0);             // fewer rows than queue slots
    run(N, 0, 0);
    for (int i = 0; i < 10; i++) run(N, 1 + int'($urandom_range(2 * N)), (i % 2) ? 150 : -150);
    checks += 2;
    if (total_skips == 0) begin failures++; $display("min-side skip never happened"); end
    if (total_pruned == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

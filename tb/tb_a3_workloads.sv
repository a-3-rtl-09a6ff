// tb_a3_workloads: the accelerator at its default size (n = 320, d = 64, no
// parameter overridden) running the smaller attention sizes of the evaluated
// workloads through cfg_n: a memory network on bAbI (n = 20 on average, 50 at
// most) and a key-value memory network on WikiMovies (n = 186 on average),
// all with d = 64. The n = 320 case (BERT on SQuAD) is covered by tb_a3_full.
//
// For each size the host loads n random key and value rows and the key matrix
// sorted column by column (ranks 0..n-1 only), then runs three base-mode
// queries, three approximate queries with the conservative setting (M = n/2,
// T = 5%, t = 767) and three with the aggressive setting (M = n/8, T = 10%,
// t = 589). Every output vector is compared bit-exactly with the software model
// in a3_ref_pkg. In base mode the three queries are queued back to back, so the
// second and third results must leave exactly n + 9 cycles after the previous
// one. The test fails if the mode never switched, or if candidate selection or
// post-scoring selection never removed a row.
// The data and the sizes used here are this testbench's; the matrices are
// random, not taken from trained networks.
module tb_a3_workloads;
  import a3_pkg::*;
  import a3_ref_pkg::*;
  localparam int N = N_ROWS, D = D_DIM;
  localparam int RW = $clog2(N), CW = $clog2(N + 1);
  localparam int DPW = PROD_W + $clog2(D);
  localparam int OW = 1 + I_BITS + $clog2(N) + 3 * F_BITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cfg_approx = 0;
  logic [CW-1:0] cfg_n = CW'(N);
  logic [15:0] cfg_m = '0;
  logic [DPW:0] cfg_t = '0;
  logic key_wr_en = 0, val_wr_en = 0, skey_wr_en = 0;
  logic [RW-1:0] key_wr_addr = '0, val_wr_addr = '0, skey_wr_addr = '0;
  elem_t key_wr_row [D], val_wr_row [D], skey_wr_val [D];
  logic [RW-1:0] skey_wr_rid [D];
  logic q_valid = 0, q_ready;
  elem_t q_data [D];
  logic o_valid, o_ready = 1;
  logic signed [OW-1:0] o_data [D];
  logic ev_advance, ev_stall, ev_mode_switch, ev_min_skip;

  a3_top dut (.*);

  int key [], val [], sval [], srid [];
  int n_cur = 0;

  longint exp_out [$][];
  int     n_switch = 0, n_pruned = 0, n_dropped = 0, n_period_ok = 0;
  int     last_out = -1;
  bit     base_stream = 0;

  always @(posedge clk) begin
    if (rst_n && ev_mode_switch) n_switch++;
    if (rst_n && o_valid && o_ready) begin
      if (base_stream && last_out >= 0) begin
        checks++;
        if (cyc - last_out == n_cur + 9) n_period_ok++;
        else begin
          failures++;
          $display("n=%0d: base output spacing %0d, want %0d", n_cur, cyc - last_out, n_cur + 9);
        end
      end
      last_out = cyc;
      if (exp_out.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        longint w [];
        int bad;
        w = exp_out.pop_front();
        bad = 0;
        for (int j = 0; j < D; j++) begin
          checks++;
          if (longint'(o_data[j]) != w[j]) begin
            failures++;
            if (bad++ < 3) $display("n=%0d elem %0d: %0d want %0d", n_cur, j, o_data[j], w[j]);
          end
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs pending", exp_out.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // queue one query; the expected output is computed for the mode given
  task automatic send(input bit approx, input int m, input longint t);
    int qv [];
    int rows [$];
    int skips, kc;
    longint o [];
    longint mx;
    qv = new[D];
    for (int j = 0; j < D; j++) qv[j] = int'($urandom_range(510)) - 255;
    if (approx) begin
      greedy(sval, srid, qv, n_cur, D, m, rows, skips);
      if (rows.size() < n_cur) n_pruned++;
    end else
      for (int r = 0; r < n_cur; r++) rows.push_back(r);
    attention(key, val, qv, n_cur, D, rows, approx, t, o, kc, mx);
    if (kc < rows.size()) n_dropped++;
    exp_out.push_back(o);
    @(negedge clk);
    for (int j = 0; j < D; j++) q_data[j] = elem_t'(qv[j]);
    q_valid = 1;
    @(posedge clk);
    while (!q_ready) @(posedge clk);
    @(negedge clk);
    q_valid = 0;
  endtask

  task automatic drain();
    while (exp_out.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  // load an n-row workload (pipeline must be empty)
  task automatic load(input int n);
    n_cur = n;
    key = new[n * D];
    val = new[n * D];
    for (int i = 0; i < n * D; i++) begin
      key[i] = int'($urandom_range(510)) - 255;
      val[i] = int'($urandom_range(510)) - 255;
    end
    sort_columns(key, n, D, sval, srid);
    for (int r = 0; r < n; r++) begin
      key_wr_en = 1; val_wr_en = 1; skey_wr_en = 1;
      key_wr_addr = RW'(r); val_wr_addr = RW'(r); skey_wr_addr = RW'(r);
      for (int j = 0; j < D; j++) begin
        key_wr_row[j]  = elem_t'(key[r*D + j]);
        val_wr_row[j]  = elem_t'(val[r*D + j]);
        skey_wr_val[j] = elem_t'(sval[r*D + j]);
        skey_wr_rid[j] = RW'(srid[r*D + j]);
      end
      @(negedge clk);
    end
    key_wr_en = 0; val_wr_en = 0; skey_wr_en = 0;
    cfg_n = CW'(n);
  endtask

  int sizes [3] = '{20, 50, 186};

  initial begin
    foreach (q_data[j]) q_data[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (sizes[s]) begin
      load(sizes[s]);
      // base mode: three queries back to back
      cfg_approx = 0;
      base_stream = 1; last_out = -1;
      for (int i = 0; i < 3; i++) send(0, 0, 0);
      drain();
      base_stream = 0;
      // conservative approximation
      cfg_approx = 1; cfg_m = 16'(n_cur / 2); cfg_t = (DPW+1)'(767);
      for (int i = 0; i < 3; i++) send(1, n_cur / 2, 767);
      drain();
      // aggressive approximation
      cfg_m = 16'((n_cur + 7) / 8); cfg_t = (DPW+1)'(589);
      for (int i = 0; i < 3; i++) send(1, (n_cur + 7) / 8, 589);
      drain();
    end

    checks += 4;
    if (n_switch < 5)      begin failures++; $display("mode switches: %0d", n_switch); end
    if (n_pruned == 0)     begin failures++; $display("candidate selection pruned nothing"); end
    if (n_dropped == 0)    begin failures++; $display("post-scoring dropped nothing"); end
    if (n_period_ok < 6)   begin failures++; $display("base spacing ok only %0d times", n_period_ok); end
    $display("switches=%0d pruned=%0d dropped=%0d period_ok=%0d", n_switch, n_pruned, n_dropped, n_period_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

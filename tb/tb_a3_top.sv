// tb_a3_top: end-to-end test of the attention accelerator at a reduced size (n = 24, d = 8).
//
// Loads a random key matrix, value matrix and the column-sorted key matrix,
// then runs queries through the whole pipeline and compares every output
// vector with a software model (a3_ref_pkg) of the same fixed-point algorithm:
// full softmax attention in base mode; greedy candidate search, post-scoring
// selection and softmax over the kept rows in approximate mode.
// Sequence: a stream of base-mode queries (pipelined), the output port held
// back so the output queue fills and the pipeline stalls, a switch to
// approximate mode while base queries are still in flight, approximate queries
// with a conservative (M = n/2, T = 5%) and an aggressive (M = n/8, T = 10%)
// setting, and a switch back to base mode.
// Counted, and required to happen at least once: pipeline advances, three or
// more queries in flight, output-queue stalls, mode switches, skipped min-side
// iterations, rows pruned by candidate selection, rows dropped by post-scoring
// selection. In base mode the advance period must be n + 9 cycles once the
// output stage is busy, and never longer without a stall.
module tb_a3_top;
  import a3_pkg::*;
  import a3_ref_pkg::*;
  localparam int N = 24, D = 8;
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

  a3_top #(.N(N), .D(D)) dut (.*);

  int key [], val [], sval [], srid [];

  // expected outputs, in query order
  longint exp_out [$][];
  int     n_adv = 0, n_stall = 0, n_switch = 0, n_skip = 0, n_pruned = 0, n_dropped = 0;
  int     n_in = 0, n_out = 0, n_deep = 0, last_adv = -1, n_period_ok = 0, bad_period = 0;
  bit     base_stream = 0, stalled = 0;

  always @(posedge clk) begin
    if (!rst_n) ;
    else if (ev_advance) begin
      n_adv++;
      // period between advances with the pipeline full and no stall
      if (base_stream && last_adv >= 0 && n_in - n_out >= 4 && !stalled) begin
        if (cyc - last_adv == N + 9) n_period_ok++;
        else if (cyc - last_adv > N + 9) begin
          bad_period++;
          $display("base period %0d cycles", cyc - last_adv);
        end
      end
      last_adv = cyc;
      stalled  = 0;
    end
    if (rst_n && ev_stall) begin
      n_stall++;
      stalled = 1;
    end
    if (rst_n && ev_mode_switch) n_switch++;
    if (rst_n && ev_min_skip) n_skip++;
    if (rst_n && q_valid && q_ready) n_in++;
    if (rst_n && n_in - n_out >= 3 && ev_advance) n_deep++;
    if (rst_n && o_valid && o_ready) begin
      n_out++;
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
            if (bad++ < 3) $display("output %0d elem %0d: %0d want %0d", n_out, j, o_data[j], w[j]);
          end
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs pending", exp_out.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // push one query; the expected output uses the mode given
  task automatic send(input bit approx, input int m, input longint t);
    int qv [];
    int rows [$];
    int skips, kc;
    longint o [];
    longint mx;
    qv = new[D];
    for (int j = 0; j < D; j++) qv[j] = int'($urandom_range(510)) - 255;
    if (approx) begin
      greedy(sval, srid, qv, N, D, m, rows, skips);
      if (rows.size() < N) n_pruned++;
    end else
      for (int r = 0; r < N; r++) rows.push_back(r);
    attention(key, val, qv, N, D, rows, approx, t, o, kc, mx);
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

  initial begin
    key = new[N * D];
    val = new[N * D];
    for (int i = 0; i < N * D; i++) begin
      key[i] = int'($urandom_range(510)) - 255;
      val[i] = int'($urandom_range(510)) - 255;
    end
    sort_columns(key, N, D, sval, srid);
    foreach (q_data[j]) q_data[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
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

    // base mode stream, output port blocked part of the time
    base_stream = 1;
    o_ready = 0;
    for (int i = 0; i < 8; i++) send(0, 0, 0);
    repeat ((8 + 3) * (N + 12)) @(negedge clk);
    o_ready = 1;
    // switch to approximate mode with base queries still in flight
    for (int i = 0; i < 2; i++) send(0, 0, 0);
    // flip the mode once the last base query has left the query queue
    while (n_in - n_out > 2) @(negedge clk);
    @(posedge ev_advance);
    @(negedge clk);
    base_stream = 0;
    cfg_approx = 1; cfg_m = 16'(N / 2); cfg_t = (DPW+1)'(767);   // t = ln(20): T = 5%
    for (int i = 0; i < 6; i++) send(1, N / 2, 767);
    drain();
    cfg_m = 16'((N + 7) / 8); cfg_t = (DPW+1)'(589);             // t = ln(10): T = 10%
    for (int i = 0; i < 6; i++) send(1, (N + 7) / 8, 589);
    drain();
    cfg_approx = 0;
    send(0, 0, 0);
    drain();

    checks += 9;
    if (n_adv == 0)      begin failures++; $display("no pipeline advance"); end
    if (n_deep == 0)     begin failures++; $display("never three queries in flight"); end
    if (n_stall == 0)    begin failures++; $display("no output-queue stall"); end
    if (n_switch < 2)    begin failures++; $display("mode switches: %0d", n_switch); end
    if (n_skip == 0)     begin failures++; $display("no min-side skip"); end
    if (n_pruned == 0)   begin failures++; $display("candidate selection pruned nothing"); end
    if (n_dropped == 0)  begin failures++; $display("post-scoring dropped nothing"); end
    if (n_period_ok == 0 || bad_period != 0) begin
      failures++; $display("base period: %0d ok, %0d other", n_period_ok, bad_period);
    end
    if (n_out != n_in) begin failures++; $display("%0d in, %0d out", n_in, n_out); end
    $display("advances=%0d deep=%0d stalls=%0d switches=%0d min_skips=%0d pruned=%0d dropped=%0d period_ok=%0d",
             n_adv, n_deep, n_stall, n_switch, n_skip, n_pruned, n_dropped, n_period_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_output_computation: random score register files and value matrices;
// checks each output element against sum(floor(256*score/expsum) * value)
// and that done comes count + 9 cycles after start (7 for the division,
// 2 for multiply and accumulate).
module tb_output_computation;
  import a3_pkg::*;
  import a3_ref_pkg::*;
  localparam int N = 20, D = 6, RW = $clog2(N), CW = $clog2(N + 1);
  localparam int ESW = SCORE_W + $clog2(N), OW = 1 + I_BITS + $clog2(N) + 3 * F_BITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  logic [CW-1:0] count = '0;
  logic [ESW-1:0] expsum = '0;
  logic [RW-1:0] sc_rd_addr;
  logic [RW+SCORE_W-1:0] sc_rd_data;
  logic val_rd_en;
  logic [RW-1:0] val_rd_addr;
  elem_t val_row [D];
  logic signed [OW-1:0] outputs [D];
  logic done;

  output_computation #(.N(N), .D(D)) dut (.*);

  int val [N][D];
  int sc [N], rid [N];
  int start_cyc, done_cyc;

  assign sc_rd_data = {RW'(rid[sc_rd_addr]), SCORE_W'(sc[sc_rd_addr])};
  always @(posedge clk) begin
    if (val_rd_en) for (int j = 0; j < D; j++) val_row[j] <= elem_t'(val[val_rd_addr][j]);
    if (start) start_cyc = cyc;
    if (done) done_cyc = cyc;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int cnt);
    int es;
    es = 0;
    for (int i = 0; i < cnt; i++) begin
      sc[i]  = (i == 0) ? 256 : int'($urandom_range(256));
      rid[i] = int'($urandom_range(N - 1));
      es += sc[i];
    end
    @(negedge clk);
    start = 1; count = CW'(cnt); expsum = ESW'(es);
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(posedge clk); #1;
    for (int j = 0; j < D; j++) begin
      longint want;
      want = 0;
      for (int i = 0; i < cnt; i++) want += longint'(weight_of(sc[i], es)) * val[rid[i]][j];
      checks++;
      if (longint'(outputs[j]) != want) begin failures++; $display("out %0d: %0d want %0d", j, outputs[j], want); end
    end
    checks++;
    if (cnt > 0 && done_cyc - start_cyc != cnt + 9) begin failures++; $display("latency %0d for %0d", done_cyc - start_cyc, cnt); end
  endtask

  initial begin
    for (int r = 0; r < N; r++) for (int j = 0; j < D; j++) val[r][j] = int'($urandom_range(510)) - 255;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(N);
    run(5);
    run(1);
    run(N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

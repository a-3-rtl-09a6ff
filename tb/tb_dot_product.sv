// tb_dot_product: scores all rows (base mode), a random candidate list
// (approximate mode) and an empty list against a behavioural key SRAM; checks
// every dot product and row ID written to the register file, the maximum, the
// count, and the latency: done comes count + 5 cycles after start
// (one row per cycle plus SRAM read, multiply, adder tree, write).
module tb_dot_product;
  import a3_pkg::*;
  localparam int N = 16, D = 8, RW = $clog2(N), CW = $clog2(N + 1);
  localparam int DPW = PROD_W + $clog2(D);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0, use_list = 0;
  logic [CW-1:0] count = '0;
  elem_t query [D];
  logic [RW-1:0] list_addr, list_rid;
  logic key_rd_en;
  logic [RW-1:0] key_rd_addr;
  elem_t key_row [D];
  logic dp_wr_en;
  logic [RW-1:0] dp_wr_addr;
  logic [RW+DPW-1:0] dp_wr_data;
  logic signed [DPW-1:0] max_dp;
  logic [CW-1:0] out_count;
  logic done;

  dot_product #(.N(N), .D(D)) dut (.*);

  int key [N][D];
  int list [N];
  int got_dp [N], got_rid [N];
  int start_cyc, done_cyc;

  assign list_rid = RW'(list[list_addr]);
  always @(posedge clk) begin
    if (key_rd_en) for (int j = 0; j < D; j++) key_row[j] <= elem_t'(key[key_rd_addr][j]);
    if (dp_wr_en) begin
      got_dp[dp_wr_addr]  = int'($signed(dp_wr_data[DPW-1:0]));
      got_rid[dp_wr_addr] = int'(dp_wr_data[RW+DPW-1:DPW]);
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

  task automatic run(input int cnt, input bit ul);
    int mx, lat;
    @(negedge clk);
    start = 1; count = CW'(cnt); use_list = ul;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(posedge clk); #1;
    lat = done_cyc - start_cyc;
    mx = 0;
    for (int i = 0; i < cnt; i++) begin
      int r, s;
      r = ul ? list[i] : i;
      s = 0;
      for (int j = 0; j < D; j++) s += key[r][j] * int'(query[j]);
      if (i == 0 || s > mx) mx = s;
      checks += 2;
      if (got_dp[i] != s) begin failures++; $display("entry %0d: dp %0d want %0d", i, got_dp[i], s); end
      if (got_rid[i] != r) failures++;
    end
    checks += 3;
    if (cnt > 0 && int'(max_dp) != mx) begin failures++; $display("max %0d want %0d", max_dp, mx); end
    if (int'(out_count) != cnt) failures++;
    if (lat != ((cnt > 0) ? cnt + 5 : 2)) begin failures++; $display("latency %0d for %0d rows", lat, cnt); end
  endtask

  initial begin
    foreach (query[j]) query[j] = '0;
    for (int r = 0; r < N; r++) for (int j = 0; j < D; j++) key[r][j] = int'($urandom_range(510)) - 255;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      for (int j = 0; j < D; j++) query[j] = elem_t'(int'($urandom_range(510)) - 255);
      for (int i = 0; i < N; i++) list[i] = int'($urandom_range(N - 1));
      case (t % 3)
        0: run(N, 0);
        1: run(7, 1);
        default: run(t == 5 ? 0 : 1, 1);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

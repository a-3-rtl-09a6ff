// tb_sorted_key_sram: loads a small sorted key matrix and reads both ports of
// every column at independent random addresses, checking value and row ID.
module tb_sorted_key_sram;
  import a3_pkg::*;
  localparam int N = 10, D = 4, RW = $clog2(N);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0;
  logic [RW-1:0] wr_addr = '0;
  elem_t wr_val [D];
  logic [RW-1:0] wr_rid [D];
  logic [D-1:0] rd_en_a = '0, rd_en_b = '0;
  logic [RW-1:0] rd_addr_a [D], rd_addr_b [D], rd_rid_a [D], rd_rid_b [D];
  elem_t rd_val_a [D], rd_val_b [D];
  int mv [N][D], mr [N][D];

  sorted_key_sram #(.N(N), .D(D)) dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (wr_val[j]) begin wr_val[j] = '0; wr_rid[j] = '0; rd_addr_a[j] = '0; rd_addr_b[j] = '0; end
    @(posedge clk);
    for (int r = 0; r < N; r++) begin
      wr_en <= 1; wr_addr <= RW'(r);
      for (int j = 0; j < D; j++) begin
        mv[r][j] = int'($urandom_range(510)) - 255;
        mr[r][j] = int'($urandom_range(N - 1));
        wr_val[j] <= elem_t'(mv[r][j]);
        wr_rid[j] <= RW'(mr[r][j]);
      end
      @(posedge clk);
    end
    wr_en <= 0;
    for (int i = 0; i < 50; i++) begin
      int aa [D], ab [D];
      for (int j = 0; j < D; j++) begin
        aa[j] = int'($urandom_range(N - 1));
        ab[j] = int'($urandom_range(N - 1));
        rd_addr_a[j] <= RW'(aa[j]);
        rd_addr_b[j] <= RW'(ab[j]);
      end
      rd_en_a <= '1; rd_en_b <= '1;
      @(posedge clk);
      rd_en_a <= '0; rd_en_b <= '0;
      #1;
      for (int j = 0; j < D; j++) begin
        checks += 2;
        if (int'(rd_val_a[j]) != mv[aa[j]][j] || int'(rd_rid_a[j]) != mr[aa[j]][j]) failures++;
        if (int'(rd_val_b[j]) != mv[ab[j]][j] || int'(rd_rid_b[j]) != mr[ab[j]][j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

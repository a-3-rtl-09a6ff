// tb_matrix_sram: writes random rows into a small key/value SRAM, reads them
// back in random order and checks data and the one-cycle read latency.
module tb_matrix_sram;
  import a3_pkg::*;
  localparam int N = 12, D = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0;
  logic [$clog2(N)-1:0] wr_addr = '0, rd_addr = '0;
  elem_t wr_row [D], rd_row [D];
  int model [N][D];

  matrix_sram #(.N(N), .D(D)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (wr_row[j]) wr_row[j] = '0;
    @(posedge clk);
    for (int r = 0; r < N; r++) begin
      wr_en <= 1; wr_addr <= r[$clog2(N)-1:0];
      for (int j = 0; j < D; j++) begin
        int v;
        v = int'($urandom_range(510)) - 255;
        model[r][j] = v;
        wr_row[j] <= elem_t'(v);
      end
      @(posedge clk);
    end
    wr_en <= 0;
    for (int i = 0; i < 40; i++) begin
      int r;
      r = int'($urandom_range(N - 1));
      rd_en <= 1; rd_addr <= r[$clog2(N)-1:0];
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int j = 0; j < D; j++) begin
        checks++;
        if (int'(rd_row[j]) != model[r][j]) begin
          failures++;
          $display("row %0d col %0d: got %0d want %0d", r, j, rd_row[j], model[r][j]);
        end
      end
      // the output holds while no read is issued
      @(posedge clk); #1;
      checks++;
      if (int'(rd_row[0]) != model[r][0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags and the occupancy count.
module tb_sync_fifo;
  localparam int W = 12, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0, empty, full;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [W-1:0] model [$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 600; i++) begin
      logic do_wr, do_rd;
      #1;
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH) || int'(count) != model.size())
        failures++;
      if (model.size() > 0) begin
        checks++;
        if (rd_data != model[0]) failures++;
      end
      do_wr = ($urandom_range(99) < 55) && (model.size() < DEPTH);
      do_rd = ($urandom_range(99) < 50) && (model.size() > 0);
      wr_en <= do_wr; rd_en <= do_rd;
      wr_data <= W'($urandom);
      @(posedge clk);
      if (do_rd) void'(model.pop_front());
      if (do_wr) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

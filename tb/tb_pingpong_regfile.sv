// tb_pingpong_regfile: fills one bank with random data while the other bank
// is read, swaps banks, and checks every read port against a model of both
// banks (so a write into the wrong bank is caught).
module tb_pingpong_regfile;
  localparam int W = 10, DEPTH = 20, RP = 3, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_bank = 0, wr_en = 0, rd_bank = 1;
  logic [AW-1:0] wr_addr = '0, rd_addr [RP];
  logic [W-1:0] wr_data = '0, rd_data [RP];
  logic [W-1:0] model [2][DEPTH];

  pingpong_regfile #(.W(W), .DEPTH(DEPTH), .RP(RP)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_bank(input int b);
    rd_bank = b[0];
    for (int a = 0; a < DEPTH; a += RP) begin
      for (int p = 0; p < RP; p++) rd_addr[p] = AW'((a + p) % DEPTH);
      #1;
      for (int p = 0; p < RP; p++) begin
        checks++;
        if (rd_data[p] != model[b][(a + p) % DEPTH]) failures++;
      end
    end
  endtask

  initial begin
    foreach (rd_addr[p]) rd_addr[p] = '0;
    for (int ph = 0; ph < 6; ph++) begin
      @(negedge clk);
      wr_bank = ph[0];
      for (int a = 0; a < DEPTH; a++) begin
        wr_en = 1; wr_addr = AW'(a); wr_data = W'($urandom);
        @(posedge clk);
        model[ph % 2][a] = wr_data;
        @(negedge clk);
      end
      wr_en = 0;
      if (ph > 0) check_bank((ph + 1) % 2);
      check_bank(ph % 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

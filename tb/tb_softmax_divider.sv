// tb_softmax_divider: one division per cycle with random operands
// (score <= expsum); checks every quotient floor(score*256/expsum) and that it
// appears exactly 7 cycles after its operands.
module tb_softmax_divider;
  import a3_pkg::*;
  localparam int DEN_W = 18;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic [SCORE_W-1:0] score = '0;
  logic [DEN_W-1:0] expsum = 1;
  logic [WEIGHT_W-1:0] weight;
  int exp_q [$];
  int cyc = 0, sent_at [$];

  softmax_divider #(.DEN_W(DEN_W)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (in_valid) sent_at.push_back(cyc);
    if (rst_n && out_valid) begin
      checks += 2;
      if (exp_q.size() == 0) failures++;
      else begin
        int w;
        w = exp_q.pop_front();
        if (int'(weight) != w) begin
          failures++;
          $display("got %0d want %0d", weight, w);
        end
        begin int dt; dt = cyc - sent_at.pop_front(); if (dt != DIV_STAGES) begin failures++; if (failures < 3) $display("latency %0d", dt); end end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 1000; i++) begin
      int s, e;
      s = int'($urandom_range(256));
      e = s + int'($urandom_range((i % 3 == 0) ? 300 : 81000));
      if (e == 0) e = 1;
      in_valid <= 1; score <= SCORE_W'(s); expsum <= DEN_W'(e);
      exp_q.push_back((s * 256) / e);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_argmax_unit: feeds random score vectors (with forced ties and negative
// scores) and checks the reported index against a reference search that
// prefers the lower index on ties.
module tb_argmax_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, we = 1'b0;
  logic [7:0] idx = '0, pred;
  logic signed [15:0] score = '0;
  int checks = 0, failures = 0;

  argmax_unit #(.N(10)) dut (.clk, .rst_n, .clear, .we, .idx, .score, .pred);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s[10];
    int best;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < 10; i++) s[i] = int'($urandom % 2000) - 1000;
      if (t % 3 == 0) s[7] = s[2];         // tie candidates
      if (t % 5 == 0) for (int i = 0; i < 10; i++) s[i] = -100 - i;
      best = 0;
      for (int i = 1; i < 10; i++) if (s[i] > s[best]) best = i;
      @(negedge clk); clear = 1'b1;
      @(negedge clk); clear = 1'b0;
      for (int i = 0; i < 10; i++) begin
        @(negedge clk); we = 1'b1; idx = 8'(i); score = 16'(s[i]);
        if ($urandom % 4 == 0) begin @(negedge clk); we = 1'b0; end
      end
      @(negedge clk); we = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (int'(pred) != best) begin
        failures++;
        $display("FAIL vector %0d: pred %0d expected %0d", t, pred, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

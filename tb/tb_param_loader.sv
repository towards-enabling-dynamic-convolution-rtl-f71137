// tb_param_loader: streams blocks of random 32-bit integers (some far outside
// the 16-bit range) with random gaps and checks every write (index and
// saturated value), the done pulse, that tready drops after the block, and
// the framing flag for a correct and a misplaced tlast.
module tb_param_loader;
  import dcnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  word_t tdata = '0;
  logic tvalid = 1'b0, tready, tlast = 1'b0;
  logic start = 1'b0, expect_last = 1'b0, clear_err = 1'b0, busy, done, we, framing_err;
  logic [15:0] count = '0, waddr;
  data_t wdata;
  int checks = 0, failures = 0;

  param_loader #(.AW(16)) dut (.clk, .rst_n, .s_tdata(tdata), .s_tvalid(tvalid), .s_tready(tready),
    .s_tlast(tlast), .start, .count, .expect_last, .clear_err, .busy, .done, .we, .waddr, .wdata, .framing_err);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_v[$];
  int nw = 0, ndone = 0;
  always @(posedge clk) begin
    if (rst_n && we) begin
      chk(int'(waddr) == nw, $sformatf("waddr %0d expected %0d", waddr, nw));
      chk(int'(wdata) == exp_v[nw], $sformatf("word %0d: %0d expected %0d", nw, wdata, exp_v[nw]));
      nw++;
    end
    if (rst_n && done) ndone++;
  end

  function automatic int sat(input int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  task automatic block(input int n, input bit exp_last, input int last_at);
    int words[$];
    exp_v.delete();
    nw = 0; ndone = 0;
    for (int i = 0; i < n; i++) begin
      int v = ($urandom % 4 == 0) ? int'($urandom) : int'($urandom % 2000) - 1000;
      words.push_back(v);
      exp_v.push_back(sat(v));
    end
    @(negedge clk); start = 1'b1; count = 16'(n); expect_last = exp_last;
    @(negedge clk); start = 1'b0;
    for (int i = 0; i < n; i++) begin
      while ($urandom % 3 == 0) begin @(negedge clk); end
      tvalid = 1'b1; tdata = words[i]; tlast = (i == last_at);
      do @(posedge clk); while (!tready);
      @(negedge clk); tvalid = 1'b0; tlast = 1'b0;
    end
    @(negedge clk);
    chk(nw == n, $sformatf("%0d writes for a block of %0d", nw, n));
    chk(ndone == 1, $sformatf("%0d done pulses", ndone));
    chk(!tready && !busy, "still ready after the block");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    block(50, 1'b0, -1);
    chk(!framing_err, "framing error without tlast");
    block(37, 1'b1, 36);
    chk(!framing_err, "framing error with correct tlast");
    block(20, 1'b0, 10);
    chk(framing_err, "misplaced tlast not flagged");
    @(negedge clk); clear_err = 1'b1;
    @(negedge clk); clear_err = 1'b0;
    chk(!framing_err, "flag not cleared");
    block(20, 1'b1, -1);
    chk(framing_err, "missing tlast not flagged");
    block(300, 1'b0, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

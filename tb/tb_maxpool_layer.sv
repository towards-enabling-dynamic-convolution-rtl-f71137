// tb_maxpool_layer: runs 2x2 max pooling on a random 3x6x8 map (signed
// values) held in a behavioural buffer and checks every output word, that no
// other word is written, and the latency of C*(H/2)*(W/2)*4 + 2 clocks.
module tb_maxpool_layer;
  import dcnn_pkg::*;
  localparam int C = 3, H = 6, W = 8, HO = 3, WO = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done, out_we;
  logic [$clog2(C*H*W)-1:0]   in_raddr;
  logic [$clog2(C*HO*WO)-1:0] out_waddr;
  data_t in_rdata, out_wdata;
  int checks = 0, failures = 0;

  maxpool_layer #(.C(C), .H(H), .W(W)) dut (.clk, .rst_n, .start, .busy, .done,
    .in_raddr, .in_rdata, .out_we, .out_waddr, .out_wdata);

  int in_mem[C*H*W];
  int out_mem[C*HO*WO];
  int nwr = 0;
  always @(posedge clk) begin
    in_rdata <= data_t'(in_mem[in_raddr]);
    if (rst_n && out_we) begin out_mem[out_waddr] = int'(out_wdata); nwr++; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, cyc;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < C*H*W; i++) in_mem[i] = int'($urandom % 4000) - 2000;
      for (int i = 0; i < C*HO*WO; i++) out_mem[i] = 99999;
      nwr = 0;
      repeat (2) @(posedge clk);
      rst_n = 1'b1;
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++;
      if (cyc != C*HO*WO*4 + 2) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++;
      if (nwr != C*HO*WO) begin failures++; $display("FAIL %0d writes", nwr); end
      for (int c = 0; c < C; c++)
        for (int y = 0; y < HO; y++)
          for (int x = 0; x < WO; x++) begin
            m = -99999;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++)
                if (in_mem[c*H*W + (2*y+dy)*W + 2*x+dx] > m) m = in_mem[c*H*W + (2*y+dy)*W + 2*x+dx];
            checks++;
            if (out_mem[c*HO*WO + y*WO + x] != m) begin
              failures++;
              $display("FAIL c%0d y%0d x%0d: %0d expected %0d", c, y, x, out_mem[c*HO*WO + y*WO + x], m);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

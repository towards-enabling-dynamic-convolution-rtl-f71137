// tb_fm_buffer: writes random data to every word of a feature-map buffer,
// then reads all words back in random order and checks value and the
// one-clock read latency; also checks a read and a write to the same word in
// one clock return the old value.
module tb_fm_buffer;
  localparam int DEPTH = 3456;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  fm_buffer #(.DEPTH(DEPTH), .DATA_W(16)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int n = 0; n < 4000; n++) begin
      int a = int'($urandom % DEPTH);
      @(negedge clk); raddr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d: %h expected %h", a, rdata, model[a]);
      end
    end
    // read-during-write returns the old word
    @(negedge clk); raddr = 12'd7; waddr = 12'd7; wdata = ~model[7]; we = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[7]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk); we = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (rdata !== ~model[7]) begin failures++; $display("FAIL write not stored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

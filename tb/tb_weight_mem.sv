// tb_weight_mem: checks a preloaded (on-chip) parameter memory against the
// parameter formula, computed here independently, then overwrites part of it
// as the stream would and checks the new contents; a second instance without
// preload is written and read back.
module tb_weight_mem;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  localparam int D = 2400;
  logic we = 1'b0;
  logic [11:0] waddr = '0, raddr = '0;
  logic signed [15:0] wdata = '0, rdata, rdata2;
  logic we2 = 1'b0;
  logic [7:0] waddr2 = '0, raddr2 = '0;
  int checks = 0, failures = 0;

  weight_mem #(.DEPTH(D), .LAYER_ID(1), .STATIC_INIT(1'b1)) dut (
    .clk, .we, .waddr, .wdata, .raddr, .rdata);
  weight_mem #(.DEPTH(150), .LAYER_ID(0), .STATIC_INIT(1'b0)) dut2 (
    .clk, .we(we2), .waddr(waddr2), .wdata(wdata), .raddr(raddr2), .rdata(rdata2));

  function automatic int hashp(input int layer, input int idx);
    logic [31:0] h;
    h = 32'(idx) * 32'd2654435761 + 32'(layer) * 32'd40503 + 32'd12345;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return int'(h % 32'd48) - 24;
  endfunction

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model[D];
  int m2[150];
  initial begin
    for (int i = 0; i < D; i++) model[i] = hashp(1, i);
    for (int i = 0; i < D; i++) begin
      @(negedge clk); raddr = 12'(i);
      @(posedge clk); #1;
      chk(int'(rdata) == model[i], $sformatf("preload %0d: %0d expected %0d", i, rdata, model[i]));
    end
    for (int i = 0; i < D; i += 3) begin
      @(negedge clk); we = 1'b1; waddr = 12'(i); wdata = 16'($urandom); model[i] = int'(wdata);
    end
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); raddr = 12'(i);
      @(posedge clk); #1;
      chk(int'(rdata) == model[i], $sformatf("after write %0d", i));
    end
    for (int i = 0; i < 150; i++) begin
      @(negedge clk); we2 = 1'b1; waddr2 = 8'(i); wdata = 16'($urandom); m2[i] = int'(wdata);
    end
    @(negedge clk); we2 = 1'b0;
    for (int i = 0; i < 150; i++) begin
      @(negedge clk); raddr2 = 8'(i);
      @(posedge clk); #1;
      chk(int'(rdata2) == m2[i], $sformatf("dynamic %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_axil_ctrl: exercises the AXI4-Lite control slave: reset values, writes
// and read-back of the configuration registers (with clamping of the conv1
// group size), a start write producing one ap_start pulse, a start write
// while busy being ignored, the done bit set by ap_done and cleared by
// reading 0x00, and the read-only result, status and cycle registers.
module tb_axil_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [5:0] awaddr = '0, araddr = '0;
  logic awvalid = 1'b0, awready, wvalid = 1'b0, wready, bvalid, bready = 1'b0;
  logic arvalid = 1'b0, arready, rvalid, rready = 1'b0;
  logic [31:0] wdata = '0, rdata, cycles = 32'd12345;
  logic [3:0] wstrb = 4'hF, dyn_mask;
  logic [1:0] bresp, rresp;
  logic ap_start, ap_done = 1'b0, ap_idle = 1'b1, framing_err = 1'b0;
  logic [7:0] c1_group, pred = 8'd7;
  int checks = 0, failures = 0, n_start = 0;

  axil_ctrl #(.ADDR_W(6), .C1_SLOT(4)) dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .ap_start, .ap_done, .ap_idle, .dyn_mask, .c1_group, .pred, .framing_err, .cycles);

  always @(posedge clk) if (rst_n && ap_start) n_start++;

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1'b1; wdata = d; wvalid = 1'b1; bready = 1'b0;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 1'b0; wvalid = 1'b0;
    repeat ($urandom % 3) @(negedge clk);
    chk(bvalid && bresp == 2'b00, "no OKAY write response");
    bready = 1'b1;
    @(negedge clk); bready = 1'b0;
    chk(!bvalid, "bvalid held after bready");
  endtask

  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b0;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 1'b0;
    repeat ($urandom % 3) @(negedge clk);
    chk(rvalid && rresp == 2'b00, "no read response");
    d = rdata;
    rready = 1'b1;
    @(negedge clk); rready = 1'b0;
  endtask

  initial begin
    logic [31:0] r;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    rd(6'h18, r); chk(r == 32'hF, $sformatf("dyn_mask reset %h", r));
    rd(6'h20, r); chk(r == 32'd4, $sformatf("c1_group reset %0d", r));
    rd(6'h00, r); chk(r == 32'h4, $sformatf("control idle %h", r));
    wr(6'h18, 32'h5); chk(dyn_mask == 4'h5, "dyn_mask write");
    rd(6'h18, r); chk(r == 32'h5, "dyn_mask read");
    wr(6'h20, 32'd3); chk(c1_group == 8'd3, "c1_group write");
    wr(6'h20, 32'd9); chk(c1_group == 8'd4, "c1_group clamp high");
    wr(6'h20, 32'd0); chk(c1_group == 8'd1, "c1_group clamp low");
    rd(6'h10, r); chk(r == 32'd7, "prediction");
    rd(6'h30, r); chk(r == 32'd12345, "cycles");
    framing_err = 1'b1;
    rd(6'h28, r); chk(r == 32'd1, "status");
    wr(6'h00, 32'd1);
    chk(n_start == 1, $sformatf("%0d start pulses", n_start));
    ap_idle = 1'b0;
    rd(6'h00, r); chk(r == 32'h1, $sformatf("control busy %h", r));
    wr(6'h00, 32'd1);
    chk(n_start == 1, "start accepted while busy");
    @(negedge clk); ap_done = 1'b1; ap_idle = 1'b1;
    @(negedge clk); ap_done = 1'b0;
    rd(6'h00, r); chk(r == 32'h6, $sformatf("control done %h", r));
    rd(6'h00, r); chk(r == 32'h4, $sformatf("done not cleared by read %h", r));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lenet_methods: runs the three parameter-supply methods in the form they
// were evaluated, on an instance whose conv1 slot holds all six filters:
//   1. conv1 and conv2 streamed, fc layers on chip (the preloaded values,
//      since nothing has overwritten them yet), conv1 in one pass
//   2. all layers streamed, conv1 as one 6-filter pass
//   3. all streamed, conv1 split into a 4-filter pass and a 2-filter pass
// Host behaviour, reference model and checks are as in tb_dcnn_top.
module tb_lenet_methods;
  import dcnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [31:0] in_tdata, out_tdata;
  logic        in_tvalid, in_tready, in_tlast, out_tvalid, out_tready, out_tlast, irq;

  dcnn_top #(.C1_SLOT(6)) dut (
    .ap_clk(clk), .ap_rst_n(rst_n),
    .s_axi_ctrl_awaddr(awaddr), .s_axi_ctrl_awvalid(awvalid), .s_axi_ctrl_awready(awready),
    .s_axi_ctrl_wdata(wdata), .s_axi_ctrl_wstrb(wstrb), .s_axi_ctrl_wvalid(wvalid), .s_axi_ctrl_wready(wready),
    .s_axi_ctrl_bresp(bresp), .s_axi_ctrl_bvalid(bvalid), .s_axi_ctrl_bready(bready),
    .s_axi_ctrl_araddr(araddr), .s_axi_ctrl_arvalid(arvalid), .s_axi_ctrl_arready(arready),
    .s_axi_ctrl_rdata(rdata), .s_axi_ctrl_rresp(rresp), .s_axi_ctrl_rvalid(rvalid), .s_axi_ctrl_rready(rready),
    .in_data_tdata(in_tdata), .in_data_tvalid(in_tvalid), .in_data_tready(in_tready), .in_data_tlast(in_tlast),
    .out_data_tdata(out_tdata), .out_data_tvalid(out_tvalid), .out_data_tready(out_tready), .out_data_tlast(out_tlast),
    .ap_irq(irq));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // watchdog
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite host ----------------
  task automatic axil_write(input logic [5:0] a, input logic [31:0] d);
    @(posedge clk);
    awaddr <= a; awvalid <= 1'b1; wdata <= d; wstrb <= 4'hF; wvalid <= 1'b1; bready <= 1'b1;
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 1'b0; wvalid <= 1'b0;
    while (!bvalid) @(posedge clk);
    @(posedge clk);
    bready <= 1'b0;
  endtask

  task automatic axil_read(input logic [5:0] a, output logic [31:0] d);
    @(posedge clk);
    araddr <= a; arvalid <= 1'b1; rready <= 1'b1;
    do @(posedge clk); while (!arready);
    arvalid <= 1'b0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(posedge clk);
    rready <= 1'b0;
  endtask

  // ---------------- stream driver ----------------
  int  sq[$];
  bit  sl[$];
  int  n_stall = 0, n_outbp = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      in_tvalid <= 1'b0;
    end else begin
      if (in_tvalid && !in_tready) n_stall++;
      if (!in_tvalid || in_tready) begin
        if (sq.size() > 0 && ($urandom % 8) != 0) begin
          in_tdata  <= sq.pop_front();
          in_tlast  <= sl.pop_front();
          in_tvalid <= 1'b1;
        end else begin
          in_tvalid <= 1'b0;
        end
      end
    end
  end

  // ---------------- output sink ----------------
  int  got[$];
  bit  got_last[$];
  always @(posedge clk) begin
    out_tready <= ($urandom % 3) != 0;
    if (out_tvalid && !out_tready) n_outbp++;
    if (out_tvalid && out_tready) begin
      got.push_back(int'($signed(out_tdata)));
      got_last.push_back(out_tlast);
    end
  end

  // ---------------- reference model ----------------
  // parameter memory contents as the IP holds them
  int w3[16*150], b3[16], w5[120*256], b5[120], w6[84*120], b6[84], w7[10*84], b7[10];
  int w1[6*25], b1[6], img[784];

  function automatic int hashp(input int layer, input int idx);
    logic [31:0] h;
    h = 32'(idx) * 32'd2654435761 + 32'(layer) * 32'd40503 + 32'd12345;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return int'(h % 32'd48) - 24;
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int finish_acc(input longint acc, input bit relu);
    longint s = acc >>> 8;
    if (relu && s < 0) return 0;
    return sat16(s);
  endfunction

  int c1o[6*576], s2o[6*144], c3o[16*64], s4o[256], f5o[120], f6o[84], f7o[10];
  int n_sat_in = 0;

  task automatic reference();
    longint acc;
    int m;
    for (int f = 0; f < 6; f++)
      for (int y = 0; y < 24; y++)
        for (int x = 0; x < 24; x++) begin
          acc = longint'(b1[f]) <<< 8;
          for (int ky = 0; ky < 5; ky++)
            for (int kx = 0; kx < 5; kx++)
              acc += longint'(img[(y+ky)*28 + x+kx]) * w1[f*25 + ky*5 + kx];
          c1o[f*576 + y*24 + x] = finish_acc(acc, 1);
        end
    for (int c = 0; c < 6; c++)
      for (int y = 0; y < 12; y++)
        for (int x = 0; x < 12; x++) begin
          m = c1o[c*576 + 2*y*24 + 2*x];
          if (c1o[c*576 + 2*y*24 + 2*x+1] > m) m = c1o[c*576 + 2*y*24 + 2*x+1];
          if (c1o[c*576 + (2*y+1)*24 + 2*x] > m) m = c1o[c*576 + (2*y+1)*24 + 2*x];
          if (c1o[c*576 + (2*y+1)*24 + 2*x+1] > m) m = c1o[c*576 + (2*y+1)*24 + 2*x+1];
          s2o[c*144 + y*12 + x] = m;
        end
    for (int f = 0; f < 16; f++)
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++) begin
          acc = longint'(b3[f]) <<< 8;
          for (int c = 0; c < 6; c++)
            for (int ky = 0; ky < 5; ky++)
              for (int kx = 0; kx < 5; kx++)
                acc += longint'(s2o[c*144 + (y+ky)*12 + x+kx]) * w3[f*150 + c*25 + ky*5 + kx];
          c3o[f*64 + y*8 + x] = finish_acc(acc, 1);
        end
    for (int c = 0; c < 16; c++)
      for (int y = 0; y < 4; y++)
        for (int x = 0; x < 4; x++) begin
          m = c3o[c*64 + 2*y*8 + 2*x];
          if (c3o[c*64 + 2*y*8 + 2*x+1] > m) m = c3o[c*64 + 2*y*8 + 2*x+1];
          if (c3o[c*64 + (2*y+1)*8 + 2*x] > m) m = c3o[c*64 + (2*y+1)*8 + 2*x];
          if (c3o[c*64 + (2*y+1)*8 + 2*x+1] > m) m = c3o[c*64 + (2*y+1)*8 + 2*x+1];
          s4o[c*16 + y*4 + x] = m;
        end
    for (int f = 0; f < 120; f++) begin
      acc = longint'(b5[f]) <<< 8;
      for (int i = 0; i < 256; i++) acc += longint'(s4o[i]) * w5[f*256 + i];
      f5o[f] = finish_acc(acc, 1);
    end
    for (int f = 0; f < 84; f++) begin
      acc = longint'(b6[f]) <<< 8;
      for (int i = 0; i < 120; i++) acc += longint'(f5o[i]) * w6[f*120 + i];
      f6o[f] = finish_acc(acc, 1);
    end
    for (int f = 0; f < 10; f++) begin
      acc = longint'(b7[f]) <<< 8;
      for (int i = 0; i < 84; i++) acc += longint'(f6o[i]) * w7[f*84 + i];
      f7o[f] = finish_acc(acc, 0);
    end
  endtask

  function automatic int rnd_w();
    return int'($urandom % 48) - 24;
  endfunction

  // push a block of words; values go through the same 16-bit saturation
  task automatic push(input int v);
    sq.push_back(v);
    sl.push_back(1'b0);
  endtask

  int n_passes = 0, n_static_layers = 0, n_framing = 0;
  always @(posedge clk) if (dut.run_start[1]) n_passes++;

  task automatic run_inference(input logic [3:0] mask, input int group, input bit sat_pixel,
                               input bit early_last, input string name);
    int base, cnt, nwords, expect_pred, macs;
    logic [31:0] r;
    // image
    for (int i = 0; i < 784; i++) begin
      int p = int'($urandom % 256);
      if (sat_pixel && i == 300) begin
        p = 40000;
        n_sat_in++;
      end
      push(p);
      img[i] = sat16(longint'(p));
    end
    // conv1 groups
    base = 0;
    while (base < 6) begin
      cnt = (group < 6 - base) ? group : 6 - base;
      for (int f = 0; f < cnt; f++)
        for (int k = 0; k < 25; k++) begin
          w1[(base+f)*25 + k] = rnd_w();
          push(w1[(base+f)*25 + k]);
        end
      for (int f = 0; f < cnt; f++) begin
        b1[base+f] = rnd_w() * 8;
        push(b1[base+f]);
      end
      base += cnt;
    end
    if (mask[0]) begin
      for (int i = 0; i < 16*150; i++) begin w3[i] = rnd_w(); push(w3[i]); end
      for (int i = 0; i < 16; i++)     begin b3[i] = rnd_w(); push(b3[i]); end
    end else n_static_layers++;
    if (mask[1]) begin
      for (int i = 0; i < 120*256; i++) begin w5[i] = rnd_w(); push(w5[i]); end
      for (int i = 0; i < 120; i++)     begin b5[i] = rnd_w(); push(b5[i]); end
    end else n_static_layers++;
    if (mask[2]) begin
      for (int i = 0; i < 84*120; i++) begin w6[i] = rnd_w(); push(w6[i]); end
      for (int i = 0; i < 84; i++)     begin b6[i] = rnd_w(); push(b6[i]); end
    end else n_static_layers++;
    if (mask[3]) begin
      for (int i = 0; i < 10*84; i++) begin w7[i] = rnd_w(); push(w7[i]); end
      for (int i = 0; i < 10; i++)    begin b7[i] = rnd_w(); push(b7[i]); end
    end else n_static_layers++;
    nwords = sq.size();
    if (early_last) sl[sl.size()-2] = 1'b1;
    else            sl[sl.size()-1] = 1'b1;

    reference();
    expect_pred = 0;
    for (int i = 1; i < 10; i++) if (f7o[i] > f7o[expect_pred]) expect_pred = i;

    axil_write(6'h18, 32'(mask));
    axil_write(6'h20, 32'(group));
    got.delete();
    got_last.delete();
    axil_write(6'h00, 32'd1);
    @(posedge clk);
    while (!irq) @(posedge clk);
    repeat (3) @(posedge clk);

    check(got.size() == 10, $sformatf("%s: %0d scores received", name, got.size()));
    for (int i = 0; i < 10 && i < got.size(); i++) begin
      check(got[i] == f7o[i], $sformatf("%s: score %0d = %0d, expected %0d", name, i, got[i], f7o[i]));
      check(got_last[i] == (i == 9), $sformatf("%s: tlast on score %0d", name, i));
    end
    axil_read(6'h10, r);
    check(r == 32'(expect_pred), $sformatf("%s: prediction %0d, expected %0d", name, r, expect_pred));
    axil_read(6'h28, r);
    check(r[0] == early_last, $sformatf("%s: framing error flag %0d", name, r[0]));
    if (r[0]) n_framing++;
    axil_read(6'h00, r);
    check(r[1] && r[2], $sformatf("%s: status 0x%0h, expected done and idle", name, r));
    // cycles: every MAC takes one clock and every word at least one
    macs = 6*576*25 + 6*144*4 + 16*64*150 + 16*16*4 + 120*256 + 84*120 + 10*84;
    axil_read(6'h30, r);
    check(int'(r) >= macs + nwords && int'(r) < macs + 4*nwords + 2000,
          $sformatf("%s: %0d cycles, MAC work %0d, %0d words", name, r, macs, nwords));
    $display("%s: scores %p prediction %0d, %0d words, %0d cycles", name, got, expect_pred, nwords, r);
  endtask

  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    in_tvalid = 0; in_tdata = 0; in_tlast = 0;
    // the IP powers up with its on-chip parameters
    for (int i = 0; i < 16*150; i++) w3[i] = hashp(LID_C3, i);
    for (int i = 0; i < 16; i++)     b3[i] = hashp(LID_C3 + LID_BIAS, i);
    for (int i = 0; i < 120*256; i++) w5[i] = hashp(LID_F5, i);
    for (int i = 0; i < 120; i++)     b5[i] = hashp(LID_F5 + LID_BIAS, i);
    for (int i = 0; i < 84*120; i++) w6[i] = hashp(LID_F6, i);
    for (int i = 0; i < 84; i++)     b6[i] = hashp(LID_F6 + LID_BIAS, i);
    for (int i = 0; i < 10*84; i++) w7[i] = hashp(LID_F7, i);
    for (int i = 0; i < 10; i++)    b7[i] = hashp(LID_F7 + LID_BIAS, i);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    run_inference(4'h1, 6, 1'b0, 1'b0, "conv1+conv2 streamed, rest on chip");
    check(n_passes == 1, $sformatf("conv1 passes %0d, expected 1", n_passes));
    run_inference(4'hF, 6, 1'b0, 1'b0, "all streamed, conv1 in one pass");
    check(n_passes == 2, $sformatf("conv1 passes %0d, expected 2", n_passes));
    run_inference(4'hF, 4, 1'b1, 1'b1, "conv1 as 4 + 2 filters");
    check(n_passes == 4, $sformatf("conv1 passes %0d, expected 4", n_passes));
    $display("mechanisms: conv1 passes %0d, on-chip layers %0d, stream stalls %0d, output back-pressure %0d, saturated inputs %0d, framing errors %0d",
             n_passes, n_static_layers, n_stall, n_outbp, n_sat_in, n_framing);
    check(n_passes > 0,        "conv1 split into passes never happened");
    check(n_static_layers > 0, "on-chip parameters never used");
    check(n_stall > 0,         "stream stall never happened");
    check(n_outbp > 0,         "output back-pressure never happened");
    check(n_sat_in > 0,        "input saturation never happened");
    check(n_framing > 0,       "framing error never detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_conv_layer: checks the convolution layer in two shapes.
//   A: 2x7x6 input, 3x3 kernels, slot of 2 filters, 3 output channels, ReLU.
//      The layer is run as a 2-filter group then a 1-filter group, each
//      preceded by its own parameter load, and both groups must land in the
//      right channels of the output buffer (the split-layer mechanism).
//   B: fully connected, 12 inputs -> 5 outputs, no ReLU, large weights so
//      that the output saturates.
// Outputs are compared with a reference computed here; the run latency must
// be filt_count*HO*WO*C*K*K + 2 clocks.
module tb_conv_layer;
  import dcnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

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

  function automatic int fin(input longint acc, input bit relu);
    longint s = acc >>> 8;
    if (relu && s < 0) return 0;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  // ---------------- shape A ----------------
  localparam int AC = 2, AH = 7, AW_ = 6, AK = 3, ASLOT = 2, ATOT = 3;
  localparam int AHO = AH - AK + 1, AWO = AW_ - AK + 1;
  logic a_start = 1'b0, a_busy, a_done, a_pwe = 1'b0, a_owe;
  logic [7:0] a_base = '0, a_cnt = '0;
  logic [15:0] a_paddr = '0;
  data_t a_pdata = '0, a_in_rdata, a_owdata;
  logic [$clog2(AC*AH*AW_)-1:0] a_raddr;
  logic [$clog2(ATOT*AHO*AWO)-1:0] a_owaddr;

  conv_layer #(.C(AC), .H(AH), .W(AW_), .K(AK), .NF_SLOT(ASLOT), .NF_TOTAL(ATOT), .RELU(1'b1)) dut_a (
    .clk, .rst_n, .start(a_start), .busy(a_busy), .done(a_done), .filt_base(a_base), .filt_count(a_cnt),
    .p_we(a_pwe), .p_addr(a_paddr), .p_data(a_pdata), .in_raddr(a_raddr), .in_rdata(a_in_rdata),
    .out_we(a_owe), .out_waddr(a_owaddr), .out_wdata(a_owdata));

  int a_in[AC*AH*AW_];
  int a_out[ATOT*AHO*AWO];
  int a_w[ATOT*AC*AK*AK], a_b[ATOT];
  always @(posedge clk) begin
    a_in_rdata <= data_t'(a_in[a_raddr]);
    if (a_owe) a_out[a_owaddr] = int'(a_owdata);
  end

  // ---------------- shape B ----------------
  localparam int BC = 12, BN = 5;
  logic b_start = 1'b0, b_busy, b_done, b_pwe = 1'b0, b_owe;
  logic [15:0] b_paddr = '0;
  data_t b_pdata = '0, b_in_rdata, b_owdata;
  logic [$clog2(BC)-1:0] b_raddr;
  logic [$clog2(BN)-1:0] b_owaddr;

  conv_layer #(.C(BC), .H(1), .W(1), .K(1), .NF_SLOT(BN), .NF_TOTAL(BN), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .start(b_start), .busy(b_busy), .done(b_done), .filt_base(8'd0), .filt_count(8'(BN)),
    .p_we(b_pwe), .p_addr(b_paddr), .p_data(b_pdata), .in_raddr(b_raddr), .in_rdata(b_in_rdata),
    .out_we(b_owe), .out_waddr(b_owaddr), .out_wdata(b_owdata));

  int b_in[BC], b_out[BN], b_w[BN*BC], b_b[BN];
  always @(posedge clk) begin
    b_in_rdata <= data_t'(b_in[b_raddr]);
    if (b_owe) b_out[b_owaddr] = int'(b_owdata);
  end

  int n_sat = 0;

  initial begin
    int cyc, base, cnt, n;
    longint acc;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < AC*AH*AW_; i++) a_in[i] = int'($urandom % 512) - 128;
      for (int i = 0; i < ATOT*AC*AK*AK; i++) a_w[i] = int'($urandom % 128) - 64;
      for (int i = 0; i < ATOT; i++) a_b[i] = int'($urandom % 2048) - 1024;
      for (int i = 0; i < ATOT*AHO*AWO; i++) a_out[i] = 99999;
      base = 0;
      while (base < ATOT) begin
        cnt = (ASLOT < ATOT - base) ? ASLOT : ATOT - base;
        @(negedge clk); a_base = 8'(base); a_cnt = 8'(cnt);
        n = 0;
        for (int f = 0; f < cnt; f++)
          for (int k = 0; k < AC*AK*AK; k++) begin
            @(negedge clk); a_pwe = 1'b1; a_paddr = 16'(n); a_pdata = data_t'(a_w[(base+f)*AC*AK*AK + k]); n++;
          end
        for (int f = 0; f < cnt; f++) begin
          @(negedge clk); a_pwe = 1'b1; a_paddr = 16'(n); a_pdata = data_t'(a_b[base+f]); n++;
        end
        @(negedge clk); a_pwe = 1'b0; a_start = 1'b1;
        @(negedge clk); a_start = 1'b0;
        cyc = 1;
        while (!a_done) begin @(negedge clk); cyc++; end
        chk(cyc == cnt*AHO*AWO*AC*AK*AK + 2, $sformatf("A latency %0d for %0d filters", cyc, cnt));
        base += cnt;
      end
      @(negedge clk);
      for (int f = 0; f < ATOT; f++)
        for (int y = 0; y < AHO; y++)
          for (int x = 0; x < AWO; x++) begin
            acc = longint'(a_b[f]) <<< 8;
            for (int c = 0; c < AC; c++)
              for (int ky = 0; ky < AK; ky++)
                for (int kx = 0; kx < AK; kx++)
                  acc += longint'(a_in[c*AH*AW_ + (y+ky)*AW_ + x+kx]) * a_w[((f*AC + c)*AK + ky)*AK + kx];
            chk(a_out[f*AHO*AWO + y*AWO + x] == fin(acc, 1),
                $sformatf("A f%0d y%0d x%0d: %0d expected %0d", f, y, x, a_out[f*AHO*AWO + y*AWO + x], fin(acc, 1)));
          end
    end

    // shape B
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < BC; i++) b_in[i] = int'($urandom % 65536) - 32768;
      for (int i = 0; i < BN*BC; i++) b_w[i] = int'($urandom % 65536) - 32768;
      for (int i = 0; i < BN; i++) b_b[i] = int'($urandom % 65536) - 32768;
      n = 0;
      for (int i = 0; i < BN*BC; i++) begin
        @(negedge clk); b_pwe = 1'b1; b_paddr = 16'(n); b_pdata = data_t'(b_w[i]); n++;
      end
      for (int i = 0; i < BN; i++) begin
        @(negedge clk); b_pwe = 1'b1; b_paddr = 16'(n); b_pdata = data_t'(b_b[i]); n++;
      end
      @(negedge clk); b_pwe = 1'b0; b_start = 1'b1;
      @(negedge clk); b_start = 1'b0;
      cyc = 1;
      while (!b_done) begin @(negedge clk); cyc++; end
      chk(cyc == BN*BC + 2, $sformatf("B latency %0d", cyc));
      @(negedge clk);
      for (int f = 0; f < BN; f++) begin
        acc = longint'(b_b[f]) <<< 8;
        for (int i = 0; i < BC; i++) acc += longint'(b_in[i]) * b_w[f*BC + i];
        if ((acc >>> 8) > 32767 || (acc >>> 8) < -32768) n_sat++;
        chk(b_out[f] == fin(acc, 0), $sformatf("B out %0d: %0d expected %0d", f, b_out[f], fin(acc, 0)));
      end
    end
    chk(n_sat > 0, "saturation never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

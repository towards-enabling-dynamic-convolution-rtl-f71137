// axil_ctrl: AXI4-Lite control slave (s_axi_ctrl) of the inference IP.
//
// Register map (32-bit registers, byte addresses):
//   0x00 control  W: bit0 = 1 starts an inference (ignored while busy)
//                 R: bit0 busy, bit1 done (set at the end of an inference,
//                    cleared when this register is read), bit2 idle
//   0x10 result   R: predicted class (index of the largest output score)
//   0x18 dyn_mask RW: which layers after conv1 take their parameters from the
//                 stream in the next inference: bit0 conv2, bit1 fc1,
//                 bit2 fc2, bit3 fc3. A clear bit keeps the on-chip values.
//                 Reset value 0xF (everything streamed).
//   0x20 c1_group RW: conv1 filters computed per load-and-run pass (1..C1_SLOT,
//                 larger values are clamped). Reset value C1_SLOT.
//   0x28 status   R: bit0 stream framing error of the last inference
//   0x30 cycles   R: clock cycles taken by the last inference
// Writing 1 to 0x00 and reading the prediction at 0x10 is the host sequence
// of the original work; the other registers are this design's own.
//
// Protocol: a write is taken when both AWVALID and WVALID are high (one clock
// of AWREADY/WREADY), answered with BVALID/OKAY; a read is answered the clock
// after ARVALID with RVALID/OKAY. One transaction of each kind at a time.
// Assertions check that the master holds AWVALID, WVALID and ARVALID until
// they are accepted.
module axil_ctrl #(
  parameter int ADDR_W  = 6,
  parameter int C1_SLOT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // to / from the core
  output logic              ap_start,
  input  logic              ap_done,
  input  logic              ap_idle,
  output logic [3:0]        dyn_mask,
  output logic [7:0]        c1_group,
  input  logic [7:0]        pred,
  input  logic              framing_err,
  input  logic [31:0]       cycles
);

  logic done_flag;
  logic wr_hs, rd_hs;

  assign wr_hs = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid && !s_axi_awready;
  assign rd_hs = s_axi_arvalid && !s_axi_rvalid && !s_axi_arready;
  assign s_axi_bresp = 2'b00;
  assign s_axi_rresp = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_awready <= 1'b0;
      s_axi_wready  <= 1'b0;
      s_axi_bvalid  <= 1'b0;
      s_axi_arready <= 1'b0;
      s_axi_rvalid  <= 1'b0;
      s_axi_rdata   <= '0;
      ap_start      <= 1'b0;
      done_flag     <= 1'b0;
      dyn_mask      <= 4'hF;
      c1_group      <= 8'(C1_SLOT);
    end else begin
      ap_start      <= 1'b0;
      s_axi_awready <= 1'b0;
      s_axi_wready  <= 1'b0;
      s_axi_arready <= 1'b0;
      if (ap_done) done_flag <= 1'b1;

      // write channel
      if (wr_hs) begin
        s_axi_awready <= 1'b1;
        s_axi_wready  <= 1'b1;
        s_axi_bvalid  <= 1'b1;
        if (s_axi_wstrb[0]) begin
          case (s_axi_awaddr)
            ADDR_W'(6'h00): if (s_axi_wdata[0] && ap_idle) ap_start <= 1'b1;
            ADDR_W'(6'h18): dyn_mask <= s_axi_wdata[3:0];
            ADDR_W'(6'h20): c1_group <= (s_axi_wdata[7:0] == 0) ? 8'd1 :
                                        (int'(s_axi_wdata[7:0]) > C1_SLOT) ? 8'(C1_SLOT) : s_axi_wdata[7:0];
            default: ;
          endcase
        end
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end

      // read channel
      if (rd_hs) begin
        s_axi_arready <= 1'b1;
        s_axi_rvalid  <= 1'b1;
        case (s_axi_araddr)
          ADDR_W'(6'h00): begin
            s_axi_rdata <= {29'd0, ap_idle, done_flag, !ap_idle};
            if (!ap_done) done_flag <= 1'b0;
          end
          ADDR_W'(6'h10): s_axi_rdata <= {24'd0, pred};
          ADDR_W'(6'h18): s_axi_rdata <= {28'd0, dyn_mask};
          ADDR_W'(6'h20): s_axi_rdata <= {24'd0, c1_group};
          ADDR_W'(6'h28): s_axi_rdata <= {31'd0, framing_err};
          ADDR_W'(6'h30): s_axi_rdata <= cycles;
          default:        s_axi_rdata <= '0;
        endcase
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI4-Lite master rules: a raised VALID stays up until its READY.
  logic aw_wait, w_wait, ar_wait;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_wait <= 1'b0;
      w_wait  <= 1'b0;
      ar_wait <= 1'b0;
    end else begin
      aw_wait <= s_axi_awvalid && !s_axi_awready;
      w_wait  <= s_axi_wvalid && !s_axi_wready;
      ar_wait <= s_axi_arvalid && !s_axi_arready;
      if (aw_wait) assert (s_axi_awvalid) else $error("AWVALID dropped before AWREADY");
      if (w_wait)  assert (s_axi_wvalid)  else $error("WVALID dropped before WREADY");
      if (ar_wait) assert (s_axi_arvalid) else $error("ARVALID dropped before ARREADY");
    end
  end

endmodule

// dcnn_top: LeNet-5 inference IP whose parameters are streamed in at run time.
//
// The network (28x28 input, conv1 6x5x5, max pool, conv2 16x5x5, max pool,
// fc 256-120, fc 120-84, fc 84-10) is a chain of layers with a feature-map
// buffer after each one. Every layer has its own parameter memory. The image
// and the parameters arrive on one AXI4-Stream input (IN_DATA) as 32-bit
// integers; the controller hands each block of that stream to the memory of
// the layer that is about to run. The 10 class scores leave on an AXI4-Stream
// output and the predicted class is read over AXI4-Lite (s_axi_ctrl).
//
// The same hardware runs the three ways of supplying parameters, chosen by
// registers before each inference:
//  - all layers streamed (dyn_mask = 0xF),
//  - only the large early layers streamed, the others kept on chip
//    (dyn_mask = 0x1: conv1 and conv2 streamed),
//  - conv1 split into filter groups that are loaded and run one after the
//    other into the same slot (c1_group = 4: a 4-filter pass then a 2-filter
//    pass), in place of swapping partially reconfigured IPs.
// conv1 is always streamed. On-chip parameters of the other layers are
// preloaded at configuration (see dcnn_pkg::static_param).
//
// Latency at 100 MHz is dominated by the single multiply-accumulate per layer:
// about 282k clocks of arithmetic plus one clock per streamed word.
module dcnn_top
  import dcnn_pkg::*;
#(
  parameter int C1_SLOT = 4
) (
  input  logic        ap_clk,
  input  logic        ap_rst_n,
  // s_axi_ctrl (AXI4-Lite)
  input  logic [5:0]  s_axi_ctrl_awaddr,
  input  logic        s_axi_ctrl_awvalid,
  output logic        s_axi_ctrl_awready,
  input  logic [31:0] s_axi_ctrl_wdata,
  input  logic [3:0]  s_axi_ctrl_wstrb,
  input  logic        s_axi_ctrl_wvalid,
  output logic        s_axi_ctrl_wready,
  output logic [1:0]  s_axi_ctrl_bresp,
  output logic        s_axi_ctrl_bvalid,
  input  logic        s_axi_ctrl_bready,
  input  logic [5:0]  s_axi_ctrl_araddr,
  input  logic        s_axi_ctrl_arvalid,
  output logic        s_axi_ctrl_arready,
  output logic [31:0] s_axi_ctrl_rdata,
  output logic [1:0]  s_axi_ctrl_rresp,
  output logic        s_axi_ctrl_rvalid,
  input  logic        s_axi_ctrl_rready,
  // IN_DATA: image and parameters (AXI4-Stream)
  input  logic [31:0] in_data_tdata,
  input  logic        in_data_tvalid,
  output logic        in_data_tready,
  input  logic        in_data_tlast,
  // OUT_DATA: class scores (AXI4-Stream)
  output logic [31:0] out_data_tdata,
  output logic        out_data_tvalid,
  input  logic        out_data_tready,
  output logic        out_data_tlast,
  // end-of-inference pulse (interrupt)
  output logic        ap_irq
);

  localparam logic [3:0] ST_IMG = 4'd0, ST_C1 = 4'd1, ST_S2 = 4'd2, ST_C3 = 4'd3,
                         ST_S4 = 4'd4, ST_F5 = 4'd5, ST_F6 = 4'd6, ST_F7 = 4'd7;

  logic clk, rst_n;
  assign clk   = ap_clk;
  assign rst_n = ap_rst_n;

  // ---------------- control ----------------
  logic        ap_start, ap_done, ap_idle;
  logic [3:0]  dyn_mask;
  logic [7:0]  c1_group, pred;
  logic [31:0] cycles;
  logic        framing_err;

  logic        ld_start, ld_expect_last, ld_clear_err, ld_done;
  logic [15:0] ld_count;
  logic [3:0]  ld_target;
  logic [8:0]  run_start, layer_done;
  logic [7:0]  c1_base, c1_cnt;
  logic [3:0]  o_raddr;
  data_t       o_rdata;

  axil_ctrl #(.ADDR_W(6), .C1_SLOT(C1_SLOT)) u_axil (
    .clk, .rst_n,
    .s_axi_awaddr (s_axi_ctrl_awaddr),  .s_axi_awvalid(s_axi_ctrl_awvalid), .s_axi_awready(s_axi_ctrl_awready),
    .s_axi_wdata  (s_axi_ctrl_wdata),   .s_axi_wstrb  (s_axi_ctrl_wstrb),   .s_axi_wvalid (s_axi_ctrl_wvalid),
    .s_axi_wready (s_axi_ctrl_wready),  .s_axi_bresp  (s_axi_ctrl_bresp),   .s_axi_bvalid (s_axi_ctrl_bvalid),
    .s_axi_bready (s_axi_ctrl_bready),  .s_axi_araddr (s_axi_ctrl_araddr),  .s_axi_arvalid(s_axi_ctrl_arvalid),
    .s_axi_arready(s_axi_ctrl_arready), .s_axi_rdata  (s_axi_ctrl_rdata),   .s_axi_rresp  (s_axi_ctrl_rresp),
    .s_axi_rvalid (s_axi_ctrl_rvalid),  .s_axi_rready (s_axi_ctrl_rready),
    .ap_start, .ap_done, .ap_idle, .dyn_mask, .c1_group, .pred, .framing_err, .cycles);

  dcnn_ctrl #(.C1_SLOT(C1_SLOT)) u_ctrl (
    .clk, .rst_n, .ap_start, .ap_done, .ap_idle, .dyn_mask, .c1_group, .cycles,
    .ld_start, .ld_count, .ld_target, .ld_expect_last, .ld_clear_err, .ld_done,
    .run_start, .layer_done, .c1_base, .c1_cnt,
    .o_raddr, .o_rdata,
    .m_tdata(out_data_tdata), .m_tvalid(out_data_tvalid), .m_tready(out_data_tready), .m_tlast(out_data_tlast));

  assign ap_irq = ap_done;

  // ---------------- stream loader ----------------
  logic        p_we;
  logic [15:0] p_addr;
  data_t       p_data;

  param_loader #(.AW(16)) u_ld (
    .clk, .rst_n,
    .s_tdata(in_data_tdata), .s_tvalid(in_data_tvalid), .s_tready(in_data_tready), .s_tlast(in_data_tlast),
    .start(ld_start), .count(ld_count), .expect_last(ld_expect_last), .clear_err(ld_clear_err),
    .busy(), .done(ld_done),
    .we(p_we), .waddr(p_addr), .wdata(p_data), .framing_err);

  function automatic logic tgt(input logic we, input logic [3:0] t, input logic [3:0] s);
    return we && (t == s);
  endfunction

  // ---------------- image buffer ----------------
  logic [9:0] img_raddr;
  data_t      img_rdata;
  fm_buffer #(.DEPTH(IMG_WORDS), .DATA_W(DATA_W)) u_img (
    .clk, .we(tgt(p_we, ld_target, ST_IMG)), .waddr(p_addr[9:0]), .wdata(p_data),
    .raddr(img_raddr), .rdata(img_rdata));

  // ---------------- conv1: 1x28x28 -> 6x24x24 ----------------
  logic        c1_we;
  logic [11:0] c1_waddr, s2_raddr_in;
  data_t       c1_wdata, c1_rdata;
  logic        c1_busy, s2_busy, c3_busy, s4_busy, f5_busy, f6_busy, f7_busy;

  conv_layer #(.C(1), .H(IMG_H), .W(IMG_W), .K(KSZ), .NF_SLOT(C1_SLOT), .NF_TOTAL(C1_NF),
               .RELU(1'b1), .LAYER_ID(LID_C1), .STATIC_INIT(1'b0)) u_c1 (
    .clk, .rst_n, .start(run_start[ST_C1]), .busy(c1_busy), .done(layer_done[ST_C1]),
    .filt_base(c1_base), .filt_count(c1_cnt),
    .p_we(tgt(p_we, ld_target, ST_C1)), .p_addr, .p_data,
    .in_raddr(img_raddr), .in_rdata(img_rdata),
    .out_we(c1_we), .out_waddr(c1_waddr), .out_wdata(c1_wdata));

  fm_buffer #(.DEPTH(C1_NF * C1_HO * C1_HO), .DATA_W(DATA_W)) u_buf_c1 (
    .clk, .we(c1_we), .waddr(c1_waddr), .wdata(c1_wdata), .raddr(s2_raddr_in), .rdata(c1_rdata));

  // ---------------- pool: 6x24x24 -> 6x12x12 ----------------
  logic        s2_we;
  logic [9:0]  s2_waddr, c3_raddr_in;
  data_t       s2_wdata, s2_rdata;

  maxpool_layer #(.C(C1_NF), .H(C1_HO), .W(C1_HO)) u_s2 (
    .clk, .rst_n, .start(run_start[ST_S2]), .busy(s2_busy), .done(layer_done[ST_S2]),
    .in_raddr(s2_raddr_in), .in_rdata(c1_rdata),
    .out_we(s2_we), .out_waddr(s2_waddr), .out_wdata(s2_wdata));

  fm_buffer #(.DEPTH(C1_NF * S2_HO * S2_HO), .DATA_W(DATA_W)) u_buf_s2 (
    .clk, .we(s2_we), .waddr(s2_waddr), .wdata(s2_wdata), .raddr(c3_raddr_in), .rdata(s2_rdata));

  // ---------------- conv2: 6x12x12 -> 16x8x8 ----------------
  logic        c3_we;
  logic [9:0]  c3_waddr, s4_raddr_in;
  data_t       c3_wdata, c3_rdata;

  conv_layer #(.C(C1_NF), .H(S2_HO), .W(S2_HO), .K(KSZ), .NF_SLOT(C3_NF), .NF_TOTAL(C3_NF),
               .RELU(1'b1), .LAYER_ID(LID_C3), .STATIC_INIT(1'b1)) u_c3 (
    .clk, .rst_n, .start(run_start[ST_C3]), .busy(c3_busy), .done(layer_done[ST_C3]),
    .filt_base(8'd0), .filt_count(8'(C3_NF)),
    .p_we(tgt(p_we, ld_target, ST_C3)), .p_addr, .p_data,
    .in_raddr(c3_raddr_in), .in_rdata(s2_rdata),
    .out_we(c3_we), .out_waddr(c3_waddr), .out_wdata(c3_wdata));

  fm_buffer #(.DEPTH(C3_NF * C3_HO * C3_HO), .DATA_W(DATA_W)) u_buf_c3 (
    .clk, .we(c3_we), .waddr(c3_waddr), .wdata(c3_wdata), .raddr(s4_raddr_in), .rdata(c3_rdata));

  // ---------------- pool: 16x8x8 -> 16x4x4 ----------------
  logic        s4_we;
  logic [7:0]  s4_waddr, f5_raddr_in;
  data_t       s4_wdata, s4_rdata;

  maxpool_layer #(.C(C3_NF), .H(C3_HO), .W(C3_HO)) u_s4 (
    .clk, .rst_n, .start(run_start[ST_S4]), .busy(s4_busy), .done(layer_done[ST_S4]),
    .in_raddr(s4_raddr_in), .in_rdata(c3_rdata),
    .out_we(s4_we), .out_waddr(s4_waddr), .out_wdata(s4_wdata));

  fm_buffer #(.DEPTH(C3_NF * S4_HO * S4_HO), .DATA_W(DATA_W)) u_buf_s4 (
    .clk, .we(s4_we), .waddr(s4_waddr), .wdata(s4_wdata), .raddr(f5_raddr_in), .rdata(s4_rdata));

  // ---------------- fc1: 256 -> 120 (conv over the whole 16x4x4 map) ----------------
  logic        f5_we;
  logic [6:0]  f5_waddr, f6_raddr_in;
  data_t       f5_wdata, f5_rdata;

  conv_layer #(.C(C3_NF), .H(S4_HO), .W(S4_HO), .K(S4_HO), .NF_SLOT(F5_N), .NF_TOTAL(F5_N),
               .RELU(1'b1), .LAYER_ID(LID_F5), .STATIC_INIT(1'b1)) u_f5 (
    .clk, .rst_n, .start(run_start[ST_F5]), .busy(f5_busy), .done(layer_done[ST_F5]),
    .filt_base(8'd0), .filt_count(8'(F5_N)),
    .p_we(tgt(p_we, ld_target, ST_F5)), .p_addr, .p_data,
    .in_raddr(f5_raddr_in), .in_rdata(s4_rdata),
    .out_we(f5_we), .out_waddr(f5_waddr), .out_wdata(f5_wdata));

  fm_buffer #(.DEPTH(F5_N), .DATA_W(DATA_W)) u_buf_f5 (
    .clk, .we(f5_we), .waddr(f5_waddr), .wdata(f5_wdata), .raddr(f6_raddr_in), .rdata(f5_rdata));

  // ---------------- fc2: 120 -> 84 ----------------
  logic        f6_we;
  logic [6:0]  f6_waddr, f7_raddr_in;
  data_t       f6_wdata, f6_rdata;

  conv_layer #(.C(F5_N), .H(1), .W(1), .K(1), .NF_SLOT(F6_N), .NF_TOTAL(F6_N),
               .RELU(1'b1), .LAYER_ID(LID_F6), .STATIC_INIT(1'b1)) u_f6 (
    .clk, .rst_n, .start(run_start[ST_F6]), .busy(f6_busy), .done(layer_done[ST_F6]),
    .filt_base(8'd0), .filt_count(8'(F6_N)),
    .p_we(tgt(p_we, ld_target, ST_F6)), .p_addr, .p_data,
    .in_raddr(f6_raddr_in), .in_rdata(f5_rdata),
    .out_we(f6_we), .out_waddr(f6_waddr), .out_wdata(f6_wdata));

  fm_buffer #(.DEPTH(F6_N), .DATA_W(DATA_W)) u_buf_f6 (
    .clk, .we(f6_we), .waddr(f6_waddr), .wdata(f6_wdata), .raddr(f7_raddr_in), .rdata(f6_rdata));

  // ---------------- fc3: 84 -> 10 (no ReLU) ----------------
  logic        f7_we;
  logic [3:0]  f7_waddr;
  data_t       f7_wdata;

  conv_layer #(.C(F6_N), .H(1), .W(1), .K(1), .NF_SLOT(F7_N), .NF_TOTAL(F7_N),
               .RELU(1'b0), .LAYER_ID(LID_F7), .STATIC_INIT(1'b1)) u_f7 (
    .clk, .rst_n, .start(run_start[ST_F7]), .busy(f7_busy), .done(layer_done[ST_F7]),
    .filt_base(8'd0), .filt_count(8'(F7_N)),
    .p_we(tgt(p_we, ld_target, ST_F7)), .p_addr, .p_data,
    .in_raddr(f7_raddr_in), .in_rdata(f6_rdata),
    .out_we(f7_we), .out_waddr(f7_waddr), .out_wdata(f7_wdata));

  fm_buffer #(.DEPTH(F7_N), .DATA_W(DATA_W)) u_buf_f7 (
    .clk, .we(f7_we), .waddr(f7_waddr), .wdata(f7_wdata), .raddr(o_raddr), .rdata(o_rdata));

  argmax_unit #(.N(F7_N)) u_argmax (
    .clk, .rst_n, .clear(ap_start), .we(f7_we), .idx(8'(f7_waddr)), .score(f7_wdata), .pred);

  // layer_done bits that belong to no layer
  assign layer_done[ST_IMG] = 1'b0;
  assign layer_done[8]      = 1'b0;

  // only one layer computes at a time
  always_comb begin
    if (rst_n)
      assert ($countones({c1_busy, s2_busy, c3_busy, s4_busy, f5_busy, f6_busy, f7_busy}) <= 1)
        else $error("two layers active at once");
  end

endmodule

// conv_layer: one CNN layer whose parameters are loaded at run time.
//
// Computes out[f][y][x] = act(bias[f] + sum_{c,ky,kx} w[f][c][ky][kx] *
// in[c][y+ky][x+kx]) over a valid (unpadded) window, stride 1. A fully
// connected layer is the case K = H = W: one output pixel per filter.
//
// Parameter slot. The layer owns a weight memory for NF_SLOT filters and a
// bias memory for NF_SLOT biases. Before a run the loader writes the group's
// parameters through p_we/p_addr/p_data: first filt_count*C*K*K weights in
// (filter, channel, ky, kx) order, then filt_count biases. A run computes that
// group only and writes it to output channels filt_base .. filt_base +
// filt_count - 1 of the output buffer. A layer with more filters than fit in
// the slot is therefore done as several load-and-run passes whose results
// are concatenated in the output buffer: the first convolution of LeNet-5 is
// run as a 4-filter group then a 2-filter group, which is how this design
// reproduces the partial-reconfiguration split into two smaller IPs.
//
// Datapath: one multiply-accumulate per clock, loops ordered filter, y, x,
// channel, ky, kx. Addresses are issued from counters; the input and weight
// memories answer one clock later, when the product is added to a 48-bit
// accumulator that starts from the bias (aligned to 2*FRAC fraction bits).
// After the last tap the accumulator is scaled, passed through ReLU (if RELU)
// and saturated, and written out the next clock.
//
// Timing: start is sampled on a clock edge; done pulses
// filt_count*HO*WO*C*K*K + 2 clocks later, in the same clock as the last
// output write. filt_base/filt_count must stay stable from the parameter
// load until done. The loop structure and the slot mechanism are this
// design's choices; the original IPs were produced by high-level synthesis.
module conv_layer
  import dcnn_pkg::*;
#(
  parameter int C           = 1,
  parameter int H           = 28,
  parameter int W           = 28,
  parameter int K           = 5,
  parameter int NF_SLOT     = 4,
  parameter int NF_TOTAL    = 6,
  parameter bit RELU        = 1'b1,
  parameter int LAYER_ID    = 0,
  parameter bit STATIC_INIT = 1'b0,
  localparam int HO         = H - K + 1,
  localparam int WO         = W - K + 1,
  localparam int KK         = K * K,
  localparam int CKK        = C * KK,
  localparam int IN_AW      = $clog2(C * H * W),
  localparam int OUT_AW     = $clog2(NF_TOTAL * HO * WO),
  localparam int W_DEPTH    = NF_SLOT * CKK,
  localparam int W_AW       = (W_DEPTH > 1) ? $clog2(W_DEPTH) : 1,
  localparam int B_AW       = (NF_SLOT > 1) ? $clog2(NF_SLOT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [7:0]        filt_base,
  input  logic [7:0]        filt_count,
  // parameter load port
  input  logic              p_we,
  input  logic [15:0]       p_addr,
  input  data_t             p_data,
  // input feature map (synchronous read)
  output logic [IN_AW-1:0]  in_raddr,
  input  data_t             in_rdata,
  // output feature map
  output logic              out_we,
  output logic [OUT_AW-1:0] out_waddr,
  output data_t             out_wdata
);

  // ---------------- parameter memories ----------------
  logic              w_we, b_we;
  logic [W_AW-1:0]   w_waddr, w_raddr;
  logic [B_AW-1:0]   b_waddr, b_raddr;
  data_t             w_rdata, b_rdata;
  int                n_w;

  always_comb begin
    n_w     = int'(filt_count) * CKK;
    w_we    = p_we && (int'(p_addr) < n_w);
    b_we    = p_we && (int'(p_addr) >= n_w);
    w_waddr = W_AW'(p_addr);
    b_waddr = B_AW'(int'(p_addr) - n_w);
  end

  weight_mem #(.DEPTH(W_DEPTH), .LAYER_ID(LAYER_ID), .STATIC_INIT(STATIC_INIT)) u_w (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(p_data), .raddr(w_raddr), .rdata(w_rdata));

  weight_mem #(.DEPTH(NF_SLOT), .LAYER_ID(LAYER_ID + LID_BIAS), .STATIC_INIT(STATIC_INIT)) u_b (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(p_data), .raddr(b_raddr), .rdata(b_rdata));

  // ---------------- loop counters (address stage) ----------------
  logic       active;
  logic [7:0] f, oy, ox, c, ky, kx;
  logic       at_first, at_last, at_end;

  always_comb begin
    at_first = (c == 0) && (ky == 0) && (kx == 0);
    at_last  = (int'(c) == C - 1) && (int'(ky) == K - 1) && (int'(kx) == K - 1);
    at_end   = at_last && (int'(ox) == WO - 1) && (int'(oy) == HO - 1) && (f == filt_count - 8'd1);
    in_raddr = IN_AW'(int'(c) * H * W + (int'(oy) + int'(ky)) * W + int'(ox) + int'(kx));
    w_raddr  = W_AW'(int'(f) * CKK + int'(c) * KK + int'(ky) * K + int'(kx));
    b_raddr  = B_AW'(f);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      {f, oy, ox, c, ky, kx} <= '0;
    end else if (start && !active) begin
      active <= (filt_count != 0);
      {f, oy, ox, c, ky, kx} <= '0;
    end else if (active) begin
      if (int'(kx) != K - 1) kx <= kx + 8'd1;
      else begin
        kx <= '0;
        if (int'(ky) != K - 1) ky <= ky + 8'd1;
        else begin
          ky <= '0;
          if (int'(c) != C - 1) c <= c + 8'd1;
          else begin
            c <= '0;
            if (int'(ox) != WO - 1) ox <= ox + 8'd1;
            else begin
              ox <= '0;
              if (int'(oy) != HO - 1) oy <= oy + 8'd1;
              else begin
                oy <= '0;
                f  <= f + 8'd1;
                if (at_end) active <= 1'b0;
              end
            end
          end
        end
      end
    end
  end

  // ---------------- MAC stage ----------------
  logic              v1, first1, last1, end1;
  logic [OUT_AW-1:0] oaddr1;
  acc_t              acc, acc_next, prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, first1, last1, end1} <= '0;
      oaddr1 <= '0;
    end else begin
      v1     <= active;
      first1 <= at_first;
      last1  <= at_last;
      end1   <= active && at_end;
      oaddr1 <= OUT_AW'((int'(filt_base) + int'(f)) * HO * WO + int'(oy) * WO + int'(ox));
    end
  end

  always_comb begin
    prod     = acc_t'(in_rdata) * acc_t'(w_rdata);
    acc_next = (first1 ? (acc_t'(b_rdata) <<< FRAC) : acc) + prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_we    <= 1'b0;
      out_waddr <= '0;
      out_wdata <= '0;
      done      <= 1'b0;
    end else begin
      if (v1) acc <= acc_next;
      out_we    <= v1 && last1;
      out_waddr <= oaddr1;
      out_wdata <= acc_to_out(acc_next, RELU);
      done      <= v1 && end1;
    end
  end

  assign busy = active || v1;

  // a group must fit the slot and the output buffer
  always_ff @(posedge clk) begin
    if (start && !active) begin
      assert (int'(filt_count) <= NF_SLOT && int'(filt_base) + int'(filt_count) <= NF_TOTAL)
        else $error("filter group %0d+%0d does not fit", filt_base, filt_count);
    end
  end

endmodule

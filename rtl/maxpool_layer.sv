// maxpool_layer: 2x2 max pooling with stride 2 between convolution layers.
//
// For each output position the four input values of its window are read one
// per clock from the previous layer's buffer (synchronous read), the running
// maximum is kept, and the result is written to this layer's output buffer.
// Input layout c*H*W + y*W + x, output c*(H/2)*(W/2) + y*(W/2) + x.
//
// Timing: start is sampled on a clock edge; done pulses C*(H/2)*(W/2)*4 + 2
// clocks later, with the last write. Pooling is not described in the source
// work; max pooling is this design's reading of the LeNet-5 subsampling layers.
module maxpool_layer
  import dcnn_pkg::*;
#(
  parameter int C       = 6,
  parameter int H       = 24,
  parameter int W       = 24,
  localparam int HO     = H / 2,
  localparam int WO     = W / 2,
  localparam int IN_AW  = $clog2(C * H * W),
  localparam int OUT_AW = $clog2(C * HO * WO)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [IN_AW-1:0]  in_raddr,
  input  data_t             in_rdata,
  output logic              out_we,
  output logic [OUT_AW-1:0] out_waddr,
  output data_t             out_wdata
);

  logic       active;
  logic [7:0] c, oy, ox;
  logic       dy, dx;
  logic       at_last, at_end;

  always_comb begin
    at_last  = dy && dx;
    at_end   = at_last && (int'(ox) == WO - 1) && (int'(oy) == HO - 1) && (int'(c) == C - 1);
    in_raddr = IN_AW'(int'(c) * H * W + (2 * int'(oy) + int'(dy)) * W + 2 * int'(ox) + int'(dx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      {c, oy, ox} <= '0;
      {dy, dx} <= '0;
    end else if (start && !active) begin
      active <= 1'b1;
      {c, oy, ox} <= '0;
      {dy, dx} <= '0;
    end else if (active) begin
      dx <= ~dx;
      if (dx) begin
        dy <= ~dy;
        if (dy) begin
          if (int'(ox) != WO - 1) ox <= ox + 8'd1;
          else begin
            ox <= '0;
            if (int'(oy) != HO - 1) oy <= oy + 8'd1;
            else begin
              oy <= '0;
              c  <= c + 8'd1;
              if (at_end) active <= 1'b0;
            end
          end
        end
      end
    end
  end

  logic              v1, first1, last1, end1;
  logic [OUT_AW-1:0] oaddr1;
  data_t             mx, mx_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, first1, last1, end1} <= '0;
      oaddr1 <= '0;
    end else begin
      v1     <= active;
      first1 <= !dy && !dx;
      last1  <= at_last;
      end1   <= active && at_end;
      oaddr1 <= OUT_AW'(int'(c) * HO * WO + int'(oy) * WO + int'(ox));
    end
  end

  always_comb mx_next = (first1 || in_rdata > mx) ? in_rdata : mx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mx        <= '0;
      out_we    <= 1'b0;
      out_waddr <= '0;
      out_wdata <= '0;
      done      <= 1'b0;
    end else begin
      if (v1) mx <= mx_next;
      out_we    <= v1 && last1;
      out_waddr <= oaddr1;
      out_wdata <= mx_next;
      done      <= v1 && end1;
    end
  end

  assign busy = active || v1;

endmodule

// weight_mem: parameter memory of one layer.
//
// Holds a layer's weights (or biases). A layer whose parameters are streamed
// at run time is written word by word through (we, waddr, wdata). A layer whose
// parameters stay on chip is preloaded at configuration time when STATIC_INIT
// is set, with dcnn_pkg::static_param(LAYER_ID, address) as the contents (a
// stand-in for trained values); it can still be overwritten by the stream, so
// the same hardware serves both the all-streamed and the partly-streamed use.
// Read is synchronous: rdata follows raddr by one clock.
module weight_mem
  import dcnn_pkg::*;
#(
  parameter int DEPTH       = 150,
  parameter int LAYER_ID    = 0,
  parameter bit STATIC_INIT = 1'b0,
  localparam int AW         = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr,
  output data_t         rdata
);

  data_t mem [DEPTH];

  initial begin
    if (STATIC_INIT) begin
      for (int i = 0; i < DEPTH; i++) mem[i] = static_param(LAYER_ID, i);
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

// fm_buffer: feature-map buffer placed between two layers.
//
// A simple dual-port RAM: the producing layer writes through (we, waddr,
// wdata), the consuming layer reads through raddr and sees rdata one clock
// later. Maps to one block RAM on an FPGA. Feature maps are stored channel
// by channel, row by row: address = c*H*W + y*W + x. The contents are not
// reset; every word is written before it is read in a normal run.
module fm_buffer #(
  parameter int DEPTH  = 3456,
  parameter int DATA_W = 16,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

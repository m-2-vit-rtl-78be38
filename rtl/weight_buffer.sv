// weight_buffer -- global weight buffer (uniform or APoT weights).
//
// A single-port-write, single-port-read memory written from the off-chip
// side and read by the global controller; its output is broadcast to all
// computing cores. The accelerator has two instances: one of WIDTH = 576
// holding 4-bit depthwise weights and 8-bit uniform weights (T/2 filters x
// 9 channels x 8 bit per word), and one of WIDTH = 504 holding APoT codes
// (S filters x N channels x 7 bit per word).
// Timing: rdata is registered, valid the cycle after re, and holds its
// value while re is low. Depth and widths are this design's choices; the
// paper names the two buffers but gives no size.
module weight_buffer #(
  parameter int WIDTH  = 576,
  parameter int ADDR_W = 8
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [WIDTH-1:0]  rdata
);
  logic [WIDTH-1:0] mem [1 << ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

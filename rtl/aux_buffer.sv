// aux_buffer -- auxiliary buffer of one computing core.
//
// Caches the core's requantised results: one word per depthwise output group
// (T pixels x M channels, 8 bit each) or per pointwise output pixel (T/2
// uniform-filter results followed by S APoT-filter results in the low bytes).
// The write port belongs to the core; the read port leads out to the
// off-chip side. Timing: rdata is registered, valid the cycle after re, and
// holds while re is low. Size and word layout are this design's choices.
module aux_buffer #(
  parameter int WIDTH  = 384,
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

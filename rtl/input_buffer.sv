// input_buffer -- global input (activation) buffer, one bank per core.
//
// Each computing core processes its own batch element, so the buffer has one
// bank per core. All banks are read at the same address in the same cycle
// (the cores run in lockstep); the off-chip side writes one bank at a time.
// A word holds T+2 input columns (R rows x M channels of 8 bit each) for a
// depthwise convolution, or 18 vectors of 9 input channels of one pixel for
// a pointwise convolution.
// Timing: rdata is registered, valid the cycle after re, and holds while re
// is low. Banking, word width and depth are this design's choices.
module input_buffer #(
  parameter int BANKS  = 16,
  parameter int WIDTH  = 1296,
  parameter int ADDR_W = 8
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(BANKS)-1:0]     wbank,
  input  logic [ADDR_W-1:0]            waddr,
  input  logic [WIDTH-1:0]             wdata,
  input  logic                         re,
  input  logic [ADDR_W-1:0]            raddr,
  output logic [BANKS-1:0][WIDTH-1:0]  rdata
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [1 << ADDR_W];

    always_ff @(posedge clk) begin
      if (we && wbank == b) mem[waddr] <= wdata;
      if (re) rdata[b] <= mem[raddr];
    end
  end
endmodule

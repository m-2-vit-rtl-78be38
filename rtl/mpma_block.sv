// mpma_block -- one PE block of the Mixed-Precision Multiplication Array.
//
// R 4x8-bit multipliers work in parallel; an adder sums their R products and
// a register (REG) accumulates that sum across cycles. In single mode the R
// multipliers take the R rows of one kernel column of a depthwise filter, so
// three cycles (three kernel columns) complete one 3x3 output pixel. In merged
// mode they take R input channels of a pointwise filter and the REG
// accumulates along the input-channel dimension.
// Timing: when en is high the REG is loaded at the clock edge with
// sum (first = 1) or acc + sum (first = 0); acc is the REG output.
// Structure follows the paper's PE block; widths are this design's choice.
module mpma_block #(
  parameter int R     = 3,
  parameter int ACC_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [R-1:0][7:0]       a,         // activations
  input  logic [R-1:0][3:0]       w,         // weight nibbles
  input  logic                    w_signed,  // nibbles are signed
  input  logic                    en,        // accumulate this cycle
  input  logic                    first,     // restart the accumulation
  output logic signed [ACC_W-1:0] acc
);
  logic signed [12:0]       prod [R];
  logic signed [ACC_W-1:0]   sum;

  for (genvar r = 0; r < R; r++) begin : g_mul
    ps_mul u_mul (.a(a[r]), .w(w[r]), .w_signed(w_signed), .p(prod[r]));
  end

  always_comb begin
    sum = '0;
    for (int r = 0; r < R; r++) sum += ACC_W'(prod[r]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)     acc <= '0;
    else if (en)    acc <= first ? sum : acc + sum;
  end
endmodule

// shifter_unit -- shifter unit (SU) of the Shifter and Adder Tree engine.
//
// Multiplies an unsigned 8-bit activation A by an additive-power-of-two
// weight W = s * (2^p1 + 2^p2), p1, p2 in [-(2^EW-1), 0], with two shifters
// and one adder instead of a multiplier. The APoT code is
// {sign, |p1|, |p2|} (sign 1 = negative). To keep the product exact the
// activation is widened by F = 2^EW-1 fraction bits before the right shifts,
// so the output is y = A * W * 2^F, a signed integer.
// Two shifters and an adder follow the paper; the code layout, the exponent
// range (EW = 3 gives p in [-7, 0]) and the fraction bits are this design's
// choices. Purely combinational.
module shifter_unit #(
  parameter int EW = 3
) (
  input  logic [7:0]                  a,
  input  logic [2*EW:0]               w,   // {s, |p1|, |p2|}
  output logic signed [8+(1<<EW):0]   y    // A * W * 2^(2^EW-1)
);
  localparam int F  = (1 << EW) - 1;
  localparam int XW = 8 + F;  // widened activation

  logic [XW-1:0] ax, sh1, sh2;
  logic [XW:0]   sum;

  always_comb begin
    ax  = XW'(a) << F;
    sh1 = ax >> w[2*EW-1:EW];  // shifter 1: A * 2^p1
    sh2 = ax >> w[EW-1:0];     // shifter 2: A * 2^p2
    sum = {1'b0, sh1} + {1'b0, sh2};
    y   = w[2*EW] ? -$signed({1'b0, sum}) : $signed({1'b0, sum});
  end
endmodule

// ps_mul -- precision-scalable 4-bit x 8-bit multiplier of the MPMA.
//
// Multiplies an unsigned 8-bit activation by a 4-bit weight nibble. The nibble
// is read as signed (a 4-bit depthwise weight, or the high half of an 8-bit
// weight) or as unsigned (the low half of an 8-bit weight), chosen by
// w_signed. Two such multipliers, one in each of two adjacent PE tiles, give
// an 8x8 product as p_hi * 16 + p_lo; that merge is done in the MPMA's
// accumulator. The 4x8 organisation follows the paper; the signed/unsigned
// nibble control is this design's way of making the merge exact.
// Purely combinational.
module ps_mul (
  input  logic [7:0]         a,         // activation, unsigned
  input  logic [3:0]         w,         // weight nibble
  input  logic               w_signed,  // 1: nibble is two's complement
  output logic signed [12:0] p          // a * w, range [-2040, 3825]
);
  logic signed [4:0]  w_ext;
  logic signed [8:0]  a_ext;
  logic signed [13:0] prod;

  always_comb begin
    w_ext = {w_signed & w[3], w};
    a_ext = {1'b0, a};
    prod  = w_ext * a_ext;
    p     = prod[12:0];
  end
endmodule

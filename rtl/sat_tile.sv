// sat_tile -- one processing tile of the Shifter and Adder Tree (SAT) engine.
//
// N shifter units each multiply one activation by one APoT weight of the
// tile's filter (one input channel each); an adder tree sums the N results
// into one partial sum. In the filters-parallel dataflow all tiles receive
// the same activations and each tile holds a different filter.
// Purely combinational; the accumulation across cycles is in sat.
// N shifter units and an adder tree follow the paper; the tree is written as
// a sum and left to synthesis to balance.
module sat_tile #(
  parameter int N  = 9,
  parameter int EW = 3,
  parameter int SW = 8 + (1 << EW) + 1 + $clog2(N)  // sum width
) (
  input  logic [N-1:0][7:0]    a,
  input  logic [N-1:0][2*EW:0] w,
  output logic signed [SW-1:0] sum
);
  localparam int YW = 9 + (1 << EW);
  logic signed [YW-1:0] y [N];

  for (genvar i = 0; i < N; i++) begin : g_su
    shifter_unit #(.EW(EW)) u_su (.a(a[i]), .w(w[i]), .y(y[i]));
  end

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum += SW'(y[i]);
  end
endmodule

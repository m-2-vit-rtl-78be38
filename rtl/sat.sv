// sat -- Shifter and Adder Tree engine for APoT-quantised PWConvs/MatMuls.
//
// S tiles of N shifter units plus an adder tree (sat_tile). Filters-parallel
// dataflow: the N activations of one step (N input channels of one pixel)
// are broadcast to all tiles, tile s holds filter s of the current filter
// group, and each tile's adder-tree output is accumulated across steps (input
// channel groups) in a per-tile register.
// Interface: with valid high a step (a, w, first, last) is taken at the clock
// edge; first restarts and last ends an accumulation. w[s][i] is the APoT
// code of filter s, input channel i. acc[s] is the filter's result scaled by
// 2^(2^EW-1).
// Timing: two register stages (inputs, then accumulator), the same as the
// MPMA, so that both engines finish a PWConv step together; out_valid rises
// two cycles after a step with last set.
// Tiles, shifter units, adder tree and the dataflow follow the paper; the
// accumulation register and the register stages are this design's choices.
module sat #(
  parameter int S     = 8,
  parameter int N     = 9,
  parameter int EW    = 3,
  parameter int ACC_W = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          valid,
  input  logic                          first,
  input  logic                          last,
  input  logic [N-1:0][7:0]             a,
  input  logic [S-1:0][N-1:0][2*EW:0]   w,
  output logic                          out_valid,
  output logic [S-1:0][ACC_W-1:0]       acc
);
  localparam int SW = 8 + (1 << EW) + 1 + $clog2(N);

  logic [N-1:0][7:0]           a_q;
  logic [S-1:0][N-1:0][2*EW:0] w_q;
  logic                        v_q, first_q, last_q;
  logic signed [SW-1:0]        sum [S];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q <= '0; w_q <= '0; v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
    end else begin
      v_q <= valid; first_q <= first; last_q <= last;
      if (valid) begin
        a_q <= a;
        w_q <= w;
      end
    end
  end

  for (genvar s = 0; s < S; s++) begin : g_tile
    sat_tile #(.N(N), .EW(EW)) u_tile (.a(a_q), .w(w_q[s]), .sum(sum[s]));

    always_ff @(posedge clk) begin
      if (!rst_n)   acc[s] <= '0;
      else if (v_q) acc[s] <= first_q ? ACC_W'(sum[s]) : acc[s] + ACC_W'(sum[s]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_q & last_q;
  end
endmodule

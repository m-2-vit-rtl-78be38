// mpma -- Mixed-Precision Multiplication Array.
//
// T processing tiles, each of M PE blocks of R 4x8-bit multipliers. Two modes:
//
// Single mode (4-bit depthwise 3x3 convolution, output-parallel dataflow).
//   Block m of tile t works on channel m; its R multipliers take the R rows
//   of one kernel column, and its REG accumulates over the 3 kernel columns
//   (3 cycles). All tiles get the same weights (broadcast) and work on
//   adjacent sliding windows, i.e. on T adjacent output pixels. The input
//   columns sit in a shift register, one column (M channels x R rows) per
//   tile: at kernel column 0 the tiles are loaded in parallel with columns
//   0..T-1 (load), at kernel columns 1 and 2 every tile takes its upper
//   neighbour's column and the new column enters tile T-1 (shift). This
//   reuses the columns shared by overlapping windows.
//
// Merged mode (8-bit pointwise convolution / MatMul, filters-parallel).
//   Tiles 2p and 2p+1 form a pair that computes filter p: tile 2p multiplies
//   by the low (unsigned) nibble of each 8-bit weight, tile 2p+1 by the high
//   (signed) nibble. All R x M multipliers of a tile take different input
//   channels of the same broadcast activation vector, and the REGs
//   accumulate across input-channel groups. The pair's result is
//   sum_m (REG_hi[m] * 16 + REG_lo[m]).
//
// Interface: with valid high the inputs of a step are taken at the clock
// edge; load/shift (single mode) say how the column register is updated;
// first restarts and last ends an accumulation. Weights: merged mode uses all
// of w (filter p, vector element m*R+r); single mode uses the low M*R nibbles
// of w, nibble m*R+r being channel m, kernel row r of the current kernel
// column. In merged mode the activation vector is load_cols[0].
// Timing: two register stages (inputs, then REGs); out_valid rises two
// cycles after a step with last set, when dw_out / pw_out are final. One step
// per cycle, no stalls.
// The tile/block/multiplier organisation, the two dataflows, the shift chain
// and the low/high merge follow the paper; signedness, register stages and
// port layout are this design's choices.
module mpma #(
  parameter int T     = 16,
  parameter int M     = 3,
  parameter int R     = 3,
  parameter int ACC_W = 24
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              valid,
  input  m2vit_pkg::mpma_mode_e                     mode,
  input  logic                              load,
  input  logic                              shift,
  input  logic                              first,
  input  logic                              last,
  input  logic [T-1:0][M-1:0][R-1:0][7:0]   load_cols,
  input  logic [M-1:0][R-1:0][7:0]          shift_col,
  input  logic [T/2-1:0][M*R-1:0][7:0]      w,
  output logic                              out_valid,
  output logic [T-1:0][M-1:0][ACC_W-1:0]    dw_out,
  output logic [T/2-1:0][ACC_W+4:0]         pw_out
);
  // Stage 1: column shift register, per-tile weight nibbles, control.
  logic [T-1:0][M-1:0][R-1:0][7:0] col_q;
  logic [T-1:0][M-1:0][R-1:0][3:0] w_q;
  logic [T-1:0]                    wsig_q;
  logic                            v_q, first_q, last_q;

  logic [M*R*8-1:0]    w0;
  logic [M*R-1:0][3:0] w_dw;
  assign w0   = w[0];
  assign w_dw = w0[M*R*4-1:0];  // single mode: low M*R nibbles of the word

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col_q   <= '0;
      w_q     <= '0;
      wsig_q  <= '0;
      v_q     <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      v_q     <= valid;
      first_q <= first;
      last_q  <= last;
      if (valid) begin
        for (int t = 0; t < T; t++) begin
          if (mode == m2vit_pkg::MODE_SINGLE) begin
            if (load)       col_q[t] <= load_cols[t];
            else if (shift) col_q[t] <= (t == T - 1) ? shift_col : col_q[(t + 1) % T];
            for (int m = 0; m < M; m++)
              for (int r = 0; r < R; r++)
                w_q[t][m][r] <= w_dw[m*R + r];
            wsig_q[t] <= 1'b1;
          end else begin
            col_q[t] <= load_cols[0];
            for (int m = 0; m < M; m++)
              for (int r = 0; r < R; r++)
                w_q[t][m][r] <= (t % 2 == 0) ? w[t/2][m*R + r][3:0] : w[t/2][m*R + r][7:4];
            wsig_q[t] <= (t % 2 == 1);
          end
        end
      end
    end
  end

  // Stage 2: PE blocks with their accumulating REGs.
  logic signed [ACC_W-1:0] acc [T][M];

  for (genvar t = 0; t < T; t++) begin : g_tile
    for (genvar m = 0; m < M; m++) begin : g_block
      mpma_block #(.R(R), .ACC_W(ACC_W)) u_blk (
        .clk, .rst_n,
        .a(col_q[t][m]), .w(w_q[t][m]), .w_signed(wsig_q[t]),
        .en(v_q), .first(first_q), .acc(acc[t][m])
      );
      assign dw_out[t][m] = acc[t][m];
    end
  end

  // Merged-mode accumulator: the high-nibble tile's sums carry weight 2^4.
  for (genvar p = 0; p < T / 2; p++) begin : g_pair
    logic signed [ACC_W+4:0] s;
    always_comb begin
      s = '0;
      for (int m = 0; m < M; m++)
        s = s + ((ACC_W+5)'(acc[2*p+1][m]) <<< 4) + (ACC_W+5)'(acc[2*p][m]);
    end
    assign pw_out[p] = s;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_q & last_q;
  end
endmodule

// core_controller -- local controller of one computing core.
//
// Turns the step broadcast by the global controller into the controls of
// the core's two engines. The step arrives one cycle before the buffer data,
// so it is registered once to line up with the input and weight words. Then:
//   OP_DW: the MPMA runs in single mode; at kernel column 0 the T tiles are
//     loaded with input columns 0..T-1 of the word, at kernel columns 1 and
//     2 the chain shifts and column T-1+kx enters the last tile.
//   OP_PW: the MPMA runs in merged mode and the SAT runs alongside it; both
//     get vector `slot` of the word (9 input channels of one pixel).
// The result address and the two requantisation shifts travel down a
// two-stage delay line so that they are at hand when the engines raise
// out_valid.
// Timing: engine controls are valid one cycle after the step; wb_* are valid
// three cycles after a step that carried last.
// What the engines do in each mode follows the paper; the step format and the
// alignment stages are this design's choices.
module core_controller
  import m2vit_pkg::step_t, m2vit_pkg::mpma_mode_e, m2vit_pkg::MODE_SINGLE,
         m2vit_pkg::MODE_MERGED, m2vit_pkg::OP_DW, m2vit_pkg::OP_PW, m2vit_pkg::op_e;
#(
  parameter int T      = 16,
  parameter int M      = 3,
  parameter int R      = 3,
  parameter int SLOTS  = T + R - 1,
  parameter int ADDR_W = 8,
  parameter int SH_W   = 5
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  step_t                                  step,
  input  logic [SLOTS-1:0][M-1:0][R-1:0][7:0]    in_word,
  // MPMA controls
  output logic                                   mp_valid,
  output mpma_mode_e                             mp_mode,
  output logic                                   mp_load,
  output logic                                   mp_shift,
  output logic                                   first,
  output logic                                   last,
  output logic [T-1:0][M-1:0][R-1:0][7:0]        mp_cols,
  output logic [M-1:0][R-1:0][7:0]               mp_shift_col,
  // SAT controls
  output logic                                   sat_valid,
  output logic [M*R-1:0][7:0]                    sat_a,
  // write-back information, valid with the engines' out_valid
  output op_e                                    wb_op,
  output logic [ADDR_W-1:0]                      wb_addr,
  output logic [SH_W-1:0]                        wb_shift_u,
  output logic [SH_W-1:0]                        wb_shift_a
);
  step_t s_q, d1, d2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_q <= '0; d1 <= '0; d2 <= '0;
    end else begin
      s_q <= step;
      d1  <= s_q;
      d2  <= d1;
    end
  end

  logic [M-1:0][R-1:0][7:0] vec;

  always_comb begin
    vec          = in_word[s_q.slot];
    mp_valid     = s_q.valid;
    mp_mode      = (s_q.op == OP_PW) ? MODE_MERGED : MODE_SINGLE;
    mp_load      = (s_q.kx == 2'd0);
    mp_shift     = (s_q.kx != 2'd0);
    first        = s_q.first;
    last         = s_q.last;
    mp_shift_col = in_word[T - 1 + 32'(s_q.kx)];
    mp_cols      = in_word[T-1:0];
    if (s_q.op == OP_PW) mp_cols[0] = vec;
    sat_valid    = s_q.valid && (s_q.op == OP_PW);
    sat_a        = vec;
    wb_op        = d2.op;
    wb_addr      = d2.out_addr;
    wb_shift_u   = d2.shift_u;
    wb_shift_a   = d2.shift_a;
  end
endmodule

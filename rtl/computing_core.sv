// computing_core -- one of the L computing cores.
//
// Holds a local controller, the Mixed-Precision Multiplication Array (MPMA),
// the Shifter and Adder Tree engine (SAT) and an auxiliary buffer. The core
// receives its own bank of the input buffer and the weight words broadcast
// to all cores. For a depthwise layer the MPMA (single mode) produces T
// output pixels x M channels per three cycles; for a pointwise layer the MPMA
// (merged mode) computes T/2 uniform filters and the SAT S APoT filters of
// the same pixel in parallel, sharing the input vector, so that the 1:1
// split of filters between the two schemes keeps both engines busy.
// Results are requantised to unsigned 8 bit, clip(round(acc / 2^shift), 0,
// 255), and written to the auxiliary buffer, which the off-chip side reads
// through ax_*.
// Timing: see core_controller; a result is written three cycles after the
// step that carried last, and ax_rdata is valid the cycle after ax_re.
// The core's parts follow the paper; requantisation, word layouts and the
// read-out port are this design's choices.
module computing_core
  import m2vit_pkg::*;
#(
  parameter int CT = T,
  parameter int CM = M,
  parameter int CR = R,
  parameter int CN = N,
  parameter int CS = S
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  step_t                                  step,
  input  logic [CT+CR-2:0][CM-1:0][CR-1:0][7:0]  in_word,
  input  logic [CT/2-1:0][CM*CR-1:0][7:0]        wu_word,
  input  logic [CS-1:0][CN-1:0][APW-1:0]         wa_word,
  input  logic                                   ax_re,
  input  logic [ADDR_W-1:0]                      ax_addr,
  output logic [CT*CM*8-1:0]                     ax_rdata
);
  localparam int MP_ACC  = 24;
  localparam int SAT_ACC = 32;

  mpma_mode_e                        mp_mode;
  logic                              mp_valid, mp_load, mp_shift, first, last, sat_valid;
  logic [CT-1:0][CM-1:0][CR-1:0][7:0] mp_cols;
  logic [CM-1:0][CR-1:0][7:0]         mp_shift_col;
  logic [CM*CR-1:0][7:0]              sat_a;
  op_e                               wb_op;
  logic [ADDR_W-1:0]                 wb_addr;
  logic [SH_W-1:0]                   wb_shift_u, wb_shift_a;

  core_controller #(.T(CT), .M(CM), .R(CR), .ADDR_W(ADDR_W), .SH_W(SH_W)) u_ctrl (
    .clk, .rst_n, .step, .in_word,
    .mp_valid, .mp_mode, .mp_load, .mp_shift, .first, .last, .mp_cols, .mp_shift_col,
    .sat_valid, .sat_a, .wb_op, .wb_addr, .wb_shift_u, .wb_shift_a
  );

  logic                                mp_out_valid, sat_out_valid;
  logic [CT-1:0][CM-1:0][MP_ACC-1:0]   dw_out;
  logic [CT/2-1:0][MP_ACC+4:0]         pw_out;
  logic [CS-1:0][SAT_ACC-1:0]          sat_acc;

  mpma #(.T(CT), .M(CM), .R(CR), .ACC_W(MP_ACC)) u_mpma (
    .clk, .rst_n, .valid(mp_valid), .mode(mp_mode), .load(mp_load), .shift(mp_shift),
    .first, .last, .load_cols(mp_cols), .shift_col(mp_shift_col), .w(wu_word),
    .out_valid(mp_out_valid), .dw_out, .pw_out
  );

  sat #(.S(CS), .N(CN), .EW(EW), .ACC_W(SAT_ACC)) u_sat (
    .clk, .rst_n, .valid(sat_valid), .first, .last, .a(sat_a), .w(wa_word),
    .out_valid(sat_out_valid), .acc(sat_acc)
  );

  // Write-back: requantise and pack one auxiliary-buffer word.
  logic                  aux_we;
  logic [CT*CM-1:0][7:0] aux_wdata;

  always_comb begin
    aux_we    = mp_out_valid;
    aux_wdata = '0;
    if (wb_op == OP_DW) begin
      for (int t = 0; t < CT; t++)
        for (int m = 0; m < CM; m++)
          aux_wdata[t*CM + m] = requant(40'($signed(dw_out[t][m])), wb_shift_u);
    end else begin
      for (int p = 0; p < CT / 2; p++)
        aux_wdata[p] = requant(40'($signed(pw_out[p])), wb_shift_u);
      for (int s = 0; s < CS; s++)
        aux_wdata[CT/2 + s] = requant(40'($signed(sat_acc[s])), wb_shift_a);
    end
  end

  aux_buffer #(.WIDTH(CT*CM*8), .ADDR_W(ADDR_W)) u_aux (
    .clk, .we(aux_we), .waddr(wb_addr), .wdata(aux_wdata),
    .re(ax_re), .raddr(ax_addr), .rdata(ax_rdata)
  );

  // In a pointwise step the two engines run side by side and finish together.
  a_engines_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    sat_out_valid |-> mp_out_valid);
endmodule

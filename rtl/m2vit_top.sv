// m2vit_top -- M2-ViT accelerator for hybrid (convolution + attention)
// vision transformers with two-level mixed quantisation.
//
// A global controller, three global buffers (inputs, uniform weights, APoT
// weights) and L computing cores. Each core works on a different batch
// element; all cores run the same instruction in lockstep and share the
// broadcast weights. Inside a core the MPMA runs 4-bit depthwise
// convolutions (single mode) or 8-bit uniform pointwise convolutions and
// MatMuls (merged mode), and the SAT runs the APoT-quantised filters of the
// same pointwise layer in parallel.
// Off-chip memory is outside this module: it fills the buffers through the
// ib_*, wu_* and wa_* write ports, loads instructions through iq_*, and reads
// results from a chosen core's auxiliary buffer through ax_* (rdata valid
// the cycle after ax_re).
// Timing: after start, one step per cycle; done pulses when the last
// instruction's results are in the auxiliary buffers.
// The organisation follows the paper; port layout, buffer sizes and the
// instruction format are this design's choices.
module m2vit_top
  import m2vit_pkg::*;
#(
  parameter int NC = L,   // computing cores
  parameter int IQ_DEPTH = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // instruction queue and control
  input  logic                         iq_we,
  input  logic [$clog2(IQ_DEPTH)-1:0]  iq_addr,
  input  instr_t                       iq_wdata,
  input  logic                         start,
  input  logic [$clog2(IQ_DEPTH):0]    n_instr,
  output logic                         busy,
  output logic                         done,
  // input buffer write (one bank per core)
  input  logic                         ib_we,
  input  logic [$clog2(NC)-1:0]        ib_bank,
  input  logic [ADDR_W-1:0]            ib_addr,
  input  logic [IN_WORD-1:0]           ib_wdata,
  // weight buffer writes
  input  logic                         wu_we,
  input  logic [ADDR_W-1:0]            wu_addr,
  input  logic [WU_WORD-1:0]           wu_wdata,
  input  logic                         wa_we,
  input  logic [ADDR_W-1:0]            wa_addr,
  input  logic [WA_WORD-1:0]           wa_wdata,
  // auxiliary buffer read-out
  input  logic                         ax_re,
  input  logic [$clog2(NC)-1:0]        ax_core,
  input  logic [ADDR_W-1:0]            ax_addr,
  output logic [AUX_WORD-1:0]          ax_rdata
);
  step_t step;
  logic ib_re, wu_re, wa_re;
  logic [ADDR_W-1:0] ib_raddr, wu_raddr, wa_raddr;

  global_controller #(.IQ_DEPTH(IQ_DEPTH), .ADDR_W(ADDR_W), .SLOTS(SLOTS)) u_gctrl (
    .clk, .rst_n, .iq_we, .iq_addr, .iq_wdata, .start, .n_instr, .busy, .done,
    .ib_re, .ib_raddr, .wu_re, .wu_raddr, .wa_re, .wa_raddr, .step
  );

  logic [NC-1:0][IN_WORD-1:0] ib_rdata;
  logic [WU_WORD-1:0]         wu_rdata;
  logic [WA_WORD-1:0]         wa_rdata;

  input_buffer #(.BANKS(NC), .WIDTH(IN_WORD), .ADDR_W(ADDR_W)) u_ibuf (
    .clk, .we(ib_we), .wbank(ib_bank), .waddr(ib_addr), .wdata(ib_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  weight_buffer #(.WIDTH(WU_WORD), .ADDR_W(ADDR_W)) u_wbuf_uniform (
    .clk, .we(wu_we), .waddr(wu_addr), .wdata(wu_wdata),
    .re(wu_re), .raddr(wu_raddr), .rdata(wu_rdata)
  );

  weight_buffer #(.WIDTH(WA_WORD), .ADDR_W(ADDR_W)) u_wbuf_apot (
    .clk, .we(wa_we), .waddr(wa_addr), .wdata(wa_wdata),
    .re(wa_re), .raddr(wa_raddr), .rdata(wa_rdata)
  );

  logic [NC-1:0][AUX_WORD-1:0] core_rdata;
  logic [$clog2(NC)-1:0]       ax_core_q;

  for (genvar c = 0; c < NC; c++) begin : g_core
    computing_core u_core (
      .clk, .rst_n, .step,
      .in_word(ib_rdata[c]), .wu_word(wu_rdata), .wa_word(wa_rdata),
      .ax_re(ax_re && ax_core == c), .ax_addr, .ax_rdata(core_rdata[c])
    );
  end

  always_ff @(posedge clk) if (ax_re) ax_core_q <= ax_core;
  assign ax_rdata = core_rdata[ax_core_q];
endmodule

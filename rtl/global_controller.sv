// global_controller -- instruction sequencer of the M2-ViT accelerator.
//
// The quantisation schemes chosen offline (which filters are uniform, which
// APoT, which layers are 4-bit depthwise) are handed to the accelerator as a
// list of instructions. This controller holds them in a small queue, runs
// them one after another, and for each one walks its loop nest, issuing one
// step per cycle: read addresses for the global input and weight buffers and
// a step_t control word that is broadcast to all computing cores.
//
//   OP_DW (MPMA single mode): for o < n_outer (channel groups of M), for
//     md < n_mid (input words of the group), for kx < 3 (kernel columns).
//     Input word in_base + o*n_mid + md (read at kx = 0 only, the buffer
//     holds its output), weight word wu_base + 3*o + kx, result word
//     out_base + o*n_mid + md.
//   OP_PW (MPMA merged mode and SAT in parallel): for o < n_outer (filter
//     groups), for md < n_mid (pixels), for c < n_inner (9-channel input
//     groups). Input word in_base + md*in_stride + c/18, vector c%18 of it;
//     uniform and APoT weight words wu_base/wa_base + o*n_inner + c; result
//     word out_base + o*n_mid + md.
//
// Interface: the host writes instructions with iq_we/iq_addr/iq_wdata, then
// pulses start with n_instr. busy is high while running; done pulses for one
// cycle after the last result has been written. Every loop count must be at
// least 1.
// Timing: one step per cycle without stalls; after an instruction's last
// step the controller waits DRAIN cycles for the core pipelines to empty
// (buffer read, two engine stages, write-back) before the next one.
// The instruction format and the loop nests are this design's own; the paper
// says only that the selected schemes are recorded as instructions.
module global_controller
  import m2vit_pkg::instr_t, m2vit_pkg::step_t, m2vit_pkg::OP_DW, m2vit_pkg::OP_PW;
#(
  parameter int IQ_DEPTH = 16,
  parameter int ADDR_W   = 8,
  parameter int SLOTS    = 18,
  parameter int DRAIN    = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        iq_we,
  input  logic [$clog2(IQ_DEPTH)-1:0] iq_addr,
  input  instr_t                      iq_wdata,
  input  logic                        start,
  input  logic [$clog2(IQ_DEPTH):0]   n_instr,
  output logic                        busy,
  output logic                        done,
  output logic                        ib_re,
  output logic [ADDR_W-1:0]           ib_raddr,
  output logic                        wu_re,
  output logic [ADDR_W-1:0]           wu_raddr,
  output logic                        wa_re,
  output logic [ADDR_W-1:0]           wa_raddr,
  output step_t                       step
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  instr_t iq [IQ_DEPTH];
  instr_t cur;
  state_e state;
  logic [$clog2(IQ_DEPTH):0] pc, n_q;
  logic [15:0] o, md, c;
  logic [4:0]  slot;
  logic [15:0] word;
  logic [3:0]  drain;

  always_ff @(posedge clk) if (iq_we) iq[iq_addr] <= iq_wdata;

  logic [15:0] inner_n;
  logic        end_c, end_md, end_o;
  always_comb begin
    inner_n = (cur.op == OP_DW) ? 16'd3 : cur.n_inner;
    end_c   = (c == inner_n - 1);
    end_md  = end_c && (md == cur.n_mid - 1);
    end_o   = end_md && (o == cur.n_outer - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc <= '0; n_q <= '0; o <= '0; md <= '0; c <= '0; slot <= '0; word <= '0;
      drain <= '0; done <= 1'b0; cur <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start && n_instr != 0) begin
          pc <= '0; n_q <= n_instr; cur <= iq[0];
          o <= '0; md <= '0; c <= '0; slot <= '0; word <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (end_c) begin
            c <= '0; slot <= '0; word <= '0;
            if (end_md) begin
              md <= '0;
              if (end_o) begin
                o <= '0;
                drain <= 4'(DRAIN - 1);
                state <= S_DRAIN;
              end else o <= o + 1;
            end else md <= md + 1;
          end else begin
            c <= c + 1;
            if (slot == 5'(SLOTS - 1)) begin slot <= '0; word <= word + 1; end
            else slot <= slot + 1;
          end
        end
        S_DRAIN: begin
          if (drain != 0) drain <= drain - 1;
          else if (pc + 1 == n_q) begin
            done <= 1'b1;
            state <= S_IDLE;
          end else begin
            pc <= pc + 1;
            cur <= iq[pc + 1];
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // Step issue: addresses and control of the current loop position.
  logic [15:0] grp, res;
  always_comb begin
    grp = o * cur.n_mid + md;  // input/result index within the instruction
    res = 16'(cur.out_base) + grp;
    step          = '0;
    step.valid    = (state == S_RUN);
    step.op       = cur.op;
    step.first    = (c == 0);
    step.last     = end_c;
    step.kx       = c[1:0];
    step.slot     = slot;
    step.out_addr = res[ADDR_W-1:0];
    step.shift_u  = cur.shift_u;
    step.shift_a  = cur.shift_a;
    if (cur.op == OP_DW) begin
      ib_re    = (state == S_RUN) && (c == 0);
      ib_raddr = ADDR_W'(16'(cur.in_base) + grp);
      wu_re    = (state == S_RUN);
      wu_raddr = ADDR_W'(16'(cur.wu_base) + 16'd3 * o + c);
      wa_re    = 1'b0;
      wa_raddr = '0;
    end else begin
      ib_re    = (state == S_RUN);
      ib_raddr = ADDR_W'(16'(cur.in_base) + md * 16'(cur.in_stride) + word);
      wu_re    = (state == S_RUN);
      wu_raddr = ADDR_W'(16'(cur.wu_base) + o * cur.n_inner + c);
      wa_re    = (state == S_RUN);
      wa_raddr = ADDR_W'(16'(cur.wa_base) + o * cur.n_inner + c);
    end
  end

  // Loop counts of a running instruction must be non-zero.
  a_counts: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_RUN |-> (cur.n_outer != 0 && cur.n_mid != 0 &&
                        (cur.op == OP_DW || cur.n_inner != 0)));
endmodule

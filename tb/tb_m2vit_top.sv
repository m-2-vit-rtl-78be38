// tb_m2vit_top -- end-to-end test of the accelerator at its default size
// (16 cores, 16 MPMA tiles, 8 SAT tiles).
//
// Every core gets its own random batch element. Three instructions run from
// one start:
//   1. a 4-bit depthwise 3x3 convolution (MPMA single mode) of a 6-channel,
//      6 x 18 image, output 6 channels x 4 rows x 16 columns;
//   2. a mixed-scheme pointwise convolution, 18 input channels, 4 pixels,
//      two filter groups of 8 uniform 8-bit filters (MPMA merged mode) and
//      8 APoT filters (SAT), run side by side;
//   3. a pointwise convolution with 180 input channels, so that a pixel
//      spans two input-buffer words.
// The expected outputs are computed here straight from the image and the
// real-valued weights (a direct convolution, not the accelerator's
// column/shift schedule), requantised, and compared with every core's
// auxiliary buffer after done. The run time must be one step per cycle plus
// a fixed drain per instruction. The test counts parallel loads and shifts
// of the MPMA column chain, single- and merged-mode results, SAT results,
// results clipped at 0 and at 255, and two-word pixels, and fails if any of
// them never happened.
module tb_m2vit_top;
  import m2vit_pkg::*;

  logic clk = 0, rst_n = 0;
  logic iq_we = 0, start = 0, busy, done;
  logic [3:0] iq_addr = '0;
  instr_t iq_wdata;
  logic [4:0] n_instr = '0;
  logic ib_we = 0, wu_we = 0, wa_we = 0, ax_re = 0;
  logic [3:0] ib_bank = '0, ax_core = '0;
  logic [ADDR_W-1:0] ib_addr = '0, wu_addr = '0, wa_addr = '0, ax_addr = '0;
  logic [IN_WORD-1:0]  ib_wdata = '0;
  logic [WU_WORD-1:0]  wu_wdata = '0;
  logic [WA_WORD-1:0]  wa_wdata = '0;
  logic [AUX_WORD-1:0] ax_rdata;

  m2vit_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_load = 0, n_shift = 0, n_single = 0, n_merged = 0, n_sat = 0;
  int n_clip_lo = 0, n_clip_hi = 0, n_two_word = 0;

  // ---------------- layer sizes ----------------
  localparam int DW_CG = 2, DW_C = DW_CG * M, DW_H = 6, DW_W = SLOTS;  // 6 x 18 image
  localparam int DW_OH = DW_H - 2;
  localparam int P1_NI = 2, P1_CI = P1_NI * 9, P1_P = 4, P1_FG = 2;
  localparam int P2_NI = 20, P2_CI = P2_NI * 9, P2_P = 2, P2_FG = 1, P2_STRIDE = 2;
  localparam int SH_DW = 3, SH_U = 7, SH_A = 8;

  // data
  logic [7:0]        dw_img [L][DW_C][DW_H][DW_W];
  logic signed [3:0] dw_wt  [DW_C][3][3];         // [c][row][col]
  logic [7:0]        p1_x   [L][P1_P][P1_CI];
  logic [7:0]        p2_x   [L][P2_P][P2_CI];
  logic signed [7:0] p1_wu  [P1_FG*8][P1_CI];
  logic [6:0]        p1_wa  [P1_FG*8][P1_CI];
  logic signed [7:0] p2_wu  [P2_FG*8][P2_CI];
  logic [6:0]        p2_wa  [P2_FG*8][P2_CI];

  function automatic real apot(logic [6:0] code);
    real v;
    v = (2.0 ** (-real'(code[5:3]))) + (2.0 ** (-real'(code[2:0])));
    return code[6] ? -v : v;
  endfunction

  function automatic int rq(longint v, int sh);
    longint r;
    r = (v + (longint'(1) << (sh - 1))) >>> sh;
    if (r < 0) begin n_clip_lo++; return 0; end
    if (r > 255) begin n_clip_hi++; return 255; end
    return int'(r);
  endfunction

  // ---------------- host-side helpers ----------------
  task automatic wr_ib(int bank, int addr, logic [IN_WORD-1:0] d);
    @(negedge clk); ib_we = 1; ib_bank = 4'(bank); ib_addr = ADDR_W'(addr); ib_wdata = d;
    @(negedge clk); ib_we = 0;
  endtask
  task automatic wr_wu(int addr, logic [WU_WORD-1:0] d);
    @(negedge clk); wu_we = 1; wu_addr = ADDR_W'(addr); wu_wdata = d;
    @(negedge clk); wu_we = 0;
  endtask
  task automatic wr_wa(int addr, logic [WA_WORD-1:0] d);
    @(negedge clk); wa_we = 1; wa_addr = ADDR_W'(addr); wa_wdata = d;
    @(negedge clk); wa_we = 0;
  endtask
  task automatic wr_iq(int addr, instr_t d);
    @(negedge clk); iq_we = 1; iq_addr = 4'(addr); iq_wdata = d;
    @(negedge clk); iq_we = 0;
  endtask

  // one input word: vector slot s holds channels (9 bytes) ...
  function automatic logic [IN_WORD-1:0] pw_word(logic [7:0] x [], int ci0);
    logic [IN_WORD-1:0] wd;
    wd = '0;
    for (int s = 0; s < SLOTS; s++)
      for (int i = 0; i < 9; i++)
        if (ci0 + s * 9 + i < x.size()) wd[(s*9 + i)*8 +: 8] = x[ci0 + s*9 + i];
    return wd;
  endfunction

  initial begin
    instr_t ins;
    int expected_cycles, busy_cycles;
    logic [7:0] xv [];

    // ---------------- random data ----------------
    for (int b = 0; b < L; b++) begin
      for (int c = 0; c < DW_C; c++)
        for (int y = 0; y < DW_H; y++)
          for (int x = 0; x < DW_W; x++) dw_img[b][c][y][x] = 8'($urandom);
      for (int p = 0; p < P1_P; p++) for (int i = 0; i < P1_CI; i++) p1_x[b][p][i] = 8'($urandom);
      for (int p = 0; p < P2_P; p++) for (int i = 0; i < P2_CI; i++) p2_x[b][p][i] = 8'($urandom);
    end
    for (int c = 0; c < DW_C; c++)
      for (int r = 0; r < 3; r++) for (int k = 0; k < 3; k++) dw_wt[c][r][k] = 4'($urandom);
    for (int f = 0; f < P1_FG * 8; f++)
      for (int i = 0; i < P1_CI; i++) begin p1_wu[f][i] = 8'($urandom); p1_wa[f][i] = 7'($urandom); end
    for (int f = 0; f < P2_FG * 8; f++)
      for (int i = 0; i < P2_CI; i++) begin p2_wu[f][i] = 8'($urandom); p2_wa[f][i] = 7'($urandom); end

    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- fill the buffers ----------------
    // DW input: word (cg, y0) = columns 0..17, rows y0..y0+2, channels 3cg..3cg+2
    for (int b = 0; b < L; b++)
      for (int cg = 0; cg < DW_CG; cg++)
        for (int y0 = 0; y0 < DW_OH; y0++) begin
          logic [IN_WORD-1:0] wd;
          for (int x = 0; x < SLOTS; x++)
            for (int m = 0; m < M; m++)
              for (int r = 0; r < R; r++)
                wd[((x*M + m)*R + r)*8 +: 8] = dw_img[b][cg*M + m][y0 + r][x];
          wr_ib(b, 0 + cg * DW_OH + y0, wd);
        end
    // PW inputs
    for (int b = 0; b < L; b++) begin
      for (int p = 0; p < P1_P; p++) begin
        xv = new[P1_CI];
        for (int i = 0; i < P1_CI; i++) xv[i] = p1_x[b][p][i];
        wr_ib(b, 16 + p, pw_word(xv, 0));
      end
      for (int p = 0; p < P2_P; p++) begin
        xv = new[P2_CI];
        for (int i = 0; i < P2_CI; i++) xv[i] = p2_x[b][p][i];
        for (int k = 0; k < P2_STRIDE; k++) wr_ib(b, 32 + p * P2_STRIDE + k, pw_word(xv, k * SLOTS * 9));
      end
    end
    // DW weights: word 3cg+kx, nibble m*R+r
    for (int cg = 0; cg < DW_CG; cg++)
      for (int kx = 0; kx < 3; kx++) begin
        logic [WU_WORD-1:0] wd;
        wd = '0;
        for (int m = 0; m < M; m++)
          for (int r = 0; r < R; r++) wd[(m*R + r)*4 +: 4] = dw_wt[cg*M + m][r][kx];
        wr_wu(0 + 3 * cg + kx, wd);
      end
    // PW weights: word o*n_inner + c; filter p of the group, channel 9c+i
    for (int o = 0; o < P1_FG; o++)
      for (int c = 0; c < P1_NI; c++) begin
        logic [WU_WORD-1:0] wu; logic [WA_WORD-1:0] wa;
        for (int p = 0; p < 8; p++)
          for (int i = 0; i < 9; i++) begin
            wu[(p*9 + i)*8 +: 8] = p1_wu[o*8 + p][c*9 + i];
            wa[(p*9 + i)*7 +: 7] = p1_wa[o*8 + p][c*9 + i];
          end
        wr_wu(8 + o * P1_NI + c, wu);
        wr_wa(0 + o * P1_NI + c, wa);
      end
    for (int o = 0; o < P2_FG; o++)
      for (int c = 0; c < P2_NI; c++) begin
        logic [WU_WORD-1:0] wu; logic [WA_WORD-1:0] wa;
        for (int p = 0; p < 8; p++)
          for (int i = 0; i < 9; i++) begin
            wu[(p*9 + i)*8 +: 8] = p2_wu[o*8 + p][c*9 + i];
            wa[(p*9 + i)*7 +: 7] = p2_wa[o*8 + p][c*9 + i];
          end
        wr_wu(16 + o * P2_NI + c, wu);
        wr_wa(8 + o * P2_NI + c, wa);
      end

    // ---------------- instructions ----------------
    ins = '0; ins.op = OP_DW; ins.n_outer = DW_CG; ins.n_mid = DW_OH; ins.n_inner = 0;
    ins.in_base = 0; ins.wu_base = 0; ins.out_base = 0; ins.shift_u = SH_DW;
    wr_iq(0, ins);
    ins = '0; ins.op = OP_PW; ins.n_outer = P1_FG; ins.n_mid = P1_P; ins.n_inner = P1_NI;
    ins.in_base = 16; ins.in_stride = 1; ins.wu_base = 8; ins.wa_base = 0; ins.out_base = 16;
    ins.shift_u = SH_U; ins.shift_a = SH_A;
    wr_iq(1, ins);
    ins = '0; ins.op = OP_PW; ins.n_outer = P2_FG; ins.n_mid = P2_P; ins.n_inner = P2_NI;
    ins.in_base = 32; ins.in_stride = P2_STRIDE; ins.wu_base = 16; ins.wa_base = 8; ins.out_base = 32;
    ins.shift_u = SH_U + 2; ins.shift_a = SH_A + 2;
    wr_iq(2, ins);

    expected_cycles = (3 * DW_CG * DW_OH + 4) + (P1_FG * P1_P * P1_NI + 4) + (P2_FG * P2_P * P2_NI + 4);

    @(negedge clk); start = 1; n_instr = 5'd3;
    @(negedge clk); start = 0;
    busy_cycles = 0;
    while (!done) begin
      @(posedge clk);
      if (busy) busy_cycles++;
    end
    checks++;
    if (busy_cycles != expected_cycles) begin
      failures++;
      $display("FAIL busy %0d cycles, expected %0d", busy_cycles, expected_cycles);
    end
    $display("run took %0d cycles", busy_cycles);

    // ---------------- read back and compare ----------------
    for (int b = 0; b < L; b++) begin
      // DW results: word cg*DW_OH + y0, byte t*M + m = out(ch 3cg+m, row y0, col t)
      for (int cg = 0; cg < DW_CG; cg++)
        for (int y0 = 0; y0 < DW_OH; y0++) begin
          logic [AUX_WORD-1:0] got;
          @(negedge clk); ax_re = 1; ax_core = 4'(b); ax_addr = ADDR_W'(cg * DW_OH + y0);
          @(negedge clk); ax_re = 0; got = ax_rdata;
          for (int t = 0; t < T; t++)
            for (int m = 0; m < M; m++) begin
              longint acc; int e;
              acc = 0;
              for (int r = 0; r < 3; r++)
                for (int k = 0; k < 3; k++)
                  acc += longint'(dw_img[b][cg*M + m][y0 + r][t + k]) * longint'(dw_wt[cg*M + m][r][k]);
              e = rq(acc, SH_DW);
              n_single++;
              checks++;
              if (int'(got[(t*M + m)*8 +: 8]) != e) begin
                failures++;
                if (failures < 10) $display("FAIL DW core %0d ch %0d row %0d col %0d got %0d exp %0d",
                                            b, cg*M + m, y0, t, got[(t*M + m)*8 +: 8], e);
              end
            end
        end
      // PW results
      for (int inst = 0; inst < 2; inst++) begin
        int fg, np, ci, ob, su, sa;
        fg = inst == 0 ? P1_FG : P2_FG; np = inst == 0 ? P1_P : P2_P;
        ci = inst == 0 ? P1_CI : P2_CI; ob = inst == 0 ? 16 : 32;
        su = inst == 0 ? SH_U : SH_U + 2; sa = inst == 0 ? SH_A : SH_A + 2;
        for (int o = 0; o < fg; o++)
          for (int p = 0; p < np; p++) begin
            logic [AUX_WORD-1:0] got;
            @(negedge clk); ax_re = 1; ax_core = 4'(b); ax_addr = ADDR_W'(ob + o * np + p);
            @(negedge clk); ax_re = 0; got = ax_rdata;
            if (inst == 1) n_two_word++;
            for (int f = 0; f < 8; f++) begin
              longint au; real aa; int eu, ea;
              au = 0; aa = 0.0;
              for (int i = 0; i < ci; i++) begin
                logic [7:0] xi;
                xi = inst == 0 ? p1_x[b][p][i] : p2_x[b][p][i];
                au += longint'(xi) * longint'(inst == 0 ? p1_wu[o*8 + f][i] : p2_wu[o*8 + f][i]);
                aa += real'(xi) * apot(inst == 0 ? p1_wa[o*8 + f][i] : p2_wa[o*8 + f][i]) * 128.0;
              end
              eu = rq(au, su);
              ea = rq(longint'(aa), sa);
              n_merged++; n_sat++;
              checks += 2;
              if (int'(got[f*8 +: 8]) != eu) begin
                failures++;
                if (failures < 10) $display("FAIL PW%0d uniform core %0d f %0d p %0d got %0d exp %0d",
                                            inst, b, o*8 + f, p, got[f*8 +: 8], eu);
              end
              if (int'(got[(8 + f)*8 +: 8]) != ea) begin
                failures++;
                if (failures < 10) $display("FAIL PW%0d APoT core %0d f %0d p %0d got %0d exp %0d",
                                            inst, b, o*8 + f, p, got[(8 + f)*8 +: 8], ea);
              end
            end
          end
      end
    end

    $display("mechanisms: load=%0d shift=%0d single=%0d merged=%0d sat=%0d clip0=%0d clip255=%0d two_word_pixels=%0d",
             n_load, n_shift, n_single, n_merged, n_sat, n_clip_lo, n_clip_hi, n_two_word);
    if (n_load == 0)     begin failures++; $display("FAIL no parallel load"); end
    if (n_shift == 0)    begin failures++; $display("FAIL no shift"); end
    if (n_single == 0)   begin failures++; $display("FAIL no single-mode result"); end
    if (n_merged == 0)   begin failures++; $display("FAIL no merged-mode result"); end
    if (n_sat == 0)      begin failures++; $display("FAIL no SAT result"); end
    if (n_clip_lo == 0)  begin failures++; $display("FAIL no clip at 0"); end
    if (n_clip_hi == 0)  begin failures++; $display("FAIL no clip at 255"); end
    if (n_two_word == 0) begin failures++; $display("FAIL no two-word pixel"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // column-chain activity of core 0
  always @(posedge clk) if (rst_n && dut.g_core[0].u_core.mp_valid &&
                            dut.g_core[0].u_core.mp_mode == MODE_SINGLE) begin
    if (dut.g_core[0].u_core.mp_load) n_load++;
    if (dut.g_core[0].u_core.mp_shift) n_shift++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

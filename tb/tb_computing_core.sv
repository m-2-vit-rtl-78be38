// tb_computing_core -- one computing core driven as the global controller
// and the global buffers would drive it: a step each cycle, its input and
// weight words one cycle later. Random depthwise groups and mixed pointwise
// pixels are interleaved; each result word is read back from the auxiliary
// buffer and compared with a direct computation (3x3 depthwise sums, 8-bit
// dot products, real-valued APoT dot products) after requantisation.
module tb_computing_core;
  import m2vit_pkg::*;
  logic clk = 0, rst_n = 0;
  step_t step;
  logic [SLOTS-1:0][M-1:0][R-1:0][7:0] in_word;
  logic [T/2-1:0][M*R-1:0][7:0] wu_word;
  logic [S-1:0][N-1:0][APW-1:0] wa_word;
  logic ax_re = 0;
  logic [7:0] ax_addr = '0;
  logic [AUX_WORD-1:0] ax_rdata;
  int checks = 0, failures = 0;

  computing_core dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    step_t s;
    logic [SLOTS-1:0][M-1:0][R-1:0][7:0] iw;
    logic [T/2-1:0][M*R-1:0][7:0] wu;
    logic [S-1:0][N-1:0][APW-1:0] wa;
  } cyc_t;
  cyc_t prog [$];
  logic [AUX_WORD-1:0] expw [256];

  function automatic logic [7:0] rq(longint v, int sh);
    longint r;
    r = (v + (longint'(1) << (sh - 1))) >>> sh;
    return (r < 0) ? 8'd0 : (r > 255) ? 8'd255 : 8'(r);
  endfunction

  function automatic real apot(logic [6:0] code);
    real v;
    v = (2.0 ** (-real'(code[5:3]))) + (2.0 ** (-real'(code[2:0])));
    return code[6] ? -v : v;
  endfunction

  task automatic add_dw(int addr);
    cyc_t c;
    logic [SLOTS-1:0][M-1:0][R-1:0][7:0] iw;
    logic signed [3:0] wk [M][R][3];
    for (int i = 0; i < SLOTS * M * R; i++) iw[i / (M*R)][(i / R) % M][i % R] = 8'($urandom);
    for (int m = 0; m < M; m++) for (int r = 0; r < R; r++) for (int k = 0; k < 3; k++) wk[m][r][k] = 4'($urandom);
    expw[addr] = '0;
    for (int t = 0; t < T; t++)
      for (int m = 0; m < M; m++) begin
        longint a;
        a = 0;
        for (int k = 0; k < 3; k++) for (int r = 0; r < R; r++) a += longint'(iw[t+k][m][r]) * longint'(wk[m][r][k]);
        expw[addr][(t*M + m)*8 +: 8] = rq(a, 3);
      end
    for (int k = 0; k < 3; k++) begin
      logic [T/2*M*R*8-1:0] wf;
      c.s = '0; c.s.valid = 1; c.s.op = OP_DW; c.s.first = (k == 0); c.s.last = (k == 2);
      c.s.kx = 2'(k); c.s.out_addr = 8'(addr); c.s.shift_u = 5'd3;
      c.iw = iw;
      wf = '0;
      for (int m = 0; m < M; m++) for (int r = 0; r < R; r++) wf[(m*R + r)*4 +: 4] = wk[m][r][k];
      c.wu = wf; c.wa = '0;
      prog.push_back(c);
    end
  endtask

  task automatic add_pw(int addr, int ng);
    longint au [T/2];
    real aa [S];
    for (int f = 0; f < T/2; f++) au[f] = 0;
    for (int f = 0; f < S; f++) aa[f] = 0.0;
    for (int g = 0; g < ng; g++) begin
      cyc_t c;
      int slot;
      slot = int'($urandom_range(0, SLOTS - 1));
      c.s = '0; c.s.valid = 1; c.s.op = OP_PW; c.s.first = (g == 0); c.s.last = (g == ng - 1);
      c.s.slot = 5'(slot); c.s.out_addr = 8'(addr); c.s.shift_u = 5'd7; c.s.shift_a = 5'd8;
      for (int i = 0; i < SLOTS * M * R; i++) c.iw[i / (M*R)][(i / R) % M][i % R] = 8'($urandom);
      for (int f = 0; f < T/2; f++)
        for (int i = 0; i < 9; i++) begin
          c.wu[f][i] = 8'($urandom);
          au[f] += longint'(c.iw[slot][i / R][i % R]) * longint'($signed(c.wu[f][i]));
        end
      for (int f = 0; f < S; f++)
        for (int i = 0; i < 9; i++) begin
          c.wa[f][i] = 7'($urandom);
          aa[f] += real'(c.iw[slot][i / R][i % R]) * apot(c.wa[f][i]) * 128.0;
        end
      prog.push_back(c);
    end
    expw[addr] = '0;
    for (int f = 0; f < T/2; f++) expw[addr][f*8 +: 8] = rq(au[f], 7);
    for (int f = 0; f < S; f++) expw[addr][(T/2 + f)*8 +: 8] = rq(longint'(aa[f]), 8);
  endtask

  initial begin
    int nres;
    step = '0; in_word = '0; wu_word = '0; wa_word = '0;
    nres = 0;
    for (int k = 0; k < 60; k++) begin
      if ($urandom_range(0, 1) == 1) add_dw(nres); else add_pw(nres, 1 + int'($urandom_range(0, 6)));
      nres++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // step in cycle i, its data in cycle i+1
    for (int i = 0; i <= prog.size(); i++) begin
      @(negedge clk);
      step = (i < prog.size()) ? prog[i].s : '0;
      if (i > 0) begin in_word = prog[i-1].iw; wu_word = prog[i-1].wu; wa_word = prog[i-1].wa; end
    end
    repeat (6) @(negedge clk);
    for (int a = 0; a < nres; a++) begin
      @(negedge clk); ax_re = 1; ax_addr = 8'(a);
      @(negedge clk); ax_re = 0;
      checks++;
      if (ax_rdata !== expw[a]) begin
        failures++;
        if (failures < 6) $display("FAIL result %0d got %h exp %h", a, ax_rdata, expw[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

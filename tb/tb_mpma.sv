// tb_mpma -- checks the Mixed-Precision Multiplication Array in both modes.
//
// Single mode: random depthwise groups (T+2 input columns of M channels x R
// rows, random signed 4-bit 3x3 weights per channel) are run back to back,
// load at kernel column 0 and shift at columns 1 and 2; each tile's outputs
// are compared with a direct 3x3 convolution of the columns.
// Merged mode: random pointwise runs of several 9-channel input groups with
// T/2 random signed 8-bit filters, compared with dot products.
// The mode is switched between runs, and the latency from a step carrying
// last to out_valid must be two cycles.
module tb_mpma;
  import m2vit_pkg::*;
  localparam int TT = 16, MM = 3, RR = 3;
  logic clk = 0, rst_n = 0;
  logic valid, load, shift, first, last;
  mpma_mode_e mode;
  logic [TT-1:0][MM-1:0][RR-1:0][7:0] load_cols;
  logic [MM-1:0][RR-1:0][7:0]         shift_col;
  logic [TT/2-1:0][MM*RR-1:0][7:0]    w;
  logic                               out_valid;
  logic [TT-1:0][MM-1:0][23:0]        dw_out;
  logic [TT/2-1:0][28:0]              pw_out;

  int checks = 0, failures = 0, cyc = 0;
  int dw_groups = 0, pw_runs = 0, mode_switches = 0;

  mpma #(.T(TT), .M(MM), .R(RR), .ACC_W(24)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // expected results, in issue order
  typedef struct { logic is_pw; int issue; longint v [TT][MM]; } exp_t;
  exp_t q [$];

  // Sampled at the falling edge, between the register updates. A step set up
  // at a falling edge is taken at the next rising edge; its result must be
  // flagged two rising edges later.
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected out_valid"); end
    else begin
      e = q.pop_front();
      checks++;
      if (cyc - e.issue != 2) begin failures++; $display("FAIL latency %0d", cyc - e.issue); end
      for (int t = 0; t < TT; t++)
        for (int m = 0; m < MM; m++) begin
          longint got;
          if (!e.is_pw) got = longint'($signed(dw_out[t][m]));
          else if (m == 0 && t < TT / 2) got = longint'($signed(pw_out[t]));
          else continue;
          checks++;
          if (got != e.v[t][m]) begin
            failures++;
            if (failures < 10) $display("FAIL pw=%0d t=%0d m=%0d got=%0d exp=%0d", e.is_pw, t, m, got, e.v[t][m]);
          end
        end
    end
  end

  task automatic idle();
    @(negedge clk);
    valid = 0; load = 0; shift = 0; first = 0; last = 0;
  endtask

  task automatic dw_group();
    logic [7:0] col [TT+2][MM][RR];
    logic signed [3:0] wk [MM][RR][3];
    exp_t e;
    for (int c = 0; c < TT + 2; c++)
      for (int m = 0; m < MM; m++)
        for (int r = 0; r < RR; r++) col[c][m][r] = 8'($urandom);
    for (int m = 0; m < MM; m++)
      for (int r = 0; r < RR; r++)
        for (int k = 0; k < 3; k++) wk[m][r][k] = 4'($urandom);
    e.is_pw = 0;
    for (int t = 0; t < TT; t++)
      for (int m = 0; m < MM; m++) begin
        e.v[t][m] = 0;
        for (int k = 0; k < 3; k++)
          for (int r = 0; r < RR; r++)
            e.v[t][m] += longint'(col[t+k][m][r]) * longint'(wk[m][r][k]);
      end
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      valid = 1; mode = MODE_SINGLE; load = (k == 0); shift = (k != 0);
      first = (k == 0); last = (k == 2);
      w = '0;
      for (int m = 0; m < MM; m++)
        for (int r = 0; r < RR; r++) begin
          int nib;
          nib = m * RR + r;
          w[nib / 2][0][4*(nib % 2) +: 4] = wk[m][r][k];
        end
      // the 36-bit weight field spans bytes 0..4 of filter 0
      begin
        logic [MM*RR*8-1:0] f0;
        f0 = '0;
        for (int m = 0; m < MM; m++)
          for (int r = 0; r < RR; r++) f0[4*(m*RR+r) +: 4] = wk[m][r][k];
        w = '0; w[0] = f0;
      end
      for (int t = 0; t < TT; t++) load_cols[t] = (k == 0) ? pack(col[t]) : $urandom;
      shift_col = (k == 0) ? $urandom : pack(col[TT - 1 + k]);
      if (k == 2) begin e.issue = cyc; q.push_back(e); end
    end
    dw_groups++;
  endtask

  function automatic logic [MM-1:0][RR-1:0][7:0] pack(logic [7:0] c [MM][RR]);
    for (int m = 0; m < MM; m++) for (int r = 0; r < RR; r++) pack[m][r] = c[m][r];
  endfunction

  task automatic pw_run(int ng);
    exp_t e;
    e.is_pw = 1;
    for (int p = 0; p < TT / 2; p++) e.v[p][0] = 0;
    for (int g = 0; g < ng; g++) begin
      @(negedge clk);
      valid = 1; mode = MODE_MERGED; load = $urandom; shift = $urandom;
      first = (g == 0); last = (g == ng - 1);
      load_cols = {TT*MM*RR{8'($urandom)}};
      for (int i = 0; i < MM * RR; i++) load_cols[0][i / RR][i % RR] = 8'($urandom);
      for (int p = 0; p < TT / 2; p++)
        for (int i = 0; i < MM * RR; i++) begin
          w[p][i] = 8'($urandom);
          e.v[p][0] += longint'(load_cols[0][i / RR][i % RR]) * longint'($signed(w[p][i]));
        end
      if (g == ng - 1) begin e.issue = cyc; q.push_back(e); end
    end
    pw_runs++;
  endtask

  initial begin
    valid = 0; load = 0; shift = 0; first = 0; last = 0; mode = MODE_SINGLE;
    load_cols = '0; shift_col = '0; w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int n;
      n = 1 + int'($urandom_range(0, 3));
      for (int k = 0; k < n; k++) dw_group();
      mode_switches++;
      if ($urandom_range(0, 1) == 1) idle();
      pw_run(1 + int'($urandom_range(0, 12)));
      pw_run(1 + int'($urandom_range(0, 3)));
      mode_switches++;
      if ($urandom_range(0, 1) == 1) idle();
    end
    idle();
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    checks++;
    if (dw_groups == 0 || pw_runs == 0 || mode_switches == 0) failures++;
    $display("dw_groups=%0d pw_runs=%0d mode_switches=%0d", dw_groups, pw_runs, mode_switches);
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

// tb_sat -- checks the Shifter and Adder Tree engine: random pointwise runs
// of several N-channel input groups, S APoT filters each, back to back and
// with idle cycles; each tile's accumulated result is compared with a
// reference built from real-valued APoT weights, and out_valid must come two
// rising edges after the step with last.
module tb_sat;
  localparam int S = 8, N = 9;
  logic clk = 0, rst_n = 0;
  logic valid, first, last;
  logic [N-1:0][7:0] a;
  logic [S-1:0][N-1:0][6:0] w;
  logic out_valid;
  logic [S-1:0][31:0] acc;
  int checks = 0, failures = 0, cyc = 0, runs = 0;

  sat #(.S(S), .N(N), .EW(3), .ACC_W(32)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { int issue; real v [S]; } exp_t;
  exp_t q [$];

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected out_valid"); end
    else begin
      e = q.pop_front();
      checks++;
      if (cyc - e.issue != 2) begin failures++; $display("FAIL latency %0d", cyc - e.issue); end
      for (int s = 0; s < S; s++) begin
        checks++;
        if (real'($signed(acc[s])) != e.v[s]) begin
          failures++;
          if (failures < 10) $display("FAIL s=%0d got=%0d exp=%f", s, $signed(acc[s]), e.v[s]);
        end
      end
    end
  end

  initial begin
    valid = 0; first = 0; last = 0; a = '0; w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      exp_t e;
      int ng;
      ng = 1 + int'($urandom_range(0, 15));
      for (int s = 0; s < S; s++) e.v[s] = 0.0;
      for (int g = 0; g < ng; g++) begin
        @(negedge clk);
        valid = 1; first = (g == 0); last = (g == ng - 1);
        for (int i = 0; i < N; i++) a[i] = 8'($urandom);
        for (int s = 0; s < S; s++)
          for (int i = 0; i < N; i++) begin
            real wv;
            w[s][i] = 7'($urandom);
            wv = (2.0 ** (-real'(w[s][i][5:3]))) + (2.0 ** (-real'(w[s][i][2:0])));
            if (w[s][i][6]) wv = -wv;
            e.v[s] += real'(a[i]) * wv * 128.0;
          end
        if (g == ng - 1) begin e.issue = cyc; q.push_back(e); end
      end
      runs++;
      if (run % 3 == 0) begin @(negedge clk); valid = 0; first = 0; last = 0; end
    end
    @(negedge clk); valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

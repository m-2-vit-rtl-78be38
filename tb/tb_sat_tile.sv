// tb_sat_tile -- random check of one SAT tile: the adder-tree sum of N
// APoT products against a reference computed with real arithmetic.
module tb_sat_tile;
  localparam int N = 9;
  logic [N-1:0][7:0] a;
  logic [N-1:0][6:0] w;
  logic signed [20:0] sum;
  int checks = 0, failures = 0;

  sat_tile #(.N(N), .EW(3)) dut (.a(a), .w(w), .sum(sum));

  initial begin
    for (int k = 0; k < 5000; k++) begin
      real expv;
      expv = 0.0;
      for (int i = 0; i < N; i++) begin
        real wv;
        a[i] = (k < 10) ? 8'd255 : 8'($urandom);
        w[i] = (k < 10) ? {k[0], 6'd0} : 7'($urandom);
        wv = (2.0 ** (-real'(w[i][5:3]))) + (2.0 ** (-real'(w[i][2:0])));
        if (w[i][6]) wv = -wv;
        expv += real'(a[i]) * wv * 128.0;
      end
      #1;
      checks++;
      if (real'(sum) != expv) begin
        failures++;
        if (failures < 10) $display("FAIL sum=%0d exp=%f", sum, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

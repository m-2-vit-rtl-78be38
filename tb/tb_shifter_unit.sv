// tb_shifter_unit -- exhaustive check of the APoT shifter unit: for every
// activation and every code {s, |p1|, |p2|} the output must equal
// A * s * (2^p1 + 2^p2) * 2^7, computed here with real arithmetic.
module tb_shifter_unit;
  logic [7:0] a;
  logic [6:0] w;
  logic signed [16:0] y;
  int checks = 0, failures = 0;

  shifter_unit #(.EW(3)) dut (.a(a), .w(w), .y(y));

  initial begin
    for (int ia = 0; ia < 256; ia++)
      for (int iw = 0; iw < 128; iw++) begin
        real wv, expv;
        a = 8'(ia); w = 7'(iw);
        #1;
        wv = (2.0 ** (-real'(iw[5:3]))) + (2.0 ** (-real'(iw[2:0])));
        if (iw[6]) wv = -wv;
        expv = real'(ia) * wv * 128.0;
        checks++;
        if (real'(y) != expv) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d w=%b y=%0d exp=%f", ia, w, y, expv);
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

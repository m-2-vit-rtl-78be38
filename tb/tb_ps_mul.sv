// tb_ps_mul -- exhaustive check of the 4x8-bit precision-scalable multiplier:
// every activation, every nibble, both signedness settings, against integer
// arithmetic; also checks that a signed high nibble and an unsigned low
// nibble recombine to every 8x8 product.
module tb_ps_mul;
  logic [7:0] a;
  logic [3:0] w, w2;
  logic ws;
  logic signed [12:0] p, p2;
  int checks = 0, failures = 0;

  ps_mul dut (.a(a), .w(w), .w_signed(ws), .p(p));
  ps_mul dut2 (.a(a), .w(w2), .w_signed(1'b0), .p(p2));

  initial begin
    for (int ia = 0; ia < 256; ia++)
      for (int iw = 0; iw < 16; iw++)
        for (int is = 0; is < 2; is++) begin
          int expv;
          a = 8'(ia); w = 4'(iw); ws = is[0]; w2 = 4'(iw);
          #1;
          expv = ia * ((is == 1 && iw >= 8) ? iw - 16 : iw);
          checks++;
          if (int'(p) != expv) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d w=%0d s=%0d p=%0d exp=%0d", ia, iw, is, p, expv);
          end
        end
    // high (signed) and low (unsigned) halves give the 8x8 product
    for (int k = 0; k < 2000; k++) begin
      logic [7:0] w8;
      w8 = 8'($urandom); a = 8'($urandom);
      w = w8[7:4]; ws = 1'b1; w2 = w8[3:0];
      #1;
      checks++;
      if (int'(p) * 16 + int'(p2) != int'(a) * int'($signed(w8))) failures++;
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

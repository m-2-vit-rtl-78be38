// tb_mpma_block -- checks one PE block: R products summed and accumulated
// in the REG over runs of random length, with signed and unsigned nibbles,
// the restart on first, and that the REG holds while en is low.
module tb_mpma_block;
  localparam int R = 3;
  logic clk = 0, rst_n = 0;
  logic [R-1:0][7:0] a;
  logic [R-1:0][3:0] w;
  logic ws, en, first;
  logic signed [23:0] acc;
  int checks = 0, failures = 0;
  longint model;

  mpma_block #(.R(R), .ACC_W(24)) dut (.clk, .rst_n, .a, .w, .w_signed(ws), .en, .first, .acc);

  always #5 clk = ~clk;

  initial begin
    en = 0; first = 0; a = '0; w = '0; ws = 0; model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 300; run++) begin
      int len;
      len = 1 + int'($urandom_range(0, 20));
      ws = run[0];
      for (int k = 0; k < len; k++) begin
        longint s;
        @(negedge clk);
        en = ($urandom_range(0, 3) != 0) || k == 0;
        first = (k == 0);
        s = 0;
        for (int r = 0; r < R; r++) begin
          a[r] = 8'($urandom);
          w[r] = 4'($urandom);
          s += longint'(a[r]) * (ws ? longint'($signed(w[r])) : longint'(w[r]));
        end
        if (en) model = first ? s : model + s;
        @(posedge clk); #1;
        checks++;
        if (longint'(acc) != model) begin
          failures++;
          if (failures < 10) $display("FAIL acc=%0d exp=%0d", acc, model);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_core_controller -- random steps and input words into the local
// controller; checks that the engine controls follow the step of the
// previous cycle (mode, load at kernel column 0, shift otherwise, first,
// last, SAT enable only for pointwise steps), that the right input columns
// and the vector `slot` are selected, and that the write-back address and
// shifts appear three cycles after their step.
module tb_core_controller;
  import m2vit_pkg::*;
  logic clk = 0, rst_n = 0;
  step_t step;
  logic [SLOTS-1:0][M-1:0][R-1:0][7:0] in_word;
  logic mp_valid, mp_load, mp_shift, first, last, sat_valid;
  mpma_mode_e mp_mode;
  logic [T-1:0][M-1:0][R-1:0][7:0] mp_cols;
  logic [M-1:0][R-1:0][7:0] mp_shift_col;
  logic [M*R-1:0][7:0] sat_a;
  op_e wb_op;
  logic [7:0] wb_addr;
  logic [4:0] wb_shift_u, wb_shift_a;
  int checks = 0, failures = 0;

  core_controller #(.T(T), .M(M), .R(R), .ADDR_W(8), .SH_W(5)) dut (.*);

  always #5 clk = ~clk;

  step_t hist [4];

  initial begin
    step = '0; in_word = '0;
    for (int i = 0; i < 4; i++) hist[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      // outputs now reflect hist[0] (previous step) with the current in_word
      begin
        step_t s;
        s = hist[0];
        checks++;
        if (mp_valid != s.valid || first != s.first || last != s.last ||
            mp_mode != ((s.op == OP_PW) ? MODE_MERGED : MODE_SINGLE) ||
            mp_load != (s.kx == 0) || mp_shift != (s.kx != 0) ||
            sat_valid != (s.valid && s.op == OP_PW)) begin
          failures++;
          if (failures < 10) $display("FAIL controls at %0d", k);
        end
        checks++;
        if (s.op == OP_PW) begin
          if (sat_a != in_word[s.slot] || mp_cols[0] != in_word[s.slot]) failures++;
        end else begin
          if (mp_cols != in_word[T-1:0] || (s.kx != 0 && mp_shift_col != in_word[T - 1 + int'(s.kx)]))
            failures++;
        end
        checks++;
        if (wb_addr != hist[2].out_addr || wb_shift_u != hist[2].shift_u ||
            wb_shift_a != hist[2].shift_a || wb_op != hist[2].op) begin
          failures++;
          if (failures < 10) $display("FAIL write-back info at %0d", k);
        end
      end
      // new step and new word
      for (int i = 3; i > 0; i--) hist[i] = hist[i-1];
      step = '0;
      step.valid = $urandom_range(0, 3) != 0;
      step.op = op_e'($urandom_range(0, 1));
      step.first = $urandom; step.last = $urandom;
      step.kx = 2'($urandom_range(0, 2));
      step.slot = 5'($urandom_range(0, SLOTS - 1));
      step.out_addr = 8'($urandom); step.shift_u = 5'($urandom); step.shift_a = 5'($urandom);
      hist[0] = step;
      @(posedge clk);
      #1;
      for (int i = 0; i < SLOTS * M * R; i++) in_word[i / (M*R)][(i / R) % M][i % R] = 8'($urandom);
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

// tb_global_controller -- checks the instruction sequencer on its own.
// Random DW and PW instructions (random loop counts, bases, strides) are
// queued and run; every issued step (control word and the three buffer read
// addresses and enables) is compared with the loop nest written out here
// independently, one step per cycle. Also checks that busy covers the run,
// that done pulses once, and the run time of steps + drain per instruction.
module tb_global_controller;
  import m2vit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic iq_we = 0, start = 0, busy, done;
  logic [3:0] iq_addr = '0;
  instr_t iq_wdata;
  logic [4:0] n_instr = '0;
  logic ib_re, wu_re, wa_re;
  logic [7:0] ib_raddr, wu_raddr, wa_raddr;
  step_t step;
  int checks = 0, failures = 0;

  global_controller #(.IQ_DEPTH(16), .ADDR_W(8), .SLOTS(18), .DRAIN(4)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { step_t s; logic ibre; int iba; logic wure; int wua; logic ware; int waa; } ex_t;
  ex_t q [$];
  instr_t prog [16];

  task automatic expand(instr_t in);
    int inner;
    inner = (in.op == OP_DW) ? 3 : int'(in.n_inner);
    for (int o = 0; o < int'(in.n_outer); o++)
      for (int md = 0; md < int'(in.n_mid); md++)
        for (int c = 0; c < inner; c++) begin
          ex_t e;
          e.s = '0;
          e.s.valid = 1; e.s.op = in.op; e.s.first = (c == 0); e.s.last = (c == inner - 1);
          e.s.kx = 2'(c); e.s.slot = 5'(c % 18);
          e.s.out_addr = 8'(int'(in.out_base) + o * int'(in.n_mid) + md);
          e.s.shift_u = in.shift_u; e.s.shift_a = in.shift_a;
          if (in.op == OP_DW) begin
            e.ibre = (c == 0); e.iba = (int'(in.in_base) + o * int'(in.n_mid) + md) % 256;
            e.wure = 1; e.wua = (int'(in.wu_base) + 3 * o + c) % 256;
            e.ware = 0; e.waa = 0;
          end else begin
            e.ibre = 1; e.iba = (int'(in.in_base) + md * int'(in.in_stride) + c / 18) % 256;
            e.wure = 1; e.wua = (int'(in.wu_base) + o * int'(in.n_inner) + c) % 256;
            e.ware = 1; e.waa = (int'(in.wa_base) + o * int'(in.n_inner) + c) % 256;
          end
          q.push_back(e);
        end
  endtask

  int n_done = 0, n_steps = 0;
  always @(negedge clk) if (rst_n) begin
    if (done) n_done++;
    if (step.valid) begin
      ex_t e;
      n_steps++;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL extra step"); end
      else begin
        e = q.pop_front();
        if (step !== e.s || ib_re !== e.ibre || (e.ibre && int'(ib_raddr) != e.iba) ||
            wu_re !== e.wure || int'(wu_raddr) != e.wua || wa_re !== e.ware ||
            (e.ware && int'(wa_raddr) != e.waa) || !busy) begin
          failures++;
          if (failures < 10) $display("FAIL step %p exp %p ib %0d/%0d wu %0d/%0d wa %0d/%0d",
                                      step, e.s, ib_raddr, e.iba, wu_raddr, e.wua, wa_raddr, e.waa);
        end
      end
    end
  end

  initial begin
    iq_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      int n, cycles, expc;
      n = 1 + int'($urandom_range(0, 4));
      expc = 0;
      for (int i = 0; i < n; i++) begin
        instr_t in;
        in = '0;
        in.op = op_e'($urandom_range(0, 1));
        in.n_outer = 16'($urandom_range(1, 3));
        in.n_mid = 16'($urandom_range(1, 5));
        in.n_inner = 16'($urandom_range(1, 40));
        in.in_base = 8'($urandom); in.in_stride = 8'($urandom_range(1, 3));
        in.wu_base = 8'($urandom); in.wa_base = 8'($urandom); in.out_base = 8'($urandom);
        in.shift_u = 5'($urandom); in.shift_a = 5'($urandom);
        prog[i] = in;
        @(negedge clk); iq_we = 1; iq_addr = 4'(i); iq_wdata = in;
        @(negedge clk); iq_we = 0;
        expand(in);
        expc += int'(in.n_outer) * int'(in.n_mid) * ((in.op == OP_DW) ? 3 : int'(in.n_inner)) + 4;
      end
      @(negedge clk); start = 1; n_instr = 5'(n);
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles - 1 != expc) begin failures++; $display("FAIL run time %0d exp %0d", cycles - 1, expc); end
      @(negedge clk);
      checks++;
      if (busy || q.size() != 0) begin failures++; $display("FAIL busy after done / %0d steps missing", q.size()); end
    end
    checks++;
    if (n_done != 6) failures++;
    $display("steps=%0d", n_steps);
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

// tb_input_buffer -- fills random banks and addresses of the banked input
// buffer, then reads addresses and checks every bank's word against a
// model: a write must reach only the addressed bank, all banks are read at
// the same address, and rdata arrives one cycle after re.
module tb_input_buffer;
  localparam int B = 16, W = 1296, AW = 8;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(B)-1:0] wbank;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata;
  logic [B-1:0][W-1:0] rdata;
  logic [W-1:0] model [B][1 << AW];
  int checks = 0, failures = 0;

  input_buffer #(.BANKS(B), .WIDTH(W), .ADDR_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    wbank = '0; waddr = '0; raddr = '0; wdata = '0;
    // fill addresses 0..31 of every bank
    for (int b = 0; b < B; b++)
      for (int ad = 0; ad < 32; ad++) begin
        @(negedge clk);
        we = 1; wbank = b[3:0]; waddr = AW'(ad);
        for (int i = 0; i < W / 16; i++) wdata[i*16 +: 16] = 16'($urandom);
        model[b][ad] = wdata;
      end
    // random overwrites mixed with reads
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      we = $urandom_range(0, 1) == 1;
      wbank = 4'($urandom); waddr = AW'($urandom_range(0, 31));
      for (int i = 0; i < W / 16; i++) wdata[i*16 +: 16] = 16'($urandom);
      if (we) model[wbank][waddr] = wdata;
      @(negedge clk);
      we = 0; re = 1; raddr = AW'($urandom_range(0, 31));
      @(negedge clk);
      re = 0;
      for (int b = 0; b < B; b++) begin
        checks++;
        if (rdata[b] !== model[b][raddr]) begin
          failures++;
          if (failures < 5) $display("FAIL bank %0d addr %0d", b, raddr);
        end
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

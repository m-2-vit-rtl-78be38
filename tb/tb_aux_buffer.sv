// tb_aux_buffer -- writes random words to random addresses of the auxiliary
// buffer and reads them back against a model; checks the one-cycle read
// latency and that rdata holds while re is low.
module tb_aux_buffer;
  localparam int W = 384, AW = 8;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata, model [1 << AW], last_read;
  logic written [1 << AW];
  int checks = 0, failures = 0;

  aux_buffer #(.WIDTH(W), .ADDR_W(AW)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd();
    for (int i = 0; i < W / 32; i++) rnd[i*32 +: 32] = $urandom;
  endfunction

  initial begin
    for (int i = 0; i < (1 << AW); i++) written[i] = 0;
    waddr = '0; raddr = '0; wdata = '0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1) || k < 300;
      waddr = AW'($urandom); wdata = rnd();
      re = ($urandom_range(0, 2) != 0);
      raddr = AW'($urandom);
      if (re && written[raddr] && !(we && waddr == raddr)) begin
        logic [W-1:0] expv;
        expv = model[raddr];
        if (we) begin model[waddr] = wdata; written[waddr] = 1; end
        @(negedge clk);
        we = 0; re = 0;
        checks++;
        if (rdata !== expv) failures++;
        last_read = rdata;
        raddr = raddr + 1;  // a new address must not show while re is low
        @(negedge clk);
        checks++;
        if (rdata !== last_read) failures++;  // holds while re is low
      end else if (we) begin
        model[waddr] = wdata; written[waddr] = 1;
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

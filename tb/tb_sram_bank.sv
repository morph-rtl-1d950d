// tb_sram_bank: writes random words to random addresses of one bank and
// checks that reads return them one cycle later, against a reference array.
module tb_sram_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int DEPTH = 64, W = 16;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [DEPTH];
  logic written [DEPTH];
  int checks = 0, failures = 0;

  sram_bank #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    foreach (written[i]) written[i] = 0;
    @(posedge clk); #1;
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; waddr = 6'(i); wdata = W'($urandom);
      ref_mem[i] = wdata; written[i] = 1;
      @(posedge clk); #1;
    end
    we = 0;
    for (int i = 0; i < 500; i++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      re = 1; raddr = 6'(a);
      // simultaneous write elsewhere
      we = 1; waddr = 6'($urandom_range(0, DEPTH - 1)); wdata = W'($urandom);
      if (waddr == raddr) we = 0;
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      re = 0; we = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", a, rdata, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

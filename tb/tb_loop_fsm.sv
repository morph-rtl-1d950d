// tb_loop_fsm: checks the programmable loop FSM against a software loop nest.
// Random bounds and strides for a 3-level nest (the other levels bound 1) are
// turned into step registers with mk_loop; every generated address, the
// event triggers (loop ends) and the number of states are compared with
// addresses computed directly from the indices.  One state is consumed per
// cycle when `adv` is high; `adv` is dropped at random to check holding.
module tb_loop_fsm;
  import morph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, adv, busy, final_st, done;
  loop_cfg_t cfg;
  logic [AW-1:0] addr;
  logic [D-1:0] last;
  logic [NT-1:0] trig;
  int checks = 0, failures = 0;

  loop_fsm dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    int unsigned b [D];
    int st [D];
    int base, n, exp;
    start = 0; adv = 0; cfg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      for (int j = 0; j < D; j++) begin b[j] = 1; st[j] = 0; end
      b[0] = $urandom_range(1, 4); b[1] = $urandom_range(1, 3); b[2] = $urandom_range(1, 3);
      st[0] = $urandom_range(1, 5); st[1] = $urandom_range(0, 40); st[2] = 200 - $urandom_range(0, 300);
      base = $urandom_range(1000, 2000);
      cfg = mk_loop(AW'(base), b, st, {8'b0000_0010, 8'b0000_0001});
      start = 1; @(posedge clk); #1 start = 0;
      n = 0;
      for (int i2 = 0; i2 < b[2]; i2++)
        for (int i1 = 0; i1 < b[1]; i1++)
          for (int i0 = 0; i0 < b[0]; i0++) begin
            adv = 0;
            while ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
            exp = base + i0 * st[0] + i1 * st[1] + i2 * st[2];
            chk(busy, "busy");
            chk(addr == AW'(exp), $sformatf("addr %0d exp %0d", addr, exp));
            chk(trig[0] == (i0 == b[0] - 1), "trig0 (loop 0 end)");
            chk(trig[1] == (i0 == b[0] - 1 && i1 == b[1] - 1), "trig1 (loop 1 end)");
            chk(final_st == (i0 == b[0]-1 && i1 == b[1]-1 && i2 == b[2]-1), "final");
            adv = 1; n++;
            @(posedge clk); #1;
          end
      adv = 0;
      chk(!busy, "idle after last state");
      chk(n == b[0] * b[1] * b[2], "state count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

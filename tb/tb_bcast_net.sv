// tb_bcast_net: drives beats through the broadcast network with random
// destination backpressure.  Checks that a beat reaches exactly the masked
// destinations, only when all of them are ready, in order; and that the
// round counter switches to the last-round mask for the final round.
// Three transfers: unicast, multicast, and broadcast with a narrower last round.
module tb_bcast_net;
  import morph_pkg::*;
  localparam int NDST = 4, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, s_valid, s_last, s_ready, d_last, last_round_active;
  logic [W-1:0] s_data, d_data;
  logic [NDST-1:0] d_valid, d_ready;
  net_cfg_t cfg;
  int checks = 0, failures = 0;
  int rx [NDST][$];

  bcast_net #(.NDST(NDST), .W(W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int i = 0; i < NDST; i++) if (d_valid[i]) begin
      if (!d_ready[i]) begin failures++; $display("FAIL valid to a busy destination"); end
      rx[i].push_back(int'(d_data));
    end
    d_ready <= NDST'($urandom);
  end

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic run(input logic [3:0] mask, input logic [3:0] lmask, input int rounds, input int per_round);
    int n;
    for (int i = 0; i < NDST; i++) rx[i].delete();
    cfg.mask = 32'(mask); cfg.last_mask = 32'(lmask); cfg.last_round = CW'(rounds - 1);
    start = 1; @(posedge clk); #1 start = 0;
    n = 0;
    for (int r = 0; r < rounds; r++)
      for (int k = 0; k < per_round; k++) begin
        s_valid = 1; s_data = W'(1000 * r + k); s_last = (k == per_round - 1);
        #0;
        if (rounds > 1) chk(last_round_active == (r == rounds - 1), "last-round flag");
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        #1;
      end
    s_valid = 0; s_last = 0;
    @(posedge clk); #1;
    for (int i = 0; i < NDST; i++) begin
      int exp_n;
      exp_n = 0;
      for (int r = 0; r < rounds; r++) begin
        logic [3:0] m;
        m = (rounds > 1 && r == rounds - 1) ? lmask : mask;
        if (m[i]) for (int k = 0; k < per_round; k++) begin
          checks++;
          if (exp_n >= rx[i].size() || rx[i][exp_n] != 1000 * r + k) begin
            failures++;
            if (failures < 10) $display("FAIL dest %0d beat %0d", i, exp_n);
          end
          exp_n++;
        end
      end
      chk(rx[i].size() == exp_n, $sformatf("dest %0d beat count %0d exp %0d", i, rx[i].size(), exp_n));
    end
  endtask

  initial begin
    start = 0; s_valid = 0; s_last = 0; s_data = '0; cfg = '0; d_ready = '1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(4'b0100, 4'b0100, 1, 10);   // unicast
    run(4'b1010, 4'b1010, 2, 6);    // multicast
    run(4'b1111, 4'b0011, 3, 5);    // broadcast, last round to two destinations
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mac_alu: random signed vector MACCs, clears and byte reloads against a
// reference model of VW accumulators.  Each operation takes one cycle.
module tb_mac_alu;
  localparam int VW = 8, P = 8, ACC_W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, mac_en, ld_en;
  logic signed [P-1:0] act;
  logic signed [VW-1:0][P-1:0] wts;
  logic [2:0] ld_lane;
  logic [1:0] ld_byte;
  logic [7:0] ld_data;
  logic signed [VW-1:0][ACC_W-1:0] acc;
  logic [ACC_W-1:0] model [VW];
  int checks = 0, failures = 0;

  mac_alu #(.VW(VW), .P(P), .ACC_W(ACC_W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; mac_en = 0; ld_en = 0; act = 0; wts = '0; ld_lane = 0; ld_byte = 0; ld_data = 0;
    foreach (model[l]) model[l] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int op;
      op = $urandom_range(0, 19);
      clr = (op == 0); ld_en = (op == 1 || op == 2); mac_en = (op >= 3);
      act = P'($urandom);
      for (int l = 0; l < VW; l++) wts[l] = P'($urandom);
      ld_lane = 3'($urandom); ld_byte = 2'($urandom); ld_data = 8'($urandom);
      @(posedge clk); #1;
      if (clr) foreach (model[l]) model[l] = 0;
      else if (ld_en) model[ld_lane][8*ld_byte +: 8] = ld_data;
      else if (mac_en) for (int l = 0; l < VW; l++) model[l] = model[l] + ACC_W'(int'(act) * int'($signed(wts[l])));
      clr = 0; ld_en = 0; mac_en = 0;
      for (int l = 0; l < VW; l++) begin
        checks++;
        if (acc[l] !== model[l]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d got %0d exp %0d", l, acc[l], model[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

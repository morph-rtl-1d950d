// tb_sync_fifo: random push/pop traffic against a queue model for the 4-deep
// FIFO used in the transfer engines.  Each cycle it checks `empty`, `count`
// and, when not empty, the head word `rdata`; pushes into a full FIFO without
// a pop and pops of an empty FIFO must be ignored.  Prints TB_RESULT; a
// 100000-cycle watchdog ends a hung run as a failure.
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty;
  logic [W-1:0] wdata, rdata;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      push = ($urandom % 3) != 0; pop = ($urandom % 2) != 0; wdata = W'($urandom);
      #1;
      checks++;
      if (count != ($clog2(DEPTH+1))'(model.size()) || empty != (model.size() == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL count %0d model %0d", count, model.size());
      end
      if (model.size() != 0) begin
        checks++;
        if (rdata !== model[0]) begin failures++; if (failures < 10) $display("FAIL data"); end
      end
      @(posedge clk);
      begin
        bit popped, pushed;
        popped = pop && model.size() != 0;
        pushed = push && (model.size() != DEPTH || popped);
        if (popped) void'(model.pop_front());
        if (pushed) model.push_back(wdata);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_xfer_src: the read engine streams a buffer region walked by a 2-level
// program (a strided tile) into a network with random backpressure.  A model
// buffer answers reads one cycle later.  Checks: words arrive in program
// order with the right data, `m_last` marks each round end (trigger 0) and
// the final word, no word is lost or repeated, and `busy` drops after the
// last word.  With no backpressure, the stream must sustain one word per
// cycle after the first (checked as a cycle count).
module tb_xfer_src;
  import morph_pkg::*;
  localparam int W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, rd_en, m_valid, m_last, m_ready, busy, done;
  loop_cfg_t cfg;
  logic [AW-1:0] rd_addr;
  logic [W-1:0] rd_data, m_data;
  logic [W-1:0] mem [1024];
  int checks = 0, failures = 0;
  logic bp;

  xfer_src #(.W(W)) dut (.*);

  always @(posedge clk) if (rd_en) rd_data <= mem[rd_addr[9:0]];
  always @(posedge clk) m_ready <= bp ? 1'($urandom) : 1'b1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic run(input int b0, input int b1, input int s1, input int base, input logic backp);
    int n, t0, t1;
    bp = backp;
    cfg = mk_loop(AW'(base), '{b0, b1, 1, 1, 1, 1, 1, 1}, '{1, s1, 0, 0, 0, 0, 0, 0}, {8'b0, 8'b1});
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    t0 = $time;
    n = 0;
    while (n < b0 * b1) begin
      @(posedge clk);
      if (m_valid && m_ready) begin
        int i0, i1;
        i0 = n % b0; i1 = n / b0;
        chk(m_data == mem[base + i0 + i1 * s1], $sformatf("word %0d", n));
        chk(m_last == (i0 == b0 - 1), $sformatf("last flag word %0d", n));
        n++;
        t1 = $time;
      end
    end
    if (!backp) chk((t1 - t0) / 10 <= b0 * b1 + 3, $sformatf("rate: %0d words in %0d cycles", b0 * b1, (t1 - t0) / 10));
    repeat (3) @(posedge clk);
    chk(!m_valid, "no extra words");
    chk(!busy, "idle after transfer");
  endtask

  initial begin
    start = 0; cfg = '0; bp = 0;
    foreach (mem[i]) mem[i] = W'($urandom);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(8, 4, 32, 16, 0);
    run(5, 3, 100, 7, 1);
    run(1, 9, 3, 400, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

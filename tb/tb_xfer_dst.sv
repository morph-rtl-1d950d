// tb_xfer_dst: the write engine in both of its shapes.
// Split (32-bit network words into 8-bit buffer words): random input gaps and
// random write-port stalls; every written byte must carry the right address
// (a strided 2-level program) and data, least significant byte first, and a
// continuous stream must be written at one buffer word per cycle.
// Pack (8-bit psum bytes into 32-bit words): four bytes form one word at
// each program address.
module tb_xfer_dst;
  import morph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // split instance
  logic s_start, s_valid, s_ready, s_wr_en, s_wr_ready, s_busy, s_done;
  loop_cfg_t s_cfg;
  logic [31:0] s_data;
  logic [AW-1:0] s_wr_addr;
  logic [7:0] s_wr_data;
  xfer_dst #(.WI(32), .WO(8)) u_split (
    .clk, .rst_n, .start(s_start), .cfg(s_cfg), .s_valid(s_valid), .s_data(s_data), .s_ready(s_ready),
    .wr_en(s_wr_en), .wr_addr(s_wr_addr), .wr_data(s_wr_data), .wr_ready(s_wr_ready),
    .busy(s_busy), .done(s_done));

  // pack instance
  logic p_start, p_valid, p_ready, p_wr_en, p_busy, p_done;
  loop_cfg_t p_cfg;
  logic [7:0] p_data;
  logic [AW-1:0] p_wr_addr;
  logic [31:0] p_wr_data;
  xfer_dst #(.WI(8), .WO(32)) u_pack (
    .clk, .rst_n, .start(p_start), .cfg(p_cfg), .s_valid(p_valid), .s_data(p_data), .s_ready(p_ready),
    .wr_en(p_wr_en), .wr_addr(p_wr_addr), .wr_data(p_wr_data), .wr_ready(1'b1),
    .busy(p_busy), .done(p_done));

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

  logic stall_en;
  always @(posedge clk) s_wr_ready <= stall_en ? 1'($urandom) : 1'b1;

  int nwr;
  logic [31:0] words [64];
  int b0, b1, st1, base;
  always @(posedge clk) if (s_wr_en && s_wr_ready) begin
    int e, i0, i1;
    e = nwr; i0 = e % b0; i1 = e / b0;
    chk(s_wr_addr == AW'(base + i0 + i1 * st1), $sformatf("split addr %0d", e));
    chk(s_wr_data == words[e / 4][8 * (e % 4) +: 8], $sformatf("split data %0d", e));
    nwr++;
  end

  task automatic run_split(input logic gaps, input logic stalls);
    int t0;
    b0 = 8; b1 = 4; st1 = 20; base = 3; nwr = 0; stall_en = stalls;
    foreach (words[i]) words[i] = $urandom;
    s_cfg = mk_loop(AW'(base), '{b0, b1, 1, 1, 1, 1, 1, 1}, '{1, st1, 0, 0, 0, 0, 0, 0}, '0);
    s_start = 1; @(posedge clk); #1 s_start = 0;
    t0 = $time;
    for (int i = 0; i < b0 * b1 / 4; i++) begin
      while (gaps && $urandom_range(0, 2) == 0) begin @(posedge clk); #1; end
      s_valid = 1; s_data = words[i];
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      #1 s_valid = 0;
    end
    while (s_busy) @(posedge clk);
    #1;
    chk(nwr == b0 * b1, $sformatf("split write count %0d", nwr));
    if (!gaps && !stalls)
      chk(($time - t0) / 10 <= b0 * b1 + 3, $sformatf("split rate: %0d bytes in %0d cycles", b0 * b1, ($time - t0) / 10));
  endtask

  initial begin
    logic [31:0] exp;
    s_start = 0; s_valid = 0; s_data = '0; s_cfg = '0; stall_en = 0;
    p_start = 0; p_valid = 0; p_data = '0; p_cfg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run_split(0, 0);
    run_split(1, 1);
    // pack
    p_cfg = mk_loop(AW'(40), '{6, 1, 1, 1, 1, 1, 1, 1}, '{2, 0, 0, 0, 0, 0, 0, 0}, '0);
    p_start = 1; @(posedge clk); #1 p_start = 0;
    for (int w = 0; w < 6; w++) begin
      exp = $urandom;
      for (int b = 0; b < 4; b++) begin
        p_valid = 1; p_data = exp[8*b +: 8];
        @(posedge clk);
        while (!p_ready) @(posedge clk);
        #1 p_valid = 0;
      end
      while (!p_wr_en) begin @(posedge clk); #1; end
      chk(p_wr_addr == AW'(40 + 2 * w), "pack addr");
      chk(p_wr_data == exp, $sformatf("pack data %h exp %h", p_wr_data, exp));
      @(posedge clk); #1;
    end
    chk(!p_busy, "pack idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

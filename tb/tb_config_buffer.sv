// tb_config_buffer: checks bank assignment, per-type addressing, the three
// read ports and the psum-update priority of the configurable buffer.
// Two bank layouts are used in turn (a layer-to-layer reconfiguration).  For
// each, every type's region is filled through its write port with a known
// pattern, read back through its read port (data one cycle later) and
// compared; the 2B-bit assignment vector is compared with the layout; a psum
// update issued together with a higher-level psum write must be refused
// (pu_ready low) and land when retried; an out-of-range access sets `err`.
module tb_config_buffer;
  import morph_pkg::*;
  localparam int NBK = 16, DEPTH = 8, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bcfg_load;
  bank_cfg_t bcfg;
  logic [2*NBK-1:0] assign_vec;
  logic [2:0] wr_en, rd_en;
  logic [2:0][AW-1:0] wr_addr, rd_addr;
  logic [2:0][W-1:0] wr_data, rd_data;
  logic pu_en, pu_ready, err;
  logic [AW-1:0] pu_addr;
  logic [W-1:0] pu_data;
  int checks = 0, failures = 0;

  config_buffer #(.NBK(NBK), .DEPTH(DEPTH), .W(W)) dut (.*);

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
  function automatic logic [W-1:0] pat(input int layout, input int t, input int a);
    return W'(layout * 4096 + t * 1024 + a * 7 + 1);
  endfunction

  initial begin
    int base [2][3], cnt [2][3];
    base = '{'{0, 3, 8}, '{10, 0, 2}};
    cnt  = '{'{3, 5, 8}, '{6, 2, 8}};
    bcfg_load = 0; bcfg = '0; wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    pu_en = 0; pu_addr = '0; pu_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int L = 0; L < 2; L++) begin
      for (int t = 0; t < 3; t++) begin bcfg.base[t] = 5'(base[L][t]); bcfg.count[t] = 6'(cnt[L][t]); end
      bcfg_load = 1; @(posedge clk); #1 bcfg_load = 0;
      for (int b = 0; b < NBK; b++) begin
        logic [1:0] e;
        e = 2'd3;
        for (int t = 0; t < 3; t++) if (b >= base[L][t] && b < base[L][t] + cnt[L][t]) e = 2'(t);
        chk(assign_vec[2*b +: 2] == e, $sformatf("assign bank %0d", b));
      end
      // fill all three regions in parallel
      for (int a = 0; a < 8 * DEPTH; a++) begin
        for (int t = 0; t < 3; t++) begin
          wr_en[t] = (a < cnt[L][t] * DEPTH); wr_addr[t] = AW'(a); wr_data[t] = pat(L, t, a);
        end
        @(posedge clk); #1;
      end
      wr_en = 0;
      // read back all three in parallel
      for (int a = 0; a < 8 * DEPTH; a++) begin
        for (int t = 0; t < 3; t++) begin rd_en[t] = (a < cnt[L][t] * DEPTH); rd_addr[t] = AW'(a); end
        @(posedge clk); #1;
        for (int t = 0; t < 3; t++)
          if (a < cnt[L][t] * DEPTH)
            chk(rd_data[t] == pat(L, t, a), $sformatf("L%0d type %0d addr %0d got %h", L, t, a, rd_data[t]));
        rd_en = 0;
      end
      // psum update against a higher-level psum write
      wr_en[2] = 1; wr_addr[2] = AW'(5); wr_data[2] = 16'hAAAA;
      pu_en = 1; pu_addr = AW'(6); pu_data = 16'h5555;
      #1 chk(!pu_ready, "psum update stalled by higher-level write");
      @(posedge clk); #1 wr_en = 0;
      #1 chk(pu_ready, "psum update ready when path free");
      @(posedge clk); #1 pu_en = 0;
      rd_en[2] = 1; rd_addr[2] = AW'(5); @(posedge clk); #1;
      chk(rd_data[2] == 16'hAAAA, "higher-level psum written");
      rd_addr[2] = AW'(6); @(posedge clk); #1;
      chk(rd_data[2] == 16'h5555, "psum update written after stall");
      rd_en = 0;
    end
    chk(!err, "no range error on legal accesses");
    rd_en[0] = 1; rd_addr[0] = AW'(6 * DEPTH); @(posedge clk); #1 rd_en = 0;
    @(posedge clk); #1;
    chk(err, "range error flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

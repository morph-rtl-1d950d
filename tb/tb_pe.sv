// tb_pe: one PE computing a small 3D convolution end to end.
// Layer: C=2, H=4, W=3, F=3, R=S=T=2, one group of 4 filters (4 lanes);
// outputs 3x2x2 per filter.  Inputs and weights are delivered as 32-bit
// network words; the compute runs in two channel passes (the second reloads
// the accumulators and is overlapped with a psum fill into the other half of
// the L0 psum region, which must stall some psum unloads); psum bytes are
// drained on the up port and compared with a direct convolution.  The first
// pass, which has no stalls, must take exactly
// NPOS * (1 + taps*VW + 1 + 4*VW) cycles (clear, MACC, drain, unload).
module tb_pe;
  import morph_pkg::*;
  localparam int VWL = 4;
  localparam int C = 2, H = 4, W = 3, F = 3, R = 2, S = 2, T = 2;
  localparam int HO = H - R + 1, WO = W - S + 1, FO = F - T + 1, NPOS = HO * WO * FO;
  localparam int TAPS = C * T * S * R;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bcfg_load; bank_cfg_t bcfg; pe_cfg_t cfg;
  logic [2:0] recv_start; logic cmp_start, up_start;
  logic [2:0] n_valid, n_ready; logic [2:0][L1_W-1:0] n_data;
  logic u_valid, u_ready; logic [7:0] u_data;
  logic [2:0] recv_busy; logic cmp_busy, up_busy, pu_stall, reload_ev, err;
  int checks = 0, failures = 0;
  int stalls = 0, reloads = 0;

  pe #(.VWL(VWL), .DEPTH(64)) dut (.*);

  always @(posedge clk) begin stalls += pu_stall; reloads += reload_ev; end

  logic signed [7:0] din [C][F][W][H];
  logic signed [7:0] wt  [VWL][C][T][S][R];
  logic [7:0] inbytes [C*F*W*H];
  logic [7:0] wbytes  [TAPS*VWL];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic loop_cfg_t lc(input int base, input int b [D], input int st [D],
                                   input logic [D-1:0] ev0 = '0, input logic [D-1:0] ev1 = '0);
    int unsigned bu [D];
    for (int i = 0; i < D; i++) bu[i] = b[i];
    return mk_loop(AW'(base), bu, st, {ev1, ev0});
  endfunction
  function automatic loop_cfg_t lin(input int base, input int n);
    return lc(base, '{n,1,1,1,1,1,1,1}, '{1,0,0,0,0,0,0,0});
  endfunction

  // send a byte array as 32-bit words on network port t
  task automatic send(input int t, input logic [7:0] bytes [], input int n);
    for (int j = 0; j < n / 4; j++) begin
      n_valid[t] = 1; n_data[t] = {bytes[4*j+3], bytes[4*j+2], bytes[4*j+1], bytes[4*j]};
      @(posedge clk);
      while (!n_ready[t]) @(posedge clk);
      #1 n_valid[t] = 0;
    end
  endtask

  initial begin
    int t0, cyc, exp_cyc;
    logic [7:0] tmp [];
    n_valid = 0; n_data = '0; recv_start = 0; cmp_start = 0; up_start = 0; u_ready = 0;
    bcfg_load = 0; cfg = '0;
    foreach (din[c, f, w, h]) begin
      din[c][f][w][h] = 8'($urandom);
      inbytes[((c*F + f)*W + w)*H + h] = din[c][f][w][h];
    end
    foreach (wt[k, c, t, s, r]) begin
      wt[k][c][t][s][r] = 8'($urandom);
      wbytes[((((c*T + t)*S + s)*R + r))*VWL + k] = wt[k][c][t][s][r];
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // L0 banks (64 bytes each): inputs 0..1, weights 2, psums 3..7
    bcfg.base = {5'd3, 5'd2, 5'd0}; bcfg.count = {6'd5, 6'd1, 6'd2};
    bcfg_load = 1; @(posedge clk); #1 bcfg_load = 0;

    cfg.recv[DT_IN] = lin(0, C*F*W*H);
    cfg.recv[DT_WT] = lin(0, TAPS*VWL);
    recv_start = 3'b011; @(posedge clk); #1 recv_start = 0;
    tmp = new[C*F*W*H]; foreach (tmp[i]) tmp[i] = inbytes[i];
    send(DT_IN, tmp, C*F*W*H);
    tmp = new[TAPS*VWL]; foreach (tmp[i]) tmp[i] = wbytes[i];
    send(DT_WT, tmp, TAPS*VWL);
    repeat (8) @(posedge clk); #1;
    checks++; if (recv_busy != 0) begin failures++; $display("FAIL fills incomplete"); end

    for (int pass = 0; pass < C; pass++) begin
      cfg.cwt = lc(pass*T*S*R*VWL, '{VWL, R, S, T, HO, WO, FO, 1},
                   '{1, VWL, R*VWL, S*R*VWL, 0, 0, 0, 0}, 8'b0000_0001, 8'b0000_1000);
      cfg.cin = lc(pass*F*W*H, '{R, S, T, HO, WO, FO, 1, 1}, '{1, H, W*H, 1, H, W*H, 0, 0});
      cfg.cps_rd = lc(0, '{4*VWL, NPOS, 1,1,1,1,1,1}, '{1, 4*VWL, 0,0,0,0,0,0});
      cfg.cps_wr = cfg.cps_rd;
      cfg.reload = (pass != 0);
      cfg.recv[DT_PS] = lin(200, 112);
      cmp_start = 1;
      if (pass == 1) recv_start = 3'b100;
      @(posedge clk); #1 cmp_start = 0; recv_start = 0;
      t0 = $time;
      if (pass == 1) begin
        tmp = new[112]; foreach (tmp[i]) tmp[i] = 8'(i);
        send(DT_PS, tmp, 112);
      end
      while (cmp_busy) @(posedge clk);
      cyc = ($time - t0) / 10;
      if (pass == 0) begin
        exp_cyc = NPOS * (1 + T*S*R*VWL + 1 + 4*VWL);
        checks++;
        if (cyc < exp_cyc || cyc > exp_cyc + 2) begin
          failures++; $display("FAIL pass 0 took %0d cycles, expected %0d", cyc, exp_cyc);
        end
      end
      #1;
    end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no psum stall observed"); end
    checks++; if (reloads != 4 * VWL * NPOS) begin failures++; $display("FAIL reloads %0d", reloads); end

    // drain
    cfg.up = lin(0, 4 * VWL * NPOS);
    up_start = 1; @(posedge clk); #1 up_start = 0;
    for (int pos = 0; pos < NPOS; pos++)
      for (int lane = 0; lane < VWL; lane++) begin
        logic [31:0] got;
        int exp, h, w, f;
        for (int b = 0; b < 4; b++) begin
          u_ready = 1;
          @(posedge clk);
          while (!u_valid) @(posedge clk);
          got[8*b +: 8] = u_data;
          #1 u_ready = 0;
        end
        h = pos % HO; w = (pos / HO) % WO; f = pos / (HO * WO);
        exp = 0;
        for (int c = 0; c < C; c++) for (int t = 0; t < T; t++)
          for (int s = 0; s < S; s++) for (int r = 0; r < R; r++)
            exp += int'(din[c][f+t][w+s][h+r]) * int'(wt[lane][c][t][s][r]);
        checks++;
        if (got !== 32'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL pos %0d lane %0d got %0d exp %0d", pos, lane, $signed(got), exp);
        end
      end
    checks++; if (err) begin failures++; $display("FAIL range error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

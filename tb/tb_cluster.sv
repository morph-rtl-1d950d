// tb_cluster: one cluster (2 PEs, 4 lanes) computing a small 3D convolution
// from 64-bit global-network words to 32-bit psums on its up port.
// Layer: C=2, H=W=4, F=3, R=S=T=2, K=8 (one group of 4 filters per PE).
// Inputs are broadcast to both PEs; weights go out in one transfer of two
// rounds, round 0 to PE 0 and the last round, under the last-round mask, to
// PE 1.  Two channel passes (the second reloads psums).  Psums drain PE by PE
// into the L1 while a global-network psum fill writes the L1 in the same
// cycles (forcing L1 psum-update stalls; an L1->L0 psum fill during the
// reloading pass forces L0 stalls), then stream out of the up port and
// are compared with a direct convolution.  Also checks the range-error flag
// and that each event (L1 stall, L0 stall, last round, reload) occurred.
// A 200000-cycle watchdog ends a hung run as a failure.
module tb_cluster;
  import morph_pkg::*;
  localparam int NPE = 2, VWL = 4;
  localparam int C = 2, H = 4, W = 4, F = 3, R = 2, S = 2, T = 2;
  localparam int HO = H - R + 1, WO = W - S + 1, FO = F - T + 1, NPOS = HO * WO * FO;
  localparam int K = NPE * VWL, TAPS = C * T * S * R;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic l1_bcfg_load, l0_bcfg_load; bank_cfg_t l1_bcfg, l0_bcfg;
  l1_cfg_t cfg; pe_cfg_t pe_cfg;
  logic [2:0] recv_start, down_start; logic up_wr_start, up_rd_start;
  logic [2:0][NPE-1:0] pe_recv_start; logic [NPE-1:0] pe_cmp_start, pe_up_start;
  logic [2:0] g_valid, g_ready; logic [2:0][L2_W-1:0] g_data;
  logic o_valid, o_ready; logic [L1_W-1:0] o_data;
  logic busy, err; logic [3:0] ev;
  int checks = 0, failures = 0;
  int ev_cnt [4];

  cluster #(.NPE(NPE), .VWL(VWL), .L1DEPTH(64), .L0DEPTH(64)) dut (.*);
  always @(posedge clk) for (int i = 0; i < 4; i++) if (ev[i]) ev_cnt[i]++;

  logic signed [7:0] din [C][F][W][H];
  logic signed [7:0] wt  [K][C][T][S][R];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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
  task automatic clear_starts();
    recv_start = 0; down_start = 0; up_wr_start = 0; up_rd_start = 0;
    pe_recv_start = '0; pe_cmp_start = '0; pe_up_start = '0;
  endtask
  task automatic go();
    @(posedge clk); #1 clear_starts();
  endtask
  task automatic wait_idle();
    @(posedge clk); while (busy) @(posedge clk);
    @(posedge clk); #1;
  endtask
  task automatic gsend(input int t, input logic [63:0] d);
    g_valid[t] = 1; g_data[t] = d;
    @(posedge clk);
    while (!g_ready[t]) @(posedge clk);
    #1 g_valid[t] = 0;
  endtask

  logic [31:0] got_q [$];
  always @(posedge clk) if (rst_n && o_valid && o_ready) got_q.push_back(o_data);

  initial begin
    logic [63:0] word;
    int bi;
    clear_starts(); g_valid = 0; g_data = '0; o_ready = 1;
    l1_bcfg_load = 0; l0_bcfg_load = 0; cfg = '0; pe_cfg = '0;
    foreach (ev_cnt[i]) ev_cnt[i] = 0;
    foreach (din[c, f, w, h]) din[c][f][w][h] = 8'($urandom);
    foreach (wt[k, c, t, s, r]) wt[k][c][t][s][r] = 8'($urandom);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // L1 (64 words/bank): in 0, wt 1, ps 2..5 ; L0 (64 bytes/bank): in 0..1, wt 2, ps 3..8
    l1_bcfg.base = {5'd2, 5'd1, 5'd0}; l1_bcfg.count = {6'd4, 6'd1, 6'd1};
    l0_bcfg.base = {5'd3, 5'd2, 5'd0}; l0_bcfg.count = {6'd6, 6'd1, 6'd2};
    l1_bcfg_load = 1; l0_bcfg_load = 1; @(posedge clk); #1 l1_bcfg_load = 0; l0_bcfg_load = 0;

    // fill L1 with inputs and weights from the global network
    cfg.recv[DT_IN] = lin(0, C*F*W*H/4); cfg.recv[DT_WT] = lin(0, K*TAPS/4);
    recv_start = 3'b011; go();
    for (int j = 0; j < C*F*W*H/8; j++) begin
      for (int b = 0; b < 8; b++) begin
        bi = 8*j + b;
        word[8*b +: 8] = din[bi / (F*W*H)][(bi / (W*H)) % F][(bi / H) % W][bi % H];
      end
      gsend(DT_IN, word);
    end
    for (int j = 0; j < K*TAPS/8; j++) begin
      for (int b = 0; b < 8; b++) begin
        int g, tap, lane;
        bi = 8*j + b; g = bi / (TAPS*VWL); tap = (bi / VWL) % TAPS; lane = bi % VWL;
        word[8*b +: 8] = wt[g*VWL + lane][tap / (T*S*R)][(tap / (S*R)) % T][(tap / R) % S][tap % R];
      end
      gsend(DT_WT, word);
    end
    wait_idle();

    // L1 -> L0: inputs broadcast; weights in two rounds, the last under the last-round mask
    cfg.down[DT_IN] = lin(0, C*F*W*H/4); cfg.net[DT_IN] = '{mask: 32'h3, last_mask: 32'h3, last_round: '0};
    cfg.down[DT_WT] = lc(0, '{TAPS*VWL/4, NPE, 1,1,1,1,1,1}, '{1, TAPS*VWL/4, 0,0,0,0,0,0}, 8'b1);
    cfg.net[DT_WT]  = '{mask: 32'h1, last_mask: 32'h2, last_round: CW'(1)};
    pe_cfg.recv[DT_IN] = lin(0, C*F*W*H); pe_cfg.recv[DT_WT] = lin(0, TAPS*VWL);
    down_start = 3'b011; pe_recv_start[DT_IN] = '1; pe_recv_start[DT_WT] = '1; go(); wait_idle();

    for (int pass = 0; pass < C; pass++) begin
      pe_cfg.cwt = lc(pass*T*S*R*VWL, '{VWL, R, S, T, HO, WO, FO, 1},
                      '{1, VWL, R*VWL, S*R*VWL, 0, 0, 0, 0}, 8'b0000_0001, 8'b0000_1000);
      pe_cfg.cin = lc(pass*F*W*H, '{R, S, T, HO, WO, FO, 1, 1}, '{1, H, W*H, 1, H, W*H, 0, 0});
      pe_cfg.cps_rd = lc(0, '{4*VWL, NPOS, 1,1,1,1,1,1}, '{1, 4*VWL, 0,0,0,0,0,0});
      pe_cfg.cps_wr = pe_cfg.cps_rd;
      pe_cfg.reload = (pass != 0);
      pe_cmp_start = '1;
      if (pass == 1) begin  // L1 -> L0 psum fill into a spare L0 region while psums reload
        cfg.down[DT_PS] = lin(200, 20); cfg.net[DT_PS] = '{mask: 32'h3, last_mask: 32'h3, last_round: '0};
        pe_cfg.recv[DT_PS] = lin(300, 80);
        down_start[DT_PS] = 1; pe_recv_start[DT_PS] = '1;
      end
      go(); wait_idle();
    end

    // drain each PE into the L1, with a concurrent psum fill from the global network
    for (int p = 0; p < NPE; p++) begin
      pe_cfg.up = lin(0, 4*VWL*NPOS);
      cfg.up_wr = lin(p*VWL*NPOS, VWL*NPOS); cfg.up_sel = 8'(p);
      up_wr_start = 1; pe_up_start[p] = 1;
      if (p == 0) begin cfg.recv[DT_PS] = lin(200, 40); recv_start = 3'b100; end
      go();
      if (p == 0) for (int j = 0; j < 20; j++) gsend(DT_PS, {32'(j), 32'(j + 1)});
      wait_idle();
    end
    // stream the L1 psums out of the up port
    cfg.up_rd = lin(0, NPE*VWL*NPOS);
    up_rd_start = 1; go(); wait_idle();

    checks++;
    if (got_q.size() != NPE*VWL*NPOS) begin failures++; $display("FAIL %0d psums out", got_q.size()); end
    for (int i = 0; i < NPE*VWL*NPOS && i < got_q.size(); i++) begin
      int p, pos, lane, k, h, w, f, exp;
      p = i / (VWL*NPOS); pos = (i / VWL) % NPOS; lane = i % VWL; k = p*VWL + lane;
      h = pos % HO; w = (pos / HO) % WO; f = pos / (HO*WO);
      exp = 0;
      for (int c = 0; c < C; c++) for (int t = 0; t < T; t++)
        for (int s = 0; s < S; s++) for (int r = 0; r < R; r++)
          exp += int'(din[c][f+t][w+s][h+r]) * int'(wt[k][c][t][s][r]);
      checks++;
      if (got_q[i] !== 32'(exp)) begin
        failures++;
        if (failures < 10) $display("FAIL psum %0d got %0d exp %0d", i, $signed(got_q[i]), exp);
      end
    end
    checks++; if (err) begin failures++; $display("FAIL range error"); end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (ev_cnt[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

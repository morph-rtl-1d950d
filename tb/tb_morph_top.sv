// tb_morph_top: end-to-end test of the accelerator on one small 3D
// convolution layer, at reduced sizes (2 clusters x 2 PEs, 4 lanes, shallow
// banks) so that it runs in seconds.
//
// Layer: C=2 channels, H=W=4, F=3 frames, R=S=T=2, K=16 filters, stride 1,
// giving 3x3x2 outputs per filter.  Filters are split across PEs (K
// parallelism: each PE owns one group of 4 filters, one per lane); inputs are
// broadcast.  The channel loop is tiled in two passes, so the second pass
// reloads the accumulators from the L0 psums of the first.
//
// Steps: DRAM writes fill the L2; inputs are broadcast L2->L1->L0; weights
// go L2->L1 in two rounds (the second under the last-round mask) and are
// unicast L1->L0; both compute passes run, the second alongside a psum fill
// of the L0 (forcing psum-update stalls); psums drain L0->L1->L2, again with
// concurrent higher-level psum writes; the L2 psums are read back and
// compared with a direct convolution computed here.
// Mechanisms counted (each must happen): L1/L2 psum stall, L0 psum stall,
// last-round mask, accumulator reload.
module tb_morph_top;
  import morph_pkg::*;

  localparam int NCL = 2, NPE = 2, VWL = 4;
  localparam int C = 2, H = 4, W = 4, F = 3, R = 2, S = 2, T = 2;
  localparam int HO = H - R + 1, WO = W - S + 1, FO = F - T + 1, NPOS = HO * WO * FO;
  localparam int K = NCL * NPE * VWL;
  localparam int TAPS = C * T * S * R;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic l2_bcfg_load, l1_bcfg_load, l0_bcfg_load;
  bank_cfg_t l2_bcfg, l1_bcfg, l0_bcfg;
  l2_cfg_t l2_cfg; l1_cfg_t l1_cfg; pe_cfg_t pe_cfg;
  logic [2:0] l2_down_start; logic l2_up_start;
  logic [2:0][NCL-1:0] l1_recv_start, l1_down_start;
  logic [NCL-1:0] l1_up_wr_start, l1_up_rd_start;
  logic [2:0][NCL*NPE-1:0] pe_recv_start;
  logic [NCL*NPE-1:0] pe_cmp_start, pe_up_start;
  logic dram_wr_en, dram_rd_en; dtype_e dram_wr_type;
  logic [AW-1:0] dram_wr_addr, dram_rd_addr;
  logic [L2_W-1:0] dram_wr_data, dram_rd_data;
  logic busy, err; logic [3:0] ev;

  morph_top #(.NCL(NCL), .NPE(NPE), .VWL(VWL), .L2DEPTH(64), .L1DEPTH(64), .L0DEPTH(64)) dut (.*);

  int checks = 0, failures = 0;
  int ev_cnt [4];
  always @(posedge clk) for (int i = 0; i < 4; i++) if (ev[i]) ev_cnt[i]++;

  // test data
  logic signed [7:0] din [C][F][W][H];
  logic signed [7:0] wt  [K][C][T][S][R];

  function automatic loop_cfg_t lc(input int base, input int b [D], input int st [D],
                                   input logic [D-1:0] ev0 = '0, input logic [D-1:0] ev1 = '0);
    int unsigned bu [D];
    for (int i = 0; i < D; i++) bu[i] = b[i];
    return mk_loop(AW'(base), bu, st, {ev1, ev0});
  endfunction
  function automatic loop_cfg_t lin(input int base, input int n);
    return lc(base, '{n,1,1,1,1,1,1,1}, '{1,0,0,0,0,0,0,0});
  endfunction
  function automatic bank_cfg_t bc(input int ib, input int in, input int wb, input int wn,
                                   input int pb, input int pn);
    bank_cfg_t b;
    b.base  = {5'(pb), 5'(wb), 5'(ib)};
    b.count = {6'(pn), 6'(wn), 6'(in)};
    return b;
  endfunction

  task automatic clear_starts();
    l2_down_start = '0; l2_up_start = 0; l1_recv_start = '0; l1_down_start = '0;
    l1_up_wr_start = '0; l1_up_rd_start = '0; pe_recv_start = '0; pe_cmp_start = '0;
    pe_up_start = '0;
  endtask
  task automatic go();   // starts were set by the caller
    @(posedge clk); #1 clear_starts();
  endtask
  int step = 0;
  task automatic wait_idle();
    step++;
    @(posedge clk); while (busy) @(posedge clk);
    if ($test$plusargs("trace")) $display("step %0d done at %0t", step, $time);
    @(posedge clk); #1;
  endtask
  task automatic dw(input dtype_e t, input int a, input logic [63:0] d);
    dram_wr_en = 1; dram_wr_type = t; dram_wr_addr = AW'(a); dram_wr_data = d;
    @(posedge clk); #1 dram_wr_en = 0;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] word;
    int bi;
    clear_starts();
    l2_bcfg_load = 0; l1_bcfg_load = 0; l0_bcfg_load = 0;
    dram_wr_en = 0; dram_rd_en = 0; dram_wr_type = DT_IN; dram_wr_addr = '0; dram_wr_data = '0;
    dram_rd_addr = '0; l2_cfg = '0; l1_cfg = '0; pe_cfg = '0;
    foreach (ev_cnt[i]) ev_cnt[i] = 0;
    foreach (din[c, f, w, h]) din[c][f][w][h] = 8'($urandom_range(0, 255));
    foreach (wt[k, c, t, s, r]) wt[k][c][t][s][r] = 8'($urandom_range(0, 255));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // bank assignment: L2 in 0, wt 1, ps 2..4; L1 in 0, wt 1, ps 2..5; L0 in 0..1, wt 2, ps 3..8
    l2_bcfg = bc(0, 1, 1, 1, 2, 3); l1_bcfg = bc(0, 1, 1, 1, 2, 4); l0_bcfg = bc(0, 2, 2, 1, 3, 6);
    l2_bcfg_load = 1; l1_bcfg_load = 1; l0_bcfg_load = 1;
    @(posedge clk); #1 l2_bcfg_load = 0; l1_bcfg_load = 0; l0_bcfg_load = 0;

    // DRAM -> L2: inputs [c][f][w][h], 8 per word
    for (int j = 0; j < C * F * W * H / 8; j++) begin
      for (int b = 0; b < 8; b++) begin
        bi = 8 * j + b;
        word[8*b +: 8] = din[bi / (F*W*H)][(bi / (W*H)) % F][(bi / H) % W][bi % H];
      end
      dw(DT_IN, j, word);
    end
    // weights: group g (4 filters) at byte 64g, [tap][lane], tap = ((c*T+t)*S+s)*R+r
    for (int j = 0; j < K * TAPS / 8; j++) begin
      for (int b = 0; b < 8; b++) begin
        int g, tap, lane, k;
        bi = 8 * j + b; g = bi / (TAPS * VWL); tap = (bi / VWL) % TAPS; lane = bi % VWL;
        k = g * VWL + lane;
        word[8*b +: 8] = wt[k][tap / (T*S*R)][(tap / (S*R)) % T][(tap / R) % S][tap % R];
      end
      dw(DT_WT, j, word);
    end
    // psum pattern for the double-buffer fills, L2 psum words 160..167
    for (int j = 0; j < 8; j++) dw(DT_PS, 160 + j, {32'(j), 32'(100 + j)});

    // L2 -> L1: inputs broadcast to both clusters
    l2_cfg.down[DT_IN] = lin(0, 12); l2_cfg.net[DT_IN] = '{mask: 32'h3, last_mask: 32'h3, last_round: '0};
    l1_cfg.recv[DT_IN] = lin(0, 24);
    // weights in two rounds: round 0 to cluster 0, last round to cluster 1
    l2_cfg.down[DT_WT] = lc(0, '{16,2,1,1,1,1,1,1}, '{1,16,0,0,0,0,0,0}, 8'b1);
    l2_cfg.net[DT_WT]  = '{mask: 32'h1, last_mask: 32'h2, last_round: CW'(1)};
    l1_cfg.recv[DT_WT] = lin(0, 32);
    // psums for later double-buffer traffic into L1 psum words 192..207
    l2_cfg.down[DT_PS] = lin(160, 8); l2_cfg.net[DT_PS] = '{mask: 32'h3, last_mask: 32'h3, last_round: '0};
    l1_cfg.recv[DT_PS] = lin(192, 16);
    l2_down_start = 3'b111; l1_recv_start = '1; go(); wait_idle();

    // L1 -> L0: inputs broadcast to every PE
    l1_cfg.down[DT_IN] = lin(0, 24); l1_cfg.net[DT_IN] = '{mask: 32'h3, last_mask: 32'h3, last_round: '0};
    pe_cfg.recv[DT_IN] = lin(0, C * F * W * H);
    l1_down_start[DT_IN] = '1; pe_recv_start[DT_IN] = '1; go(); wait_idle();
    // weights unicast, one PE at a time (64 bytes = 16 L1 words each)
    for (int p = 0; p < NPE; p++) begin
      l1_cfg.down[DT_WT] = lin(16 * p, 16);
      l1_cfg.net[DT_WT]  = '{mask: 32'(1 << p), last_mask: 32'(1 << p), last_round: '0};
      pe_cfg.recv[DT_WT] = lin(0, TAPS * VWL);
      l1_down_start[DT_WT] = '1;
      for (int c = 0; c < NCL; c++) pe_recv_start[DT_WT][c*NPE + p] = 1'b1;
      go(); wait_idle();
    end

    // compute, two channel passes
    for (int pass = 0; pass < C; pass++) begin
      pe_cfg.cwt = lc(pass * T*S*R*VWL, '{VWL, R, S, T, HO, WO, FO, 1},
                   '{1, VWL, R*VWL, S*R*VWL, 0, 0, 0, 0}, 8'b0000_0001, 8'b0000_1000);
      pe_cfg.cin = lc(pass * F*W*H, '{R, S, T, HO, WO, FO, 1, 1},
                   '{1, H, W*H, 1, H, W*H, 0, 0});
      pe_cfg.cps_rd = lc(0, '{4*VWL, NPOS, 1,1,1,1,1,1}, '{1, 4*VWL, 0,0,0,0,0,0});
      pe_cfg.cps_wr = pe_cfg.cps_rd;
      pe_cfg.reload = (pass != 0);
      pe_cmp_start = '1;
      if (pass == 1) begin
        // psum fill of the second L0 psum half while psums are being unloaded
        l1_cfg.down[DT_PS] = lin(192, 16); l1_cfg.net[DT_PS] = '{mask: 32'h3, last_mask: 32'h3, last_round: '0};
        pe_cfg.recv[DT_PS] = lin(320, 64);
        l1_down_start[DT_PS] = '1; pe_recv_start[DT_PS] = '1;
      end
      go(); wait_idle();
    end

    // drain L0 -> L1, one PE at a time (all clusters in parallel)
    for (int p = 0; p < NPE; p++) begin
      pe_cfg.up = lin(0, 4 * VWL * NPOS);
      l1_cfg.up_wr = lin(p * VWL * NPOS, VWL * NPOS); l1_cfg.up_sel = 8'(p);
      l1_up_wr_start = '1;
      for (int c = 0; c < NCL; c++) pe_up_start[c*NPE + p] = 1'b1;
      if (p == 0) begin
        // concurrent L2 -> L1 psum write to provoke the L1 stall
        l2_cfg.down[DT_PS] = lin(160, 8); l1_cfg.recv[DT_PS] = lin(224, 16);
        l2_down_start[DT_PS] = 1'b1; l1_recv_start[DT_PS] = '1;
      end
      go(); wait_idle();
    end
    // drain L1 -> L2, one cluster at a time, with concurrent DRAM psum writes
    for (int c = 0; c < NCL; c++) begin
      l1_cfg.up_rd = lin(0, NPE * VWL * NPOS);
      l2_cfg.up_wr = lin(c * NPE * VWL * NPOS / 2, NPE * VWL * NPOS / 2); l2_cfg.up_sel = 8'(c);
      l1_up_rd_start[c] = 1'b1; l2_up_start = 1'b1;
      go();
      if (c == 0) begin
        repeat (10) @(posedge clk);
        #1;
        for (int i = 0; i < 40; i++) dw(DT_PS, 176 + (i % 8), 64'(i));
      end
      wait_idle();
    end

    // read back and compare
    for (int c = 0; c < NCL; c++)
      for (int p = 0; p < NPE; p++)
        for (int pos = 0; pos < NPOS; pos++)
          for (int lane = 0; lane < VWL; lane++) begin
            int idx, k, h, w, f, exp;
            logic [31:0] got;
            idx = c * NPE * VWL * NPOS + p * VWL * NPOS + pos * VWL + lane;
            dram_rd_en = 1; dram_rd_addr = AW'(idx / 2);
            @(posedge clk); #1 dram_rd_en = 0;
            got = dram_rd_data[32 * (idx % 2) +: 32];
            k = (c * NPE + p) * VWL + lane;
            h = pos % HO; w = (pos / HO) % WO; f = pos / (HO * WO);
            exp = 0;
            for (int cc = 0; cc < C; cc++) for (int t = 0; t < T; t++)
              for (int s = 0; s < S; s++) for (int r = 0; r < R; r++)
                exp += int'(din[cc][f+t][w+s][h+r]) * int'(wt[k][cc][t][s][r]);
            checks++;
            if (got !== 32'(exp)) begin
              failures++;
              if (failures < 10) $display("mismatch k=%0d f=%0d w=%0d h=%0d got=%0d exp=%0d", k, f, w, h, $signed(got), exp);
            end
          end

    checks++; if (err) begin failures++; $display("buffer range error flagged"); end
    $display("mechanisms: L1/L2 stall=%0d L0 stall=%0d last-round=%0d reload=%0d",
             ev_cnt[0], ev_cnt[1], ev_cnt[2], ev_cnt[3]);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (ev_cnt[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

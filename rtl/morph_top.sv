// morph_top: the Morph flexible 3D-CNN accelerator (paper Fig. 9).
//
// NCL clusters of NPE PEs sit below a shared L2 configurable buffer
// (NB banks of 64-bit words).  The L2 control has three read engines that
// stream L2 regions onto three global broadcast networks (inputs, weights,
// psums; 64 bits each) whose mask registers select the clusters, and a
// write engine that packs 32-bit psums returned from the cluster chosen by
// `cfg.up_sel` into 64-bit L2 words through the L2's psum-update port.
//
// The DRAM side is brought out as ports: the off-chip memory (or the host
// that moves tiles in the outer loop order) writes any data type into its L2
// region with `dram_wr_*` and reads L2 psums back with `dram_rd_*` (data one
// cycle later; the L2 psum read engine has priority on that port).
//
// Operation is programmed, not fixed: before each step the host presents
// configuration structs (bank assignments, loop-FSM programs, network masks)
// and pulses the matching start bits; `busy` is high while any engine runs.
// A layer is a sequence of such steps: fill the L2, multicast tiles to the
// L1s and L0s, compute, drain psums upward.  Which loop order, tile sizes
// and degree of PE parallelism the steps realise is up to the programs.
// `ev` reports, per cycle, whether each named mechanism happened:
// bit 0 psum-update stall in an L1 or the L2, bit 1 psum-update stall in an
// L0, bit 2 a network beat under a last-round mask, bit 3 an accumulator
// reload.
module morph_top
  import morph_pkg::*;
#(
  parameter int unsigned NCL      = M,
  parameter int unsigned NPE      = N,
  parameter int unsigned VWL      = VW,
  parameter int unsigned L2DEPTH  = L2_DEPTH,
  parameter int unsigned L1DEPTH  = L1_DEPTH,
  parameter int unsigned L0DEPTH  = L0_DEPTH
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // bank assignment registers
  input  logic                        l2_bcfg_load,
  input  bank_cfg_t                   l2_bcfg,
  input  logic                        l1_bcfg_load,
  input  bank_cfg_t                   l1_bcfg,
  input  logic                        l0_bcfg_load,
  input  bank_cfg_t                   l0_bcfg,
  // programs
  input  l2_cfg_t                     l2_cfg,
  input  l1_cfg_t                     l1_cfg,
  input  pe_cfg_t                     pe_cfg,
  // starts
  input  logic [2:0]                  l2_down_start,
  input  logic                        l2_up_start,
  input  logic [2:0][NCL-1:0]         l1_recv_start,
  input  logic [2:0][NCL-1:0]         l1_down_start,
  input  logic [NCL-1:0]              l1_up_wr_start,
  input  logic [NCL-1:0]              l1_up_rd_start,
  input  logic [2:0][NCL*NPE-1:0]     pe_recv_start,
  input  logic [NCL*NPE-1:0]          pe_cmp_start,
  input  logic [NCL*NPE-1:0]          pe_up_start,
  // DRAM side of the L2
  input  logic                        dram_wr_en,
  input  dtype_e                      dram_wr_type,
  input  logic [AW-1:0]               dram_wr_addr,
  input  logic [L2_W-1:0]             dram_wr_data,
  input  logic                        dram_rd_en,
  input  logic [AW-1:0]               dram_rd_addr,
  output logic [L2_W-1:0]             dram_rd_data,
  // status
  output logic                        busy,
  output logic [3:0]                  ev,
  output logic                        err
);
  // ---------------- L2 buffer ----------------
  logic [2:0]           wr_en, rd_en;
  logic [2:0][AW-1:0]   wr_addr, rd_addr;
  logic [2:0][L2_W-1:0] wr_data, rd_data;
  logic                 pu_en, pu_ready;
  logic [AW-1:0]        pu_addr;
  logic [L2_W-1:0]      pu_data;
  logic [2*NB-1:0]      assign_vec;
  logic                 l2_err;

  config_buffer #(.NBK(NB), .DEPTH(L2DEPTH), .W(L2_W)) u_l2 (
    .clk, .rst_n, .bcfg_load(l2_bcfg_load), .bcfg(l2_bcfg), .assign_vec,
    .wr_en, .wr_addr, .wr_data, .pu_en, .pu_addr, .pu_data, .pu_ready,
    .rd_en, .rd_addr, .rd_data, .err(l2_err));

  always_comb
    for (int t = 0; t < 3; t++) begin
      wr_en[t]   = dram_wr_en && (dram_wr_type == dtype_e'(t));
      wr_addr[t] = dram_wr_addr;
      wr_data[t] = dram_wr_data;
    end

  // ---------------- L2 control: down engines + global networks ----------------
  logic [2:0]                 s_rd_en, s_valid, s_last, s_ready, d_last, down_busy, down_done, lr_act;
  logic [2:0][AW-1:0]         s_rd_addr;
  logic [2:0][L2_W-1:0]       s_data, d_data;
  logic [2:0][NCL-1:0]        d_valid, d_ready;

  for (genvar t = 0; t < 3; t++) begin : g_down
    xfer_src #(.W(L2_W)) u_src (
      .clk, .rst_n, .start(l2_down_start[t]), .cfg(l2_cfg.down[t]),
      .rd_en(s_rd_en[t]), .rd_addr(s_rd_addr[t]), .rd_data(rd_data[t]),
      .m_valid(s_valid[t]), .m_data(s_data[t]), .m_last(s_last[t]), .m_ready(s_ready[t]),
      .busy(down_busy[t]), .done(down_done[t]));
    bcast_net #(.NDST(NCL), .W(L2_W)) u_net (
      .clk, .rst_n, .start(l2_down_start[t]), .cfg(l2_cfg.net[t]),
      .s_valid(s_valid[t]), .s_data(s_data[t]), .s_last(s_last[t]), .s_ready(s_ready[t]),
      .d_valid(d_valid[t]), .d_data(d_data[t]), .d_last(d_last[t]), .d_ready(d_ready[t]),
      .last_round_active(lr_act[t]));
  end

  assign rd_en[DT_IN]   = s_rd_en[DT_IN];
  assign rd_addr[DT_IN] = s_rd_addr[DT_IN];
  assign rd_en[DT_WT]   = s_rd_en[DT_WT];
  assign rd_addr[DT_WT] = s_rd_addr[DT_WT];
  assign rd_en[DT_PS]   = s_rd_en[DT_PS] || dram_rd_en;
  assign rd_addr[DT_PS] = s_rd_en[DT_PS] ? s_rd_addr[DT_PS] : dram_rd_addr;
  assign dram_rd_data   = rd_data[DT_PS];

  // ---------------- clusters ----------------
  logic [NCL-1:0]             c_busy, c_err, o_valid, o_ready;
  logic [NCL-1:0][L1_W-1:0]   o_data;
  logic [NCL-1:0][3:0]        c_ev;

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    logic [2:0] gv, gr, rs, ds;
    logic [2:0][L2_W-1:0] gd;
    logic [2:0][NPE-1:0]  prs;
    for (genvar t = 0; t < 3; t++) begin : g_t
      assign gv[t] = d_valid[t][c];
      assign gd[t] = d_data[t];
      assign d_ready[t][c] = gr[t];
      assign rs[t] = l1_recv_start[t][c];
      assign ds[t] = l1_down_start[t][c];
      assign prs[t] = pe_recv_start[t][c*NPE +: NPE];
    end
    cluster #(.NPE(NPE), .VWL(VWL), .L1DEPTH(L1DEPTH), .L0DEPTH(L0DEPTH)) u_cl (
      .clk, .rst_n, .l1_bcfg_load, .l1_bcfg, .l0_bcfg_load, .l0_bcfg,
      .cfg(l1_cfg), .pe_cfg,
      .recv_start(rs), .down_start(ds),
      .up_wr_start(l1_up_wr_start[c]), .up_rd_start(l1_up_rd_start[c]),
      .pe_recv_start(prs), .pe_cmp_start(pe_cmp_start[c*NPE +: NPE]),
      .pe_up_start(pe_up_start[c*NPE +: NPE]),
      .g_valid(gv), .g_data(gd), .g_ready(gr),
      .o_valid(o_valid[c]), .o_data(o_data[c]), .o_ready(o_ready[c]),
      .busy(c_busy[c]), .ev(c_ev[c]), .err(c_err[c]));
  end

  // ---------------- L2 control: psum return ----------------
  logic [7:0]       sel_q;
  logic             uw_valid, uw_ready, uw_busy, uw_done;
  logic [L1_W-1:0]  uw_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= '0;
    else if (l2_up_start) sel_q <= l2_cfg.up_sel;
  end
  always_comb begin
    uw_valid = 1'b0; uw_data = '0; o_ready = '0;
    for (int c = 0; c < NCL; c++)
      if (sel_q == 8'(c)) begin
        uw_valid = o_valid[c]; uw_data = o_data[c]; o_ready[c] = uw_ready;
      end
  end
  xfer_dst #(.WI(L1_W), .WO(L2_W)) u_upw (
    .clk, .rst_n, .start(l2_up_start), .cfg(l2_cfg.up_wr),
    .s_valid(uw_valid), .s_data(uw_data), .s_ready(uw_ready),
    .wr_en(pu_en), .wr_addr(pu_addr), .wr_data(pu_data), .wr_ready(pu_ready),
    .busy(uw_busy), .done(uw_done));

  logic [3:0] c_ev_or;
  always_comb begin
    c_ev_or = '0;
    for (int c = 0; c < NCL; c++) c_ev_or |= c_ev[c];
  end

  assign busy = |down_busy || |c_busy || uw_busy;
  assign ev   = {c_ev_or[3], c_ev_or[2] | (|(lr_act & s_valid & s_ready)), c_ev_or[1],
                 c_ev_or[0] | (pu_en && !pu_ready)};
  assign err  = l2_err || |c_err;
endmodule

// cluster: one Morph compute cluster (paper Fig. 9 "Cluster").
//
// Contents: the cluster's L1 configurable buffer (NB banks of 32-bit words),
// the L1 control and NPE PEs joined by three local broadcast networks
// (inputs, weights, psums) and a psum return path.
//   Fill:  three xfer_dst write FSMs take 64-bit words from the global
//          networks and write them as 32-bit L1 words.
//   Down:  three xfer_src read FSMs stream L1 regions onto the local
//          networks; each network's mask register selects the PEs
//          (unicast, multicast or broadcast) with a second mask for the
//          last round.
//   Up:    psum bytes drained from the PE chosen by `up_sel` are packed into
//          32-bit psums and written through the L1's lower-level psum-update
//          port (stalled when the L2 writes psums into the L1 in the same
//          cycle); a read FSM streams L1 psums up to the L2.
// All programs are loaded when their start pulses arrive.  PE programs are
// broadcast to every PE; per-PE start vectors choose which PEs act.
// The psum-return multiplexer and the use of the L1 psum read port by both
// the down and up engines (down first) are this design's choices.
module cluster
  import morph_pkg::*;
#(
  parameter int unsigned NPE      = N,
  parameter int unsigned VWL      = VW,
  parameter int unsigned L1DEPTH  = L1_DEPTH,
  parameter int unsigned L0DEPTH  = L0_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     l1_bcfg_load,
  input  bank_cfg_t                l1_bcfg,
  input  logic                     l0_bcfg_load,
  input  bank_cfg_t                l0_bcfg,
  input  l1_cfg_t                  cfg,
  input  pe_cfg_t                  pe_cfg,
  // L1 control starts
  input  logic [2:0]               recv_start,
  input  logic [2:0]               down_start,
  input  logic                     up_wr_start,
  input  logic                     up_rd_start,
  // PE starts
  input  logic [2:0][NPE-1:0]      pe_recv_start,
  input  logic [NPE-1:0]           pe_cmp_start,
  input  logic [NPE-1:0]           pe_up_start,
  // from the global networks
  input  logic [2:0]               g_valid,
  input  logic [2:0][L2_W-1:0]     g_data,
  output logic [2:0]               g_ready,
  // psums to the L2
  output logic                     o_valid,
  output logic [L1_W-1:0]          o_data,
  input  logic                     o_ready,
  // status
  output logic                     busy,
  output logic [3:0]               ev,     // {reload, last-round mask, L0 stall, L1 stall}
  output logic                     err
);
  // ---------------- L1 buffer ----------------
  logic [2:0]           wr_en, rd_en;
  logic [2:0][AW-1:0]   wr_addr, rd_addr;
  logic [2:0][L1_W-1:0] wr_data, rd_data;
  logic                 pu_en, pu_ready;
  logic [AW-1:0]        pu_addr;
  logic [L1_W-1:0]      pu_data;
  logic [2*NB-1:0]      assign_vec;
  logic                 l1_err;

  config_buffer #(.NBK(NB), .DEPTH(L1DEPTH), .W(L1_W)) u_l1 (
    .clk, .rst_n, .bcfg_load(l1_bcfg_load), .bcfg(l1_bcfg), .assign_vec,
    .wr_en, .wr_addr, .wr_data, .pu_en, .pu_addr, .pu_data, .pu_ready,
    .rd_en, .rd_addr, .rd_data, .err(l1_err));

  // ---------------- fills from L2 ----------------
  logic [2:0] recv_busy, recv_done;
  for (genvar t = 0; t < 3; t++) begin : g_recv
    xfer_dst #(.WI(L2_W), .WO(L1_W)) u_dst (
      .clk, .rst_n, .start(recv_start[t]), .cfg(cfg.recv[t]),
      .s_valid(g_valid[t]), .s_data(g_data[t]), .s_ready(g_ready[t]),
      .wr_en(wr_en[t]), .wr_addr(wr_addr[t]), .wr_data(wr_data[t]),
      .wr_ready(1'b1), .busy(recv_busy[t]), .done(recv_done[t]));
  end

  // ---------------- down engines and local networks ----------------
  logic [2:0]                 s_rd_en, s_valid, s_last, s_ready, d_last, down_busy, down_done, lr_act;
  logic [2:0][AW-1:0]         s_rd_addr;
  logic [2:0][L1_W-1:0]       s_data, d_data;
  logic [2:0][NPE-1:0]        d_valid, d_ready;
  logic                       up_rd_en;
  logic [AW-1:0]              up_rd_addr;

  for (genvar t = 0; t < 3; t++) begin : g_down
    xfer_src #(.W(L1_W)) u_src (
      .clk, .rst_n, .start(down_start[t]), .cfg(cfg.down[t]),
      .rd_en(s_rd_en[t]), .rd_addr(s_rd_addr[t]), .rd_data(rd_data[t]),
      .m_valid(s_valid[t]), .m_data(s_data[t]), .m_last(s_last[t]), .m_ready(s_ready[t]),
      .busy(down_busy[t]), .done(down_done[t]));
    bcast_net #(.NDST(NPE), .W(L1_W)) u_net (
      .clk, .rst_n, .start(down_start[t]), .cfg(cfg.net[t]),
      .s_valid(s_valid[t]), .s_data(s_data[t]), .s_last(s_last[t]), .s_ready(s_ready[t]),
      .d_valid(d_valid[t]), .d_data(d_data[t]), .d_last(d_last[t]), .d_ready(d_ready[t]),
      .last_round_active(lr_act[t]));
  end

  assign rd_en[DT_IN]   = s_rd_en[DT_IN];
  assign rd_addr[DT_IN] = s_rd_addr[DT_IN];
  assign rd_en[DT_WT]   = s_rd_en[DT_WT];
  assign rd_addr[DT_WT] = s_rd_addr[DT_WT];
  assign rd_en[DT_PS]   = s_rd_en[DT_PS] || up_rd_en;
  assign rd_addr[DT_PS] = s_rd_en[DT_PS] ? s_rd_addr[DT_PS] : up_rd_addr;

  // ---------------- PEs ----------------
  logic [NPE-1:0]        u_valid, u_ready, cmp_busy, up_busy, pe_stall, pe_rl, pe_err;
  logic [NPE-1:0][7:0]   u_data;
  logic [NPE-1:0][2:0]   pe_recv_busy;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic [2:0] nv, nr, rs;
    logic [2:0][L1_W-1:0] nd;
    for (genvar t = 0; t < 3; t++) begin : g_t
      assign nv[t] = d_valid[t][p];
      assign nd[t] = d_data[t];
      assign d_ready[t][p] = nr[t];
      assign rs[t] = pe_recv_start[t][p];
    end
    pe #(.VWL(VWL), .DEPTH(L0DEPTH)) u_pe (
      .clk, .rst_n, .bcfg_load(l0_bcfg_load), .bcfg(l0_bcfg), .cfg(pe_cfg),
      .recv_start(rs), .cmp_start(pe_cmp_start[p]), .up_start(pe_up_start[p]),
      .n_valid(nv), .n_data(nd), .n_ready(nr),
      .u_valid(u_valid[p]), .u_data(u_data[p]), .u_ready(u_ready[p]),
      .recv_busy(pe_recv_busy[p]), .cmp_busy(cmp_busy[p]), .up_busy(up_busy[p]),
      .pu_stall(pe_stall[p]), .reload_ev(pe_rl[p]), .err(pe_err[p]));
  end

  // ---------------- psum return: PE -> L1 ----------------
  logic [7:0]  sel_q;
  logic        uw_valid, uw_ready, uw_busy, uw_done;
  logic [7:0]  uw_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= '0;
    else if (up_wr_start) sel_q <= cfg.up_sel;
  end
  always_comb begin
    uw_valid = 1'b0; uw_data = '0; u_ready = '0;
    for (int p = 0; p < NPE; p++)
      if (sel_q == 8'(p)) begin
        uw_valid = u_valid[p]; uw_data = u_data[p]; u_ready[p] = uw_ready;
      end
  end
  xfer_dst #(.WI(8), .WO(L1_W)) u_upw (
    .clk, .rst_n, .start(up_wr_start), .cfg(cfg.up_wr),
    .s_valid(uw_valid), .s_data(uw_data), .s_ready(uw_ready),
    .wr_en(pu_en), .wr_addr(pu_addr), .wr_data(pu_data), .wr_ready(pu_ready),
    .busy(uw_busy), .done(uw_done));

  // ---------------- psum return: L1 -> L2 ----------------
  logic ur_busy, ur_done, o_last;
  xfer_src #(.W(L1_W)) u_upr (
    .clk, .rst_n, .start(up_rd_start), .cfg(cfg.up_rd),
    .rd_en(up_rd_en), .rd_addr(up_rd_addr), .rd_data(rd_data[DT_PS]),
    .m_valid(o_valid), .m_data(o_data), .m_last(o_last), .m_ready(o_ready),
    .busy(ur_busy), .done(ur_done));

  logic any_pe_recv;
  always_comb begin
    any_pe_recv = 1'b0;
    for (int p = 0; p < NPE; p++) any_pe_recv |= |pe_recv_busy[p];
  end
  assign busy = |recv_busy || |down_busy || any_pe_recv || |cmp_busy || |up_busy || uw_busy || ur_busy;
  assign ev   = {|pe_rl, |(lr_act & s_valid & s_ready), |pe_stall, pu_en && !pu_ready};
  assign err  = l1_err || |pe_err;
endmodule

// pe: Morph processing element (paper Fig. 9 inset, Sec. IV-A2).
//
// Contents: an L0 configurable buffer (NB banks of 8-bit words shared by
// inputs, weights and psums), the buffer control (three write FSMs that fill
// the L0 from the cluster's local networks and a read FSM that drains psums
// back up), the datapath control and a VW-lane vector ALU with one
// accumulator per lane.
//
// Compute (started by `cmp_start`) is driven by four programmable loop FSMs:
//   cwt    walks weights, one 8-bit read per cycle.  Its loop 0 has bound VW
//          (one weight per lane); trigger 0 (lane loop ends) means a weight
//          vector is complete, trigger 1 means a dot product is complete.
//   cin    walks inputs and advances once per weight vector.
//   cps_rd reloads the VW accumulators byte by byte before each output group
//          (when `reload` is set, for dot products split across channel
//          tiles), otherwise the accumulators are cleared.
//   cps_wr unloads the VW accumulators, byte by byte, into the L0 psum region
//          through the buffer's lower-level psum-update port.
// Per output group the datapath control runs PREP (clear or 4*VW reload
// reads), RUN (one weight read per cycle, one vector MACC every VW cycles),
// DRAIN (last MACC) and UNLD (4*VW psum bytes, stalled while the L1 writes
// psums into the L0 in the same cycle).  Loop order, tile sizes and which
// loops trigger events are all set by the FSM programs.
//
// This design's choices where the paper is silent: the L0 word is 8 bits
// (the paper's P) so a lane's weights are read one per cycle and held in a
// weight vector register; psums are 32 bits stored as 4 little-endian bytes;
// all L0 reads have one cycle latency.
// Interface: fills arrive as 32-bit words on three valid/ready ports;
// drained psum bytes leave on an 8-bit valid/ready port.
module pe
  import morph_pkg::*;
#(
  parameter int unsigned VWL   = VW,
  parameter int unsigned DEPTH = L0_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  bcfg_load,
  input  bank_cfg_t             bcfg,
  input  pe_cfg_t               cfg,
  input  logic [2:0]            recv_start,
  input  logic                  cmp_start,
  input  logic                  up_start,
  // fills from the cluster's local networks (index = data type)
  input  logic [2:0]            n_valid,
  input  logic [2:0][L1_W-1:0]  n_data,
  output logic [2:0]            n_ready,
  // psum bytes to the cluster
  output logic                  u_valid,
  output logic [7:0]            u_data,
  input  logic                  u_ready,
  // status
  output logic [2:0]            recv_busy,
  output logic                  cmp_busy,
  output logic                  up_busy,
  output logic                  pu_stall,
  output logic                  reload_ev,
  output logic                  err
);
  localparam int unsigned NPB = 4 * VWL;          // psum bytes per group
  localparam int unsigned CBW = $clog2(NPB + 1);

  // ---------------- L0 buffer ----------------
  logic [2:0]           wr_en, rd_en;
  logic [2:0][AW-1:0]   wr_addr, rd_addr;
  logic [2:0][L0_W-1:0] wr_data, rd_data;
  logic                 pu_en, pu_ready;
  logic [AW-1:0]        pu_addr;
  logic [L0_W-1:0]      pu_data;
  logic [2*NB-1:0]      assign_vec;

  config_buffer #(.NBK(NB), .DEPTH(DEPTH), .W(L0_W)) u_l0 (
    .clk, .rst_n, .bcfg_load, .bcfg, .assign_vec,
    .wr_en, .wr_addr, .wr_data, .pu_en, .pu_addr, .pu_data, .pu_ready,
    .rd_en, .rd_addr, .rd_data, .err);

  // ---------------- fills ----------------
  logic [2:0] recv_done;
  for (genvar t = 0; t < 3; t++) begin : g_recv
    xfer_dst #(.WI(L1_W), .WO(L0_W)) u_dst (
      .clk, .rst_n, .start(recv_start[t]), .cfg(cfg.recv[t]),
      .s_valid(n_valid[t]), .s_data(n_data[t]), .s_ready(n_ready[t]),
      .wr_en(wr_en[t]), .wr_addr(wr_addr[t]), .wr_data(wr_data[t]),
      .wr_ready(1'b1), .busy(recv_busy[t]), .done(recv_done[t]));
  end

  // ---------------- psum drain ----------------
  logic          up_rd_en, up_done;
  logic [AW-1:0] up_rd_addr;
  logic          u_last;
  xfer_src #(.W(L0_W)) u_up (
    .clk, .rst_n, .start(up_start), .cfg(cfg.up),
    .rd_en(up_rd_en), .rd_addr(up_rd_addr), .rd_data(rd_data[DT_PS]),
    .m_valid(u_valid), .m_data(u_data), .m_last(u_last), .m_ready(u_ready),
    .busy(up_busy), .done(up_done));

  // ---------------- datapath control ----------------
  typedef enum logic [2:0] {S_IDLE, S_PREP, S_RUN, S_DRAIN, S_UNLD} st_e;
  st_e st;

  logic          wt_adv, in_adv, rl_adv, ps_adv;
  logic          wt_busy, in_busy, rl_busy, ps_busy;
  logic [AW-1:0] wt_addr, in_addr, rl_addr, ps_addr;
  logic [NT-1:0] wt_trig, in_trig, rl_trig, ps_trig;
  logic [D-1:0]  wt_last, in_last, rl_last, ps_last;
  logic          wt_fin, in_fin, rl_fin, ps_fin;
  logic          wt_dn, in_dn, rl_dn, ps_dn;
  logic          reload_q;
  logic [CBW-1:0] cnt;

  loop_fsm u_wt (.clk, .rst_n, .start(cmp_start), .cfg(cfg.cwt), .adv(wt_adv),
    .busy(wt_busy), .addr(wt_addr), .last(wt_last), .trig(wt_trig), .final_st(wt_fin), .done(wt_dn));
  loop_fsm u_in (.clk, .rst_n, .start(cmp_start), .cfg(cfg.cin), .adv(in_adv),
    .busy(in_busy), .addr(in_addr), .last(in_last), .trig(in_trig), .final_st(in_fin), .done(in_dn));
  loop_fsm u_rl (.clk, .rst_n, .start(cmp_start), .cfg(cfg.cps_rd), .adv(rl_adv),
    .busy(rl_busy), .addr(rl_addr), .last(rl_last), .trig(rl_trig), .final_st(rl_fin), .done(rl_dn));
  loop_fsm u_ps (.clk, .rst_n, .start(cmp_start), .cfg(cfg.cps_wr), .adv(ps_adv),
    .busy(ps_busy), .addr(ps_addr), .last(ps_last), .trig(ps_trig), .final_st(ps_fin), .done(ps_dn));

  assign wt_adv = (st == S_RUN) && wt_busy;
  assign in_adv = wt_adv && wt_trig[0];
  assign rl_adv = (st == S_PREP) && reload_q && (cnt != CBW'(NPB));
  assign pu_en  = (st == S_UNLD);
  assign ps_adv = pu_en && pu_ready;

  // L0 read ports
  assign rd_en[DT_IN]   = in_adv;
  assign rd_addr[DT_IN] = in_addr;
  assign rd_en[DT_WT]   = wt_adv;
  assign rd_addr[DT_WT] = wt_addr;
  assign rd_en[DT_PS]   = rl_adv || up_rd_en;
  assign rd_addr[DT_PS] = rl_adv ? rl_addr : up_rd_addr;

  // ALU operand pipeline: buffer data is valid one cycle after the read
  logic                           wt_q, mac_q, rl_q;
  logic [CBW-1:0]                 rl_cnt_q;
  logic [VWL-1:0][P-1:0]          wvec;
  logic signed [VWL-1:0][P-1:0]   wts;
  logic signed [VWL-1:0][PSUM_W-1:0] acc;
  logic                           clr;

  always_comb begin
    for (int l = 0; l < VWL - 1; l++) wts[l] = wvec[l+1];
    wts[VWL-1] = rd_data[DT_WT];
  end

  assign clr = (st == S_PREP) && !reload_q;

  mac_alu #(.VW(VWL), .P(P), .ACC_W(PSUM_W)) u_alu (
    .clk, .rst_n, .clr, .mac_en(mac_q), .act(rd_data[DT_IN]), .wts,
    .ld_en(rl_q), .ld_lane(rl_cnt_q[2 +: $clog2(VWL)]), .ld_byte(rl_cnt_q[1:0]),
    .ld_data(rd_data[DT_PS]), .acc);

  assign pu_addr = ps_addr;
  assign pu_data = acc[cnt[2 +: $clog2(VWL)]][8*cnt[1:0] +: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; reload_q <= 1'b0;
      wt_q <= 1'b0; mac_q <= 1'b0; rl_q <= 1'b0; rl_cnt_q <= '0; wvec <= '0;
    end else begin
      wt_q     <= wt_adv;
      mac_q    <= in_adv;
      rl_q     <= rl_adv;
      rl_cnt_q <= cnt;
      if (wt_q) wvec <= {rd_data[DT_WT], wvec[VWL-1:1]};
      unique case (st)
        S_IDLE: if (cmp_start) begin
          st <= S_PREP; cnt <= '0; reload_q <= cfg.reload;
        end
        S_PREP: begin
          if (!reload_q) st <= S_RUN;
          else if (cnt == CBW'(NPB)) begin st <= S_RUN; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        end
        S_RUN:   if (wt_adv && wt_trig[1]) st <= S_DRAIN;
        S_DRAIN: begin st <= S_UNLD; cnt <= '0; end
        S_UNLD: if (pu_ready) begin
          if (cnt == CBW'(NPB - 1)) begin
            cnt <= '0;
            st  <= wt_busy ? S_PREP : S_IDLE;
          end else cnt <= cnt + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign cmp_busy  = (st != S_IDLE);
  assign pu_stall  = pu_en && !pu_ready;
  assign reload_ev = rl_q;
endmodule

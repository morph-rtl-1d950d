// config_buffer: configurable banked buffer shared by inputs, weights and
// psums (paper Fig. 10, Sec. IV-B1).  One instance serves each level: L2,
// each cluster's L1 and each PE's L0.
//
// The buffer is NB banks of DEPTH words of W bits.  Bank-assign registers
// (loaded with `bcfg_load`) give each data type a contiguous range of banks:
// a base bank and a count.  From them the buffer derives the 2*NB-bit
// assignment vector of the figure (2 bits per bank: 0 inputs, 1 weights,
// 2 psums, 3 unused), output as `assign_vec`.  Each port carries an address
// relative to its data type's region; the high-order bits plus the type's
// base bank select the bank, the low-order bits the word inside it, so one
// access activates one bank.
//
// Writes: three ports from the higher level / network (inputs, weights,
// psums) and one psum-update port from the lower level, demultiplexed to the
// banks (the "4 x B data demux").  The higher-level psum write and the
// lower-level psum update share the psum write path; when both are requested
// in one cycle the higher level wins and `pu_ready` drops, stalling the update
// (standard backpressure, as the paper describes).
// Reads: three ports, one per data type, through the "B x 3 data mux"; data
// returns one cycle after `rd_en`.  Types occupy disjoint banks, so reads of
// different types never conflict.
// An access whose bank lies outside its type's range is dropped and sets the
// sticky `err` flag (this design's choice; the paper does not say).
module config_buffer
  import morph_pkg::*;
#(
  parameter int unsigned NBK   = NB,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 bcfg_load,
  input  bank_cfg_t            bcfg,
  output logic [2*NBK-1:0]     assign_vec,
  // higher-level writes, index = data type
  input  logic [2:0]           wr_en,
  input  logic [2:0][AW-1:0]   wr_addr,
  input  logic [2:0][W-1:0]    wr_data,
  // psum update from lower level
  input  logic                 pu_en,
  input  logic [AW-1:0]        pu_addr,
  input  logic [W-1:0]         pu_data,
  output logic                 pu_ready,
  // reads, index = data type
  input  logic [2:0]           rd_en,
  input  logic [2:0][AW-1:0]   rd_addr,
  output logic [2:0][W-1:0]    rd_data,
  output logic                 err
);
  localparam int unsigned LD = $clog2(DEPTH);

  bank_cfg_t bcfg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bcfg_q <= '0;
    else if (bcfg_load) bcfg_q <= bcfg;
  end

  // Bank assignment vector
  always_comb begin
    for (int b = 0; b < NBK; b++) begin
      assign_vec[2*b +: 2] = 2'd3;
      for (int t = 0; t < 3; t++)
        if (b >= int'(bcfg_q.base[t]) && b < int'(bcfg_q.base[t]) + int'(bcfg_q.count[t]))
          assign_vec[2*b +: 2] = 2'(t);
    end
  end

  // Address -> bank / local address for one type
  function automatic logic [AW-1:0] bank_of(input logic [AW-1:0] a, input int t);
    return AW'(bcfg_q.base[t]) + AW'(a >> LD);
  endfunction
  function automatic logic in_range(input logic [AW-1:0] a, input int t);
    return (a >> LD) < AW'(bcfg_q.count[t]);
  endfunction

  // Psum write path arbitration: higher level first
  logic pu_go;
  assign pu_ready = !wr_en[DT_PS];
  assign pu_go    = pu_en && pu_ready;

  // Per-bank write/read selection
  logic [NBK-1:0]          b_we, b_re;
  logic [NBK-1:0][LD-1:0]  b_waddr, b_raddr;
  logic [NBK-1:0][W-1:0]   b_wdata, b_rdata;
  logic                    bad;

  always_comb begin
    b_we = '0; b_re = '0; b_waddr = '0; b_raddr = '0; b_wdata = '0; bad = 1'b0;
    for (int t = 0; t < 3; t++) begin
      if (wr_en[t]) begin
        if (!in_range(wr_addr[t], t)) bad = 1'b1;
        else for (int b = 0; b < NBK; b++)
          if (bank_of(wr_addr[t], t) == AW'(b)) begin
            b_we[b] = 1'b1; b_waddr[b] = wr_addr[t][LD-1:0]; b_wdata[b] = wr_data[t];
          end
      end
      if (rd_en[t]) begin
        if (!in_range(rd_addr[t], t)) bad = 1'b1;
        else for (int b = 0; b < NBK; b++)
          if (bank_of(rd_addr[t], t) == AW'(b)) begin
            b_re[b] = 1'b1; b_raddr[b] = rd_addr[t][LD-1:0];
          end
      end
    end
    if (pu_go) begin
      if (!in_range(pu_addr, 2)) bad = 1'b1;
      else for (int b = 0; b < NBK; b++)
        if (bank_of(pu_addr, 2) == AW'(b)) begin
          b_we[b] = 1'b1; b_waddr[b] = pu_addr[LD-1:0]; b_wdata[b] = pu_data;
        end
    end
  end

  for (genvar b = 0; b < NBK; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .W(W)) u_bank (
      .clk, .we(b_we[b]), .waddr(b_waddr[b]), .wdata(b_wdata[b]),
      .re(b_re[b]), .raddr(b_raddr[b]), .rdata(b_rdata[b]));
  end

  // Output mux: remember which bank each type read
  logic [2:0][AW-1:0] rsel_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsel_q <= '0;
      err    <= 1'b0;
    end else begin
      for (int t = 0; t < 3; t++) if (rd_en[t]) rsel_q[t] <= bank_of(rd_addr[t], t);
      if (bad) err <= 1'b1;
    end
  end

  always_comb
    for (int t = 0; t < 3; t++) rd_data[t] = b_rdata[rsel_q[t][$clog2(NBK)-1:0]];

  // A lower-level psum update never lands in the same cycle as a higher-level psum write.
  property p_pu_stall;
    @(posedge clk) disable iff (!rst_n) (pu_en && wr_en[DT_PS]) |-> !pu_ready;
  endproperty
  a_pu_stall: assert property (p_pu_stall);
endmodule

// xfer_dst: write side of a buffer level (the "Write FSM" of the paper's
// Fig. 10, one per data type).
//
// It takes a valid/ready stream of WI-bit network words and writes WO-bit
// buffer words at the addresses a programmable loop_fsm generates.
//   WI >= WO (downward fills, e.g. 64-bit L2 bus into a 32-bit L1, 32-bit L1
//   bus into the 8-bit L0): each network word is split into WI/WO buffer
//   words, least significant first, one write per cycle.
//   WI <  WO (upward psums, e.g. 8-bit L0 psum bytes into the 32-bit L1):
//   WO/WI network words are packed, least significant first, into one
//   buffer write.
// Writes wait while the buffer port is not ready (`wr_ready`, the psum-update
// backpressure).  The stream is accepted only while the FSM has a pending
// address.  `busy` follows the FSM; `done` pulses after the last write.
module xfer_dst
  import morph_pkg::*;
#(
  parameter int unsigned WI = 32,
  parameter int unsigned WO = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  loop_cfg_t      cfg,
  // stream in
  input  logic           s_valid,
  input  logic [WI-1:0]  s_data,
  output logic           s_ready,
  // buffer write port
  output logic           wr_en,
  output logic [AW-1:0]  wr_addr,
  output logic [WO-1:0]  wr_data,
  input  logic           wr_ready,
  output logic           busy,
  output logic           done
);
  logic          f_final;  // current address is the last of the program
  logic [NT-1:0] f_trig;
  logic [D-1:0]  f_last;

  loop_fsm u_fsm (
    .clk, .rst_n, .start, .cfg, .adv(wr_en && wr_ready), .busy, .addr(wr_addr),
    .last(f_last), .trig(f_trig), .final_st(f_final), .done);

  if (WI >= WO) begin : g_split
    localparam int unsigned R = WI / WO;
    logic [WI-1:0]            hold;
    logic [$clog2(R+1)-1:0]   left;   // pieces still to write
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        hold <= '0; left <= '0;
      end else if (start) begin
        left <= '0;
      end else if (s_valid && s_ready) begin
        hold <= s_data;
        left <= ($clog2(R+1))'(R);
      end else if (wr_en && wr_ready) begin
        hold <= hold >> WO;
        left <= left - 1'b1;
      end
    end
    // a new word may arrive in the cycle the last piece of the previous one is written
    assign s_ready = busy && ((left == 0) || (left == 1 && wr_ready && !f_final));
    assign wr_en   = busy && (left != 0);
    assign wr_data = hold[WO-1:0];
  end else begin : g_pack
    localparam int unsigned R = WO / WI;
    logic [WO-1:0]            acc;
    logic [$clog2(R+1)-1:0]   have;   // pieces collected
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc <= '0; have <= '0;
      end else if (start) begin
        have <= '0;
      end else if (s_valid && s_ready) begin
        acc  <= {s_data, acc[WO-1:WI]};
        have <= have + 1'b1;
      end else if (wr_en && wr_ready) begin
        have <= '0;
      end
    end
    assign s_ready = busy && (have != ($clog2(R+1))'(R));
    assign wr_en   = busy && (have == ($clog2(R+1))'(R));
    assign wr_data = acc;
  end
endmodule

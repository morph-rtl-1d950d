// xfer_src: read side of a buffer level (the "L2 control", "L1 control" and
// PE "buffer control" read FSMs of the paper's Figs. 9 and 10).
//
// A programmable loop_fsm walks the address pattern of one data type in its
// buffer region.  Each address becomes a read; the word returns one cycle
// later and is queued in a 4-entry FIFO whose head drives a valid/ready
// stream onto a network.  Reads are issued only while the FIFO has room for
// every word in flight, so backpressure from the network never loses data.
// Trigger 0 of the FSM marks the final word of a round (tile); it travels
// with the word as `m_last` and lets the network switch to its last-round
// mask.  `busy` stays high until the last word has left the FIFO; `done`
// pulses then.
module xfer_src
  import morph_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  loop_cfg_t      cfg,
  // buffer read port
  output logic           rd_en,
  output logic [AW-1:0]  rd_addr,
  input  logic [W-1:0]   rd_data,
  // stream out
  output logic           m_valid,
  output logic [W-1:0]   m_data,
  output logic           m_last,
  input  logic           m_ready,
  output logic           busy,
  output logic           done
);
  logic          f_busy, f_final, f_done;
  logic [NT-1:0] f_trig;
  logic [D-1:0]  f_last;
  logic          rd_q, last_q, pop, f_empty, active, active_q;
  logic [2:0]    f_count;

  assign rd_en = f_busy && ({1'b0, f_count} + {2'b0, rd_q} < 4'd3);

  loop_fsm u_fsm (
    .clk, .rst_n, .start, .cfg, .adv(rd_en), .busy(f_busy), .addr(rd_addr),
    .last(f_last), .trig(f_trig), .final_st(f_final), .done(f_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= 1'b0; last_q <= 1'b0; active <= 1'b0; active_q <= 1'b0;
    end else begin
      rd_q     <= rd_en;
      last_q   <= f_trig[0] | f_final;
      active_q <= active;
      if (start) active <= 1'b1;
      else if (!f_busy && !rd_q && f_empty) active <= 1'b0;
    end
  end

  sync_fifo #(.W(W + 1), .DEPTH(4)) u_fifo (
    .clk, .rst_n, .push(rd_q), .wdata({last_q, rd_data}), .pop,
    .rdata({m_last, m_data}), .empty(f_empty), .count(f_count));

  assign m_valid = !f_empty;
  assign pop     = m_valid && m_ready;
  assign busy    = active;
  assign done    = active_q && !active;
endmodule

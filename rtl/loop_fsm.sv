// loop_fsm: programmable read/write address FSM (paper Fig. 11).
//
// A D-level loop nest is described by configurable loop bounds b_j and loop
// steps s_j (loop 0 innermost).  Each FSM state is one iteration
// (i_0..i_{D-1}).  In a state the FSM presents the output register on
// `addr`; when `adv` consumes the state, the step of the loop that
// increments is added to the register and the loop counters update like
// software indices.  The incrementing loop j is the first loop, counting
// from the innermost, that is not at its last iteration; all loops inside it
// reset.  When every loop is at its last iteration the nest is complete and
// the FSM goes idle (`done` pulses).
//
// Event triggers: `last[j]` is high when loops 0..j are all at their last
// iteration (loop j terminates in this state).  Trigger t is the OR of
// last[j] over the loops selected by the configured event mask, a two-level
// AND/OR as the paper describes.  Triggers mark tile ends, psum unloads and
// network round ends.
//
// Interface: `start` latches `cfg` (the shaded configuration registers) and
// resets the counters; the first state is valid the next cycle.  Outputs are
// combinational from registers; `adv` is ignored when idle.
// The paper states that j is "which loop is currently terminating ... or 0 if
// no loop is terminating"; this design reads that as the loop receiving the
// carry, so that s_0 is the innermost step and every affine walk is possible.
module loop_fsm
  import morph_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  loop_cfg_t       cfg,
  input  logic            adv,
  output logic            busy,
  output logic [AW-1:0]   addr,
  output logic [D-1:0]    last,
  output logic [NT-1:0]   trig,
  output logic            final_st,
  output logic            done
);
  loop_cfg_t             cfg_q;
  logic [D-1:0][CW-1:0]  idx;
  logic [AW-1:0]         acc;
  logic [D-1:0]          at_end;
  int unsigned           inc_j;

  always_comb begin
    for (int j = 0; j < D; j++) at_end[j] = (idx[j] == cfg_q.bound[j] - CW'(1));
    last[0] = at_end[0];
    for (int j = 1; j < D; j++) last[j] = last[j-1] & at_end[j];
    final_st = last[D-1];
    inc_j = 0;
    for (int j = D-1; j >= 0; j--) if (!at_end[j]) inc_j = j;
    for (int t = 0; t < NT; t++) trig[t] = busy & |(cfg_q.ev_mask[t] & last);
  end

  assign addr = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      idx   <= '0;
      acc   <= '0;
      cfg_q <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cfg_q <= cfg;
        idx   <= '0;
        acc   <= cfg.base;
        busy  <= 1'b1;
      end else if (busy && adv) begin
        if (final_st) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          for (int j = 0; j < D; j++) begin
            if (j < inc_j)       idx[j] <= '0;
            else if (j == inc_j) idx[j] <= idx[j] + CW'(1);
          end
          acc <= acc + cfg_q.step[inc_j];
        end
      end
    end
  end
endmodule

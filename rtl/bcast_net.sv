// bcast_net: bus-based broadcast network with destination mask (paper Sec.
// IV-A4 and IV-B3, Fig. 9 buses).
//
// One source drives a shared data bus to NDST destinations.  A mask register
// chooses the destinations, so the same bus does unicast (one bit), multicast
// or broadcast (all bits).  A beat moves only when every selected destination
// is ready, so all of them receive it in the same cycle (valid/ready
// handshake on both sides).
// Rounds: the source tags the final beat of each round (tile) with `s_last`.
// A counter tracks the rounds; in the round numbered `cfg.last_round` the
// second mask register `cfg.last_mask` replaces `cfg.mask`, so the edge round
// can occupy fewer destinations.  `start` loads the registers and clears the
// counter.  `last_round_active` reports that the second mask is in use.
module bcast_net
  import morph_pkg::*;
#(
  parameter int unsigned NDST = 16,
  parameter int unsigned W    = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  net_cfg_t         cfg,
  input  logic             s_valid,
  input  logic [W-1:0]     s_data,
  input  logic             s_last,
  output logic             s_ready,
  output logic [NDST-1:0]  d_valid,
  output logic [W-1:0]     d_data,
  output logic             d_last,
  input  logic [NDST-1:0]  d_ready,
  output logic             last_round_active
);
  logic [NDST-1:0] mask_q, last_mask_q, cur_mask;
  logic [CW-1:0]   last_round_q, round_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q <= '0; last_mask_q <= '0; last_round_q <= '0; round_q <= '0;
    end else if (start) begin
      mask_q       <= cfg.mask[NDST-1:0];
      last_mask_q  <= cfg.last_mask[NDST-1:0];
      last_round_q <= cfg.last_round;
      round_q      <= '0;
    end else if (s_valid && s_ready && s_last) begin
      round_q <= round_q + CW'(1);
    end
  end

  assign last_round_active = (round_q == last_round_q) && (last_round_q != '0);
  assign cur_mask = (round_q == last_round_q) && (last_round_q != '0) ? last_mask_q : mask_q;
  assign s_ready  = &(d_ready | ~cur_mask);
  assign d_valid  = (s_valid && s_ready) ? cur_mask : '0;
  assign d_data   = s_data;
  assign d_last   = s_last;
endmodule

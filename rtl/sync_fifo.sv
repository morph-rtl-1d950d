// sync_fifo: small synchronous FIFO used to decouple a buffer's one-cycle
// read latency from network backpressure.  `count` lets the reader keep
// track of free space.  Push when full or pop when empty are ignored.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               wdata,
  input  logic                       pop,
  output logic [W-1:0]               rdata,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  logic [W-1:0]               mem [DEPTH];
  logic [$clog2(DEPTH)-1:0]   rp, wp;
  logic                       do_push, do_pop;

  assign empty   = (count == 0);
  assign do_pop  = pop && !empty;
  assign do_push = push && (count != DEPTH[$clog2(DEPTH+1)-1:0] || do_pop);
  assign rdata   = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == $clog2(DEPTH)'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == $clog2(DEPTH)'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(do_push)) - (($clog2(DEPTH+1))'(do_pop));
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;
endmodule

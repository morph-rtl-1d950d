// sram_bank: one buffer bank, a single-read single-write SRAM (paper Sec.
// IV-B1: "Each bank supports a single read and single write port").
// Written as an array so that synthesis maps it to a memory; a process SRAM
// macro with the same ports would replace it in silicon.
// Timing: a write lands at the clock edge; a read returns `rdata` one cycle
// after `re` (synchronous read).  Same-cycle read and write of one address
// returns the old word.
module sram_bank #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 8
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

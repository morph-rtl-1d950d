// mac_alu: the PE's vector ALU (paper Sec. IV-A2, Fig. 9 PE inset).
//
// VW lanes of multiply-accumulate work in parallel across output channels
// (the K dimension): one activation is broadcast to all lanes and each lane
// multiplies it by its own weight and adds the product into its own
// accumulator register.  Operands are signed two's complement P-bit values
// and accumulators are ACC_W bits wide (this design's choice of signedness
// and width).
// Besides MACC the accumulators can be cleared (start of a dot product) or
// reloaded one byte at a time from the 8-bit L0 psum words (continuing a dot
// product that was split across channel tiles); they are read out in
// parallel on `acc`.  All operations take effect at the clock edge; `clr`
// has priority over `ld_en`, which has priority over `mac_en`.
module mac_alu #(
  parameter int unsigned VW    = 8,
  parameter int unsigned P     = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clr,
  input  logic                              mac_en,
  input  logic signed [P-1:0]               act,
  input  logic signed [VW-1:0][P-1:0]       wts,
  input  logic                              ld_en,
  input  logic [$clog2(VW)-1:0]             ld_lane,
  input  logic [$clog2(ACC_W/8)-1:0]        ld_byte,
  input  logic [7:0]                        ld_data,
  output logic signed [VW-1:0][ACC_W-1:0]   acc
);
  // Products are formed at full 2P-bit signed width, then sign-extended
  logic signed [VW-1:0][2*P-1:0] prod;
  always_comb
    for (int l = 0; l < VW; l++)
      prod[l] = (2*P)'($signed({{P{act[P-1]}}, act}) * $signed({{P{wts[l][P-1]}}, wts[l]}));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (clr) begin
      acc <= '0;
    end else if (ld_en) begin
      acc[ld_lane][8*ld_byte +: 8] <= ld_data;
    end else if (mac_en) begin
      for (int l = 0; l < VW; l++)
        acc[l] <= acc[l] + ACC_W'($signed(prod[l]));
    end
  end
endmodule

// kelle_weight_sram: the on-chip weight SRAM, DEPTH words of LANES 8-bit
// weights (2 MB with the defaults: 65536 words of 32 bytes).
//
// One word is one row of a 32x32 weight tile, so the array loads a tile in
// 32 consecutive reads. Single port: en with we writes wdata at addr, en
// without we reads, rdata valid the next cycle. Written as a synthesizable
// memory standing in for an SRAM macro. The 2 MB capacity and 8-bit
// weights follow the paper; word width and port are this design's choice.
module kelle_weight_sram
  import kelle_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned LANES = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   en,
  input  logic                   we,
  input  logic [AW-1:0]          addr,
  input  logic [LANES*WGT_W-1:0] wdata,
  output logic [LANES*WGT_W-1:0] rdata
);
  logic [LANES*WGT_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule

// sram_sp: single-port synchronous RAM standing in for a compiled SRAM macro.
//
// One access per cycle when en is high. Read data appears on rdata the cycle after the
// access and holds until the next access; on a write the old contents are read
// (read-first). we is a per-bit write enable, so the same model serves the tag array, the
// 8-byte metadata array (one bit per data byte) and the 64-byte data array with byte
// writes. The contents start undefined, as a real macro's do; the cache's valid bits are
// kept in flip-flops, not here. Which macro the arrays map to is this design's choice.
module sram_sp #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 64
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic [WIDTH-1:0]         we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      rdata <= mem[addr];
      for (int b = 0; b < WIDTH; b++)
        if (we[b]) mem[addr][b] <= wdata[b];
    end
  end
endmodule

// sram_sp: single-port synchronous memory with a bit write mask.
//
// Models the on-chip SRAMs of the accelerator (GMEM, IOMEM, weight memories,
// Quant Cache) as a plain array so that it synthesizes to a memory cell.
// One access per cycle: when `we` is high the bits selected by `wmask` are
// written; otherwise the word at `addr` appears on `rdata` one cycle later.
// Only the capacity of each memory comes from the paper; the word width,
// single port and one-cycle read latency are this design's choices.
// Contents are not reset.
module sram_sp #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
      else    rdata     <= mem[addr];
    end
  end
endmodule

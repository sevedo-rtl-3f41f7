// fp_accum: FP32 accumulation buffer (the "Accum." block of both cores).
//
// ROWS x LANES FP32 registers. `clr` zeroes every entry. `add_en` adds the
// LANES values on `add_data` to row `add_row` (one FP32 adder per lane,
// truncating, see sevedo_pkg). `rd_row` selects the row shown on `rd_data`
// combinationally. In the RMC a row is a token of the 16x16 output tile; in
// the LVC a row is a token and a lane a rank or output channel. Organisation
// and adder sharing are this design's choice; the paper names the block and
// the FP accumulation it performs.
// Timing: clear and add take effect at the clock edge; `clr` wins over `add_en`.
module fp_accum
  import sevedo_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned LANES = 16,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          add_en,
  input  logic [RW-1:0] add_row,
  input  logic [31:0]   add_data [LANES],
  input  logic [RW-1:0] rd_row,
  output logic [31:0]   rd_data [LANES]
);
  logic [31:0] acc [ROWS][LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) acc[r][l] <= '0;
    end else if (clr) begin
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) acc[r][l] <= '0;
    end else if (add_en) begin
      for (int l = 0; l < LANES; l++)
        acc[add_row][l] <= fp32_add(acc[add_row][l], add_data[l]);
    end
  end

  always_comb
    for (int l = 0; l < LANES; l++) rd_data[l] = acc[rd_row][l];
endmodule

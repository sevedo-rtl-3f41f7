// hgq_unit: base-group dequantizer of the residual path (HGQ "FP Mult").
//
// Once per base group (128 channels) every tensor PE delivers an INT22 sum
// that still carries FRAC_W = 3 fractional bits. This unit converts one row of
// TPE_COLS such sums to FP32, multiplies each by the row's FP16 base scaling
// factor (BSF) and returns the FP32 products one cycle later. Because the
// conversion happens only once per base group instead of once per sub-group,
// the array needs 16 FP multipliers shared by 256 PEs; the row-serial sharing
// is this design's choice (the paper gives the FP multiply by the BSF, not its
// organisation). FP32 results are truncated (see sevedo_pkg).
// Timing: `in_valid` with `in_row` -> `out_valid`/`out_row`/`out` one cycle later.
module hgq_unit
  import sevedo_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [3:0]               in_row,
  input  logic signed [IACC_W-1:0] in_sum [TPE_COLS],
  input  logic [15:0]              bsf,
  output logic                     out_valid,
  output logic [3:0]               out_row,
  output logic [31:0]              out [TPE_COLS]
);
  logic [31:0] bsf32;
  logic [31:0] prod [TPE_COLS];

  always_comb begin
    bsf32 = fp16_to_fp32(bsf);
    for (int c = 0; c < TPE_COLS; c++)
      prod[c] = fp32_mul(int_to_fp32(64'(in_sum[c]), -10'(FRAC_W)), bsf32);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
      for (int c = 0; c < TPE_COLS; c++) out[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_row <= in_row;
        for (int c = 0; c < TPE_COLS; c++) out[c] <= prod[c];
      end
    end
  end
endmodule

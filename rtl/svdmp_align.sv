// svdmp_align: exponent alignment of activations for SVD-guided mixed precision.
//
// Converts N FP32 activations to integers that share one exponent, the
// per-vector exponent maximum `emax` (biased FP32 exponent). A value with
// exponent e becomes trunc(x * 2^(F + 127 - emax)), with F = 14 for the
// sensitive channels (INT16, `hp` = 1) and F = 6 for the others (INT8),
// so |result| < 2^(F+1). Inputs above the maximum saturate. The result is
// returned sign-extended in 16 bits. (The exponent maxima themselves are found
// by the aggregator when it writes a vector out, see aggr_core.)
// The paper states that activations are exponent-aligned online and assigned
// INT16 or INT8; the FP32 input format, truncation and saturation are this
// design's choices. Purely combinational.
module svdmp_align
  import sevedo_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic [31:0]        x [N],
  input  logic [7:0]         emax,
  input  logic               hp,
  output logic [15:0]        q [N]
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [23:0] m;
      logic [8:0]  rsh;
      logic [15:0] mag;
      logic [15:0] lim;
      lim = hp ? 16'h7FFF : 16'h007F;
      rsh = '0;
      m   = {1'b1, x[i][22:0]};
      if (x[i][30:23] == 8'd0) begin
        mag = '0;
      end else if (x[i][30:23] > emax) begin
        mag = lim;
      end else begin
        rsh = 9'(emax - x[i][30:23]) + (hp ? 9'd9 : 9'd17);
        mag = (rsh > 9'd23) ? 16'd0 : 16'(m >> rsh);
        if (mag > lim) mag = lim;
      end
      q[i] = x[i][31] ? 16'(-mag) : mag;
    end
  end
endmodule

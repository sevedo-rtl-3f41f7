// tensor_pe: one processing element of the residual tensor array (HGQ).
//
// Each cycle with `mac_en` it multiplies four signed INT4 activations by four
// signed INT4 weights and adds the dot product to the sub-group partial sum
// (INT13, 32 channels = 8 cycles). On the last cycle of a sub-group
// (`sg_last`) the partial sum is shifted right by the sub-group's exponent
// shift `essf` (0..3) and added to the base-group INT22 accumulator; this is
// the shift-based INT accumulation of Hierarchical Group Quantization. On the
// last sub-group of a base group (`bg_last` together with `sg_last`) the
// INT22 total is copied into `hold` and `hold_valid` pulses for one cycle, so
// the shared FP dequantizer can read it while the next base group starts.
//
// The INT4 operands, fan-in 4, INT13 and INT22 widths and the right shift come
// from the paper. The shift is applied to a value extended by FRAC_W = 3
// fractional bits so that no bits are lost (this design's choice); `hold` is
// therefore the base-group sum times 2^3.
// Timing: the accumulators update on the clock edge of the cycle with
// `mac_en`; `hold` is valid from the cycle after the last MAC.
module tensor_pe
  import sevedo_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     mac_en,
  input  logic                     sg_last,
  input  logic                     bg_last,
  input  logic [ESSF_W-1:0]        essf,
  input  logic signed [3:0]        a [TPE_FANIN],
  input  logic signed [3:0]        w [TPE_FANIN],
  output logic signed [IACC_W-1:0] hold,
  output logic                     hold_valid
);
  logic signed [PSUM_W-1:0] psum, psum_nxt;
  logic signed [IACC_W-1:0] iacc, iacc_nxt, sg_shifted;
  logic signed [9:0]        dot;

  always_comb begin
    dot = '0;
    for (int i = 0; i < TPE_FANIN; i++) dot += 10'(a[i] * w[i]);
    psum_nxt   = psum + PSUM_W'(dot);
    sg_shifted = (IACC_W'(psum_nxt) <<< FRAC_W) >>> essf;
    iacc_nxt   = iacc + sg_shifted;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum       <= '0;
      iacc       <= '0;
      hold       <= '0;
      hold_valid <= 1'b0;
    end else begin
      hold_valid <= 1'b0;
      if (mac_en) begin
        if (sg_last) begin
          psum <= '0;
          if (bg_last) begin
            iacc       <= '0;
            hold       <= iacc_nxt;
            hold_valid <= 1'b1;
          end else begin
            iacc <= iacc_nxt;
          end
        end else begin
          psum <= psum_nxt;
        end
      end
    end
  end
endmodule

// tb_hgq_unit: checks the base-group dequantizer: FP32(sum / 8) * BSF for
// random INT22 sums and FP16 scales, one-cycle latency and row tagging.
module tb_hgq_unit;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [3:0] in_row, out_row;
  logic signed [21:0] in_sum [16];
  logic [15:0] bsf;
  logic [31:0] out [16];
  int checks = 0, failures = 0;

  hgq_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expv [16];
    in_valid = 0; in_row = 0; bsf = 0;
    for (int c = 0; c < 16; c++) in_sum[c] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = 1; in_row = 4'(n); bsf = rand_f16(5, 25, 1);
      for (int c = 0; c < 16; c++) begin
        in_sum[c] = (c == 0) ? 22'sd0 : (c == 1) ? -22'sd2097152 : 22'($urandom);
        expv[c] = real'(in_sum[c]) / 8.0 * f16_to_real(bsf);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_row != 4'(n)) failures++;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (!near(f32_to_real(out[c]), expv[c], 1e-6, 1e-30)) begin
          failures++;
          $display("lane %0d: got %g exp %g", c, f32_to_real(out[c]), expv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

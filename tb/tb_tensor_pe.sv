// tb_tensor_pe: checks the HGQ tensor PE against an integer model: INT4 dot
// products, INT13 sub-group sums, right shift by a random exponent shift per
// sub-group (with 3 fractional bits) and the INT22 base-group total, plus the
// timing of hold_valid.
module tb_tensor_pe;
  import sevedo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mac_en, sg_last, bg_last;
  logic [1:0] essf;
  logic signed [3:0] a [4], w [4];
  logic signed [21:0] hold;
  logic hold_valid;
  int checks = 0, failures = 0;

  tensor_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ps, tot, shifts_seen[4];
    mac_en = 0; sg_last = 0; bg_last = 0; essf = 0;
    for (int i = 0; i < 4; i++) begin a[i] = 0; w[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int bg = 0; bg < 40; bg++) begin
      tot = 0;
      for (int sg = 0; sg < 4; sg++) begin
        logic [1:0] s;
        s = 2'($urandom);
        shifts_seen[s]++;
        ps = 0;
        for (int c = 0; c < 8; c++) begin
          // occasional idle cycle must not disturb the sums
          if ($urandom % 4 == 0) begin
            @(negedge clk); mac_en = 0;
          end
          @(negedge clk);
          mac_en = 1; sg_last = (c == 7); bg_last = (c == 7 && sg == 3); essf = s;
          for (int i = 0; i < 4; i++) begin
            // extreme operands in some base groups
            a[i] = (bg % 5 == 0) ? -4'sd8 : 4'($urandom);
            w[i] = (bg % 5 == 0) ? -4'sd8 : 4'($urandom);
            ps += int'(a[i]) * int'(w[i]);
          end
        end
        tot += (ps * 8) >>> s;
      end
      @(negedge clk); mac_en = 0; sg_last = 0; bg_last = 0;
      checks++;
      if (!hold_valid || int'(hold) != tot) begin
        failures++;
        $display("bg %0d: hold=%0d valid=%0b expected %0d", bg, hold, hold_valid, tot);
      end
      @(negedge clk);
      checks++;
      if (hold_valid) failures++;   // one-cycle pulse
    end
    for (int s = 0; s < 4; s++) begin checks++; if (shifts_seen[s] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

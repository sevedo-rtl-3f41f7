// tb_fp_accum: checks the FP32 accumulation buffer: random signed additions
// into random rows compared with a real-valued model, clear, and read-out.
module tb_fp_accum;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clr, add_en;
  logic [3:0] add_row, rd_row;
  logic [31:0] add_data [16], rd_data [16];
  real model [16][16];
  int checks = 0, failures = 0;

  fp_accum #(.ROWS(16), .LANES(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input real rel);
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); rd_row = 4'(r); #1;
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (!near(f32_to_real(rd_data[l]), model[r][l], rel, 1e-3)) begin
          failures++;
          $display("r%0d l%0d got %g exp %g", r, l, f32_to_real(rd_data[l]), model[r][l]);
        end
      end
    end
  endtask

  initial begin
    clr = 0; add_en = 0; add_row = 0; rd_row = 0;
    for (int l = 0; l < 16; l++) add_data[l] = 0;
    for (int r = 0; r < 16; r++) for (int l = 0; l < 16; l++) model[r][l] = 0.0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        add_en = 1; add_row = 4'($urandom);
        for (int l = 0; l < 16; l++) begin
          real v;
          v = (real'($urandom % 20000) - 10000.0) / 64.0;   // exact in FP32
          add_data[l] = real_to_f32(v);
          model[add_row][l] += f32_to_real(add_data[l]);
        end
      end
      @(negedge clk); add_en = 0;
      check_all(1e-5);
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int r = 0; r < 16; r++) for (int l = 0; l < 16; l++) model[r][l] = 0.0;
      check_all(0.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

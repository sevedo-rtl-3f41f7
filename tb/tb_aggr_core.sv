// tb_aggr_core: the aggregation core with random residual and low-rank rows.
// Checks the 32 sum words (both paths, and each path alone), their
// addresses, the exponent-maximum word, holding under random write grants
// and the done pulse.
module tb_aggr_core;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, add_rmc, add_lvc, wr_req, wr_gnt, busy, done;
  logic [10:0] out_addr, wr_addr;
  logic [4:0] aggr_hp;
  logic [3:0] rd_row;
  logic [31:0] rmc_row [16], lvc_row [16];
  logic [255:0] wr_data;
  logic [31:0] rmc_m [16][16], lvc_m [16][16];
  int checks = 0, failures = 0;

  aggr_core dut (.*);
  always #5 clk = ~clk;
  always_comb for (int l = 0; l < 16; l++) begin rmc_row[l] = rmc_m[rd_row][l]; lvc_row[l] = lvc_m[rd_row][l]; end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; add_rmc = 0; add_lvc = 0; wr_gnt = 0; out_addr = 0; aggr_hp = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int mode = 1; mode < 4; mode++) begin
      logic [255:0] got [33];
      int n;
      for (int r = 0; r < 16; r++) for (int l = 0; l < 16; l++) begin
        rmc_m[r][l] = real_to_f32((real'($urandom % 100000) - 50000.0) / 256.0);
        lvc_m[r][l] = real_to_f32((real'($urandom % 1000) - 500.0) / 1024.0);
      end
      add_rmc = mode[0]; add_lvc = mode[1]; aggr_hp = 5'(1 + $urandom % 15);
      out_addr = 11'(200 + 64*mode);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      n = 0;
      while (!done) begin
        wr_gnt = 1'($urandom);
        @(posedge clk);
        if (wr_req && wr_gnt) begin
          checks++;
          if (wr_addr != out_addr + 11'(n)) failures++;
          got[n] = wr_data; n++;
        end
        @(negedge clk);
      end
      wr_gnt = 0;
      checks++; if (n != 33) failures++;
      for (int r = 0; r < 16; r++) begin
        int emh, eml;
        emh = 0; eml = 0;
        for (int l = 0; l < 16; l++) begin
          real e;
          logic [31:0] g;
          e = (mode[0] ? f32_to_real(rmc_m[r][l]) : 0.0) + (mode[1] ? f32_to_real(lvc_m[r][l]) : 0.0);
          g = got[2*r + l/8][32*(l%8) +: 32];
          checks++;
          if (!near(f32_to_real(g), e, 1e-6, 1e-9)) begin failures++; $display("r%0d l%0d %g vs %g", r, l, f32_to_real(g), e); end
          if (l < aggr_hp) begin if (int'(g[30:23]) > emh) emh = int'(g[30:23]); end
          else             begin if (int'(g[30:23]) > eml) eml = int'(g[30:23]); end
        end
        checks++;
        if (int'(got[32][16*r +: 8]) != emh || int'(got[32][16*r+8 +: 8]) != eml) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

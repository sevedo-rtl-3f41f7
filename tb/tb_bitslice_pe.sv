// tb_bitslice_pe: checks the SVD-MP bit-slice PE. High-precision groups
// (INT16 x INT8, four slice cycles with shifts 0/4/8/12) and low-precision
// groups (INT8 x INT4, one cycle) must accumulate to the exact integer dot
// products, including the extreme values -32768 and -128.
module tb_bitslice_pe;
  import sevedo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en, first, hp;
  logic [1:0] iter;
  logic [15:0] a [4];
  logic [7:0]  w [4];
  logic signed [39:0] acc;
  int checks = 0, failures = 0;

  bitslice_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expv;
    int hp_cycles, lp_cycles;
    en = 0; first = 0; hp = 0; iter = 0;
    for (int i = 0; i < 4; i++) begin a[i] = 0; w[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      int ngrp_hp, ngrp_lp;
      bit extreme;
      ngrp_hp = int'($urandom % 6);
      ngrp_lp = 1 + int'($urandom % 6);
      extreme = (run % 7 == 0);
      // phase 1
      if (ngrp_hp > 0) begin
        expv = 0; hp_cycles = 0;
        for (int g = 0; g < ngrp_hp; g++) begin
          logic signed [15:0] av [4];
          logic signed [7:0]  wv [4];
          for (int i = 0; i < 4; i++) begin
            av[i] = extreme ? -16'sd32768 : 16'($urandom);
            wv[i] = extreme ? -8'sd128    : 8'($urandom);
            expv += longint'(av[i]) * longint'(wv[i]);
          end
          for (int it = 0; it < 4; it++) begin
            @(negedge clk);
            en = 1; hp = 1; iter = 2'(it); first = (g == 0 && it == 0);
            for (int i = 0; i < 4; i++) begin a[i] = av[i]; w[i] = wv[i]; end
            hp_cycles++;
          end
        end
        @(negedge clk); en = 0;
        checks++;
        if (longint'(acc) != expv) begin failures++; $display("HP run %0d: %0d vs %0d", run, acc, expv); end
        checks++;
        if (hp_cycles != 4 * ngrp_hp) failures++;
      end
      // phase 2
      expv = 0; lp_cycles = 0;
      for (int g = 0; g < ngrp_lp; g++) begin
        logic signed [7:0] av;
        logic signed [3:0] wv;
        @(negedge clk);
        en = 1; hp = 0; iter = 2'($urandom); first = (g == 0);
        for (int i = 0; i < 4; i++) begin
          av = extreme ? -8'sd128 : 8'($urandom);
          wv = extreme ? -4'sd8   : 4'($urandom);
          a[i] = {{8{av[7]}}, av};
          w[i] = {{4{wv[3]}}, wv};
          expv += longint'(av) * longint'(wv);
        end
        lp_cycles++;
      end
      @(negedge clk); en = 0;
      checks++;
      if (longint'(acc) != expv) begin failures++; $display("LP run %0d: %0d vs %0d", run, acc, expv); end
      checks++;
      if (lp_cycles != ngrp_lp) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lvc: end-to-end check of the Low-rank Vector Core (SVD-MP).
// Two configurations: an L1-like pass (3 tokens x 64 channels, 16 of them
// high precision) and an L2-like pass (16 tokens x 16 channels, 4 high
// precision, the paper's top-4). Random FP32 activations, random INT8/INT4
// weights and per-token exponent maxima; the result is compared with a
// real-valued model that aligns each activation independently. Also checks
// the cycle count (hpch + (nch - hpch)/4 per token, Fig. 8), accumulation
// across passes with lvc_clear = 0, and that both precision phases ran.
module tb_lvc;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  core_cfg_t cfg;
  logic start, busy, done;
  logic wmem_we, wmem_half, ia_we, emax_we;
  logic [3:0] wmem_addr;
  logic [4:0] ia_addr;
  logic [255:0] wdata;
  logic [3:0] rd_row;
  logic [31:0] rd_data [16];
  int checks = 0, failures = 0;
  int hp_phases = 0, lp_phases = 0;

  lvc dut (.*);
  always #5 clk = ~clk;

  // count finished phases as they leave the PE stage
  always @(posedge clk) if (dut.s1_pend) begin
    if (dut.s1_hp) hp_phases++; else lp_phases++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] xv [256];
  logic [7:0]  wv [64][16];
  logic [7:0]  emx [16][2];
  real         ref_out [16][16];

  task automatic do_config(input int ntok, input int nch, input int hpch);
    logic [511:0] wword;
    int cyc, exp_cyc;
    // data
    for (int t = 0; t < ntok; t++) begin
      int eb;
      eb = 110 + int'($urandom % 20);
      emx[t][0] = 0; emx[t][1] = 0;
      for (int c = 0; c < nch; c++) begin
        int e;
        e = eb - int'($urandom % ((c < hpch) ? 3 : 10));
        xv[t*nch + c] = {1'($urandom), 8'(e), 23'($urandom)};
        if (c < hpch) begin if (8'(e) > emx[t][0]) emx[t][0] = 8'(e); end
        else          begin if (8'(e) > emx[t][1]) emx[t][1] = 8'(e); end
      end
    end
    for (int c = 0; c < nch; c++)
      for (int l = 0; l < 16; l++) begin
        logic [3:0] w4;
        w4 = 4'($urandom);
        wv[c][l] = (c < hpch) ? 8'($urandom) : {{4{w4[3]}}, w4};
      end
    cfg = '0;
    cfg.lvc_ntok = 5'(ntok); cfg.lvc_nch = 9'(nch); cfg.lvc_hpch = 9'(hpch);
    cfg.lvc_ws_hp = rand_f16(10, 16, 0); cfg.lvc_ws_lp = rand_f16(12, 18, 0);
    cfg.lvc_clear = 1;
    // reference
    for (int t = 0; t < ntok; t++)
      for (int l = 0; l < 16; l++) begin
        longint shp, slp;
        shp = 0; slp = 0;
        for (int c = 0; c < nch; c++) begin
          logic signed [7:0] w;
          w = wv[c][l];
          if (c < hpch) shp += longint'(align_ref(xv[t*nch+c], emx[t][0], 1)) * longint'(w);
          else          slp += longint'(align_ref(xv[t*nch+c], emx[t][1], 0)) * longint'(w);
        end
        ref_out[t][l] = real'(shp) * pow2(int'(emx[t][0]) - 127 - 14) * f16_to_real(cfg.lvc_ws_hp)
                      + real'(slp) * pow2(int'(emx[t][1]) - 127 - 6) * f16_to_real(cfg.lvc_ws_lp);
      end
    // load
    for (int g = 0; g < nch/4; g++) begin
      for (int l = 0; l < 16; l++)
        for (int i = 0; i < 4; i++) wword[(4*l + i)*8 +: 8] = wv[4*g + i][l];
      for (int h = 0; h < 2; h++) begin
        @(negedge clk); wmem_we = 1; wmem_addr = 4'(g); wmem_half = 1'(h); wdata = wword[256*h +: 256];
      end
    end
    @(negedge clk); wmem_we = 0;
    for (int j = 0; j < (ntok*nch + 7)/8; j++) begin
      @(negedge clk); ia_we = 1; ia_addr = 5'(j);
      for (int i = 0; i < 8; i++) wdata[32*i +: 32] = xv[8*j + i];
    end
    @(negedge clk); ia_we = 0; emax_we = 1;
    for (int t = 0; t < 16; t++) wdata[16*t +: 16] = {emx[t][1], emx[t][0]};
    @(negedge clk); emax_we = 0;
    // two passes: the second accumulates on top of the first
    for (int pass = 0; pass < 2; pass++) begin
      cfg.lvc_clear = (pass == 0);
      @(negedge clk); start = 1; cyc = 0;
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      exp_cyc = ntok * (hpch + (nch - hpch)/4);
      checks++;
      if (cyc < exp_cyc || cyc > exp_cyc + 5) begin failures++; $display("cycles %0d vs %0d", cyc, exp_cyc); end
      $display("LVC %0d tok x %0d ch (hp %0d): %0d cycles, schedule %0d", ntok, nch, hpch, cyc, exp_cyc);
      for (int t = 0; t < ntok; t++) begin
        rd_row = 4'(t); #1;
        for (int l = 0; l < 16; l++) begin
          checks++;
          if (!near(f32_to_real(rd_data[l]), ref_out[t][l] * (pass + 1), 1e-5, 1e-30)) begin
            failures++;
            $display("t%0d l%0d got %g exp %g", t, l, f32_to_real(rd_data[l]), ref_out[t][l] * (pass + 1));
          end
        end
      end
    end
  endtask

  initial begin
    cfg = '0; start = 0; wmem_we = 0; wmem_half = 0; ia_we = 0; emax_we = 0;
    wmem_addr = 0; ia_addr = 0; wdata = 0; rd_row = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    do_config(3, 64, 16);
    do_config(16, 16, 4);
    do_config(2, 32, 0);
    do_config(4, 16, 16);
    checks++; if (hp_phases == 0) failures++;
    checks++; if (lp_phases == 0) failures++;
    $display("phases: high precision %0d, low precision %0d", hp_phases, lp_phases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

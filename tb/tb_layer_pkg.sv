// tb_layer_pkg: random stimulus and real-valued reference for one
// heterogeneous core running one SVD-decomposed layer tile:
//   RMC: 16 tokens x 16 output channels x (128*n_bg) input channels, HGQ;
//   LVC: an L2-like pass, 16 tokens x 16 rank channels (top-4 high
//        precision) -> 16 output channels;
//   output = residual + low-rank, 16x16 FP32.
// The activation words of the RMC are shared by the four cores of a cluster
// and are produced by a separate function.
package tb_layer_pkg;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;

  typedef struct {
    region_e      rg;
    int           off;
    logic [255:0] data;
  } load_t;

  function automatic int a4(input logic [255:0] v, input int idx);
    logic signed [3:0] x; x = v[idx*4 +: 4]; return int'(x);
  endfunction

  class core_layer;
    int           n_bg;
    logic [255:0] wts [];
    logic [15:0]  bsf [][16];
    logic [1:0]   essf [][16][4];
    logic [31:0]  xv [256];
    logic [7:0]   wv [16][16];
    logic [7:0]   emx [16][2];
    core_cfg_t    cfg;
    real          expv [16][16];
    load_t        loads [$];

    function new(input int nbg, input int out_addr);
      n_bg = nbg;
      wts  = new[nbg*32];
      bsf  = new[nbg];
      essf = new[nbg];
      foreach (wts[k]) for (int j = 0; j < 8; j++) wts[k][32*j +: 32] = $urandom;
      for (int b = 0; b < nbg; b++)
        for (int r = 0; r < 16; r++) begin
          bsf[b][r] = rand_f16(8, 14, 1);
          for (int s = 0; s < 4; s++) essf[b][r][s] = 2'($urandom);
        end
      for (int t = 0; t < 16; t++) begin
        emx[t][0] = 0; emx[t][1] = 0;
        for (int c = 0; c < 16; c++) begin
          int e;
          e = (c < 4) ? 124 + int'($urandom % 3) : 118 + int'($urandom % 4);
          xv[t*16 + c] = {1'($urandom), 8'(e), 23'($urandom)};
          if (c < 4) begin if (8'(e) > emx[t][0]) emx[t][0] = 8'(e); end
          else       begin if (8'(e) > emx[t][1]) emx[t][1] = 8'(e); end
        end
      end
      for (int c = 0; c < 16; c++)
        for (int l = 0; l < 16; l++) begin
          logic [3:0] w4;
          w4 = 4'($urandom);
          wv[c][l] = (c < 4) ? 8'($urandom) : {{4{w4[3]}}, w4};
        end
      cfg = '0;
      cfg.out_addr = 11'(out_addr);
      cfg.add_rmc = 1; cfg.add_lvc = 1; cfg.aggr_hp = 5'd4;
      cfg.lvc_clear = 1; cfg.lvc_ntok = 5'd16; cfg.lvc_nch = 9'd16; cfg.lvc_hpch = 9'd4;
      cfg.lvc_ws_hp = rand_f16(12, 16, 0); cfg.lvc_ws_lp = rand_f16(13, 17, 0);
      build_loads();
    endfunction

    function automatic void build_loads();
      logic [511:0] ww;
      logic [255:0] d;
      loads.delete();
      foreach (wts[k]) loads.push_back('{RG_RMC_WMEM, k, wts[k]});
      for (int b = 0; b < n_bg; b++)
        for (int h = 0; h < 2; h++) begin
          for (int rr = 0; rr < 8; rr++) begin
            int r; r = h*8 + rr;
            d[32*rr +: 32] = {8'h00, essf[b][r][3], essf[b][r][2], essf[b][r][1], essf[b][r][0], bsf[b][r]};
          end
          loads.push_back('{RG_QC, 2*b + h, d});
        end
      for (int g = 0; g < 4; g++) begin
        for (int l = 0; l < 16; l++)
          for (int i = 0; i < 4; i++) ww[(4*l + i)*8 +: 8] = wv[4*g + i][l];
        loads.push_back('{RG_LVC_WMEM, 2*g,     ww[255:0]});
        loads.push_back('{RG_LVC_WMEM, 2*g + 1, ww[511:256]});
      end
      for (int j = 0; j < 32; j++) begin
        for (int i = 0; i < 8; i++) d[32*i +: 32] = xv[8*j + i];
        loads.push_back('{RG_LVC_IA, j, d});
      end
      for (int t = 0; t < 16; t++) d[16*t +: 16] = {emx[t][1], emx[t][0]};
      loads.push_back('{RG_LVC_EMAX, 0, d});
      d = '0; d[$bits(core_cfg_t)-1:0] = cfg;
      loads.push_back('{RG_CORE_CFG, 0, d});
    endfunction

    // reference for the given shared activation words
    function automatic void compute(input logic [255:0] act []);
      for (int r = 0; r < 16; r++)
        for (int c = 0; c < 16; c++) begin
          real v;
          longint shp, slp;
          v = 0.0;
          for (int b = 0; b < n_bg; b++) begin
            int itot;
            itot = 0;
            for (int s = 0; s < 4; s++) begin
              int ps;
              ps = 0;
              for (int k = b*32 + s*8; k < b*32 + s*8 + 8; k++)
                for (int i = 0; i < 4; i++) ps += a4(act[k], r*4 + i) * a4(wts[k], c*4 + i);
              itot += (ps * 8) >>> essf[b][r][s];
            end
            v += real'(itot) / 8.0 * f16_to_real(bsf[b][r]);
          end
          shp = 0; slp = 0;
          for (int ch = 0; ch < 16; ch++) begin
            logic signed [7:0] w;
            w = wv[ch][c];
            if (ch < 4) shp += longint'(align_ref(xv[r*16+ch], emx[r][0], 1)) * longint'(w);
            else        slp += longint'(align_ref(xv[r*16+ch], emx[r][1], 0)) * longint'(w);
          end
          v += real'(shp) * pow2(int'(emx[r][0]) - 127 - 14) * f16_to_real(cfg.lvc_ws_hp)
             + real'(slp) * pow2(int'(emx[r][1]) - 127 - 6) * f16_to_real(cfg.lvc_ws_lp);
          expv[r][c] = v;
        end
    endfunction

    // check the 33 output words; returns the number of failed checks
    function automatic int check(input logic [255:0] outw [33], ref int checks);
      int fails;
      fails = 0;
      for (int r = 0; r < 16; r++) begin
        int emh, eml;
        emh = 0; eml = 0;
        for (int c = 0; c < 16; c++) begin
          logic [31:0] g;
          g = outw[2*r + c/8][32*(c%8) +: 32];
          checks++;
          if (!near(f32_to_real(g), expv[r][c], 1e-4, 1e-3)) begin
            fails++;
            $display("out r%0d c%0d got %g exp %g", r, c, f32_to_real(g), expv[r][c]);
          end
          if (c < 4) begin if (int'(g[30:23]) > emh) emh = int'(g[30:23]); end
          else       begin if (int'(g[30:23]) > eml) eml = int'(g[30:23]); end
        end
        checks++;
        if (int'(outw[32][16*r +: 8]) != emh || int'(outw[32][16*r + 8 +: 8]) != eml) begin
          fails++;
          $display("emax word row %0d mismatch", r);
        end
      end
      return fails;
    endfunction
  endclass

  function automatic void gen_acts(input int n_bg, ref logic [255:0] act []);
    act = new[n_bg*32];
    foreach (act[k]) for (int j = 0; j < 8; j++) act[k][32*j +: 32] = $urandom;
  endfunction

endpackage

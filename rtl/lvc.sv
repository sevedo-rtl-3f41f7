// lvc: Low-rank Vector Core, the SVD-guided mixed-precision (SVD-MP) path.
//
// Computes y[t][l] = sum_ch x[t][ch] * L[ch][l] for up to 16 tokens t and 16
// lanes l (rank outputs for an L1 projection, output channels for an L2
// projection), with 16 bit-slice PEs of fan-in 4 (64 multipliers). The input
// channels are ordered offline so that the `hpch` precision-sensitive channels
// come first (128 for L1 and 4 for L2 in the paper). For every token the core
// runs two phases:
//   phase 1 (high precision): activations aligned to INT16, weights INT8,
//     4 slice cycles per 4-channel group -> hpch cycles;
//   phase 2 (low precision): activations INT8, weights INT4, 1 cycle per
//     group -> (nch - hpch)/4 cycles.
// Each phase has its own exponent maximum (per token) and weight scale; at the
// end of a phase the 16 integer sums are scaled to FP32 and added to row t of
// the FP32 accumulator, so a projection longer than one pass (64 channels)
// is accumulated over several passes with `lvc_clear` = 0.
// The two phases, the slice schedule, the cycle counts and INT16/INT8 and
// INT8/INT4 precisions follow the paper (Figs. 7, 8). The buffers and their
// layout are this design's:
//   WMEM (1 KB, 16 x 512 bit): word g = channels 4g..4g+3; byte (4l+i) is the
//     weight of channel 4g+i for lane l (INT8, or INT4 sign-extended);
//   IA buffer (256 FP32 entries, 32 x 256 bit): token t, channel c at entry
//     t*nch + c;
//   exponent table (one 256-bit word): bits [16t+7:16t] = phase-1 exponent
//     maximum of token t, bits [16t+15:16t+8] = phase-2 maximum.
// Dequantization: y += acc * 2^(emax - 127 - F) * wscale, F = 14 or 6.
// Interface: load the buffers while idle, then pulse `start`; `done` pulses
// when the last phase has reached the accumulator; `rd_row` reads a token row.
module lvc
  import sevedo_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  core_cfg_t          cfg,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // buffer load
  input  logic               wmem_we,
  input  logic [3:0]         wmem_addr,
  input  logic               wmem_half,
  input  logic               ia_we,
  input  logic [4:0]         ia_addr,
  input  logic               emax_we,
  input  logic [BUS_W-1:0]   wdata,
  // result
  input  logic [3:0]         rd_row,
  output logic [31:0]        rd_data [LVC_LANES]
);
  // ---------------- exponent maxima ----------------
  logic [BUS_W-1:0] emax_tab;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       emax_tab <= '0;
    else if (emax_we) emax_tab <= wdata;
  end

  // ---------------- sequencer (stage 0) ----------------
  logic       running;
  logic [4:0] tok;
  logic [4:0] g;            // group inside the token
  logic [6:0] gp;           // group index in the IA buffer
  logic [1:0] it;
  logic       s0_hp, s0_first, s0_pend, s0_last_grp, s0_last_tok;

  always_comb begin
    s0_hp       = ({2'b00, g, 2'b00} < cfg.lvc_hpch);
    s0_last_grp = ({2'b00, g, 2'b00} + 9'd4 == cfg.lvc_nch);
    s0_last_tok = (tok + 5'd1 == cfg.lvc_ntok);
    s0_first    = (it == 2'd0) && (g == 5'd0 || {2'b00, g, 2'b00} == cfg.lvc_hpch);
    s0_pend     = s0_hp ? (it == 2'd3 && {2'b00, g, 2'b00} + 9'd4 == cfg.lvc_hpch)
                        : s0_last_grp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      tok <= '0; g <= '0; gp <= '0; it <= '0;
    end else if (start && !busy) begin
      running <= 1'b1;
      tok <= '0; g <= '0; gp <= '0; it <= '0;
    end else if (running) begin
      if (s0_hp && it != 2'd3) begin
        it <= it + 2'd1;
      end else begin
        it <= 2'd0;
        gp <= gp + 7'd1;
        if (s0_last_grp) begin
          g <= '0;
          tok <= tok + 5'd1;
          if (s0_last_tok) running <= 1'b0;
        end else begin
          g <= g + 5'd1;
        end
      end
    end
  end

  // ---------------- buffers ----------------
  logic [LVC_WMEM_W-1:0] w_word;
  logic [BUS_W-1:0]      ia_word;

  sram_sp #(.WIDTH(LVC_WMEM_W), .DEPTH(LVC_WMEM_DEPTH)) u_wmem (
    .clk, .en(wmem_we || running), .we(wmem_we && !busy),
    .addr(wmem_we ? wmem_addr : g[3:0]),
    .wdata({wdata, wdata}),
    .wmask(wmem_half ? {{BUS_W{1'b1}}, {BUS_W{1'b0}}} : {{BUS_W{1'b0}}, {BUS_W{1'b1}}}),
    .rdata(w_word));

  sram_sp #(.WIDTH(BUS_W), .DEPTH(IA_ENTRIES * 32 / BUS_W)) u_iabuf (
    .clk, .en(ia_we || running), .we(ia_we && !busy),
    .addr(ia_we ? ia_addr : gp[5:1]),
    .wdata, .wmask({BUS_W{1'b1}}), .rdata(ia_word));

  // ---------------- stage 1: align and multiply ----------------
  logic       s1_v, s1_hp, s1_first, s1_pend, s1_half, s1_last;
  logic [1:0] s1_it;
  logic [3:0] s1_tok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_hp <= 1'b0; s1_first <= 1'b0; s1_pend <= 1'b0;
      s1_half <= 1'b0; s1_it <= '0; s1_tok <= '0; s1_last <= 1'b0;
    end else begin
      s1_v     <= running;
      s1_hp    <= s0_hp;
      s1_first <= s0_first;
      s1_pend  <= running && s0_pend;
      s1_half  <= gp[0];
      s1_it    <= it;
      s1_tok   <= tok[3:0];
      s1_last  <= running && s0_pend && s0_last_grp && s0_last_tok;
    end
  end

  logic [31:0] xs [LVC_FANIN];
  logic [15:0] aq [LVC_FANIN];
  logic [7:0]  emax_sel;
  logic [7:0]  w_op [LVC_LANES][LVC_FANIN];

  always_comb begin
    for (int i = 0; i < LVC_FANIN; i++) xs[i] = ia_word[(s1_half*4 + i)*32 +: 32];
    emax_sel = s1_hp ? emax_tab[16*s1_tok +: 8] : emax_tab[16*s1_tok + 8 +: 8];
    for (int l = 0; l < LVC_LANES; l++)
      for (int i = 0; i < LVC_FANIN; i++) w_op[l][i] = w_word[(l*LVC_FANIN + i)*8 +: 8];
  end

  svdmp_align #(.N(LVC_FANIN)) u_align (
    .x(xs), .emax(emax_sel), .hp(s1_hp), .q(aq));

  logic signed [LVC_ACC_W-1:0] acc [LVC_LANES];
  for (genvar l = 0; l < LVC_LANES; l++) begin : g_lane
    bitslice_pe u_pe (
      .clk, .rst_n, .en(s1_v), .first(s1_first), .hp(s1_hp), .iter(s1_it),
      .a(aq), .w(w_op[l]), .acc(acc[l]));
  end

  // ---------------- stage 2: dequantize a finished phase ----------------
  logic       s2_v, s2_hp, s2_last;
  logic [3:0] s2_tok;
  logic [7:0] s2_emax;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_hp <= 1'b0; s2_tok <= '0; s2_emax <= '0; s2_last <= 1'b0;
    end else begin
      s2_v    <= s1_pend;
      s2_last <= s1_last;
      if (s1_pend) begin
        s2_hp   <= s1_hp;
        s2_tok  <= s1_tok;
        s2_emax <= emax_sel;
      end
    end
  end

  logic [31:0]       deq [LVC_LANES];
  logic [31:0]       ws32;
  logic signed [9:0] sc;
  always_comb begin
    ws32 = fp16_to_fp32(s2_hp ? cfg.lvc_ws_hp : cfg.lvc_ws_lp);
    sc   = 10'(s2_emax) - 10'sd127 - (s2_hp ? 10'sd14 : 10'sd6);
    for (int l = 0; l < LVC_LANES; l++)
      deq[l] = fp32_mul(int_to_fp32(64'(acc[l]), sc), ws32);
  end

  // ---------------- stage 3: FP32 accumulate ----------------
  logic        s3_v, s3_last;
  logic [3:0]  s3_tok;
  logic [31:0] s3_deq [LVC_LANES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_v <= 1'b0; s3_last <= 1'b0; s3_tok <= '0;
      for (int l = 0; l < LVC_LANES; l++) s3_deq[l] <= '0;
    end else begin
      s3_v    <= s2_v;
      s3_last <= s2_last;
      s3_tok  <= s2_tok;
      for (int l = 0; l < LVC_LANES; l++) s3_deq[l] <= deq[l];
    end
  end

  fp_accum #(.ROWS(16), .LANES(LVC_LANES)) u_acc (
    .clk, .rst_n,
    .clr(start && !busy && cfg.lvc_clear), .add_en(s3_v), .add_row(s3_tok), .add_data(s3_deq),
    .rd_row, .rd_data);

  assign busy = running || s1_v || s2_v || s3_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= s3_v && s3_last;
  end
endmodule

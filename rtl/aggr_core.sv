// aggr_core: aggregation core of a heterogeneous core.
//
// Merges the two halves of an SVD-decomposed layer, y = X*R + (X*L1)*L2:
// for each of the 16 token rows it adds the FP32 residual tile row from the
// RMC and the FP32 low-rank row from the LVC (either may be switched off by
// `add_rmc` / `add_lvc`), and writes the 16 sums to the shared IOMEM as two
// 256-bit words at out_addr + 2r and out_addr + 2r + 1 (lanes 0-7, 8-15).
// While doing so it finds, per row, the largest exponent of lanes
// [0, aggr_hp) and of lanes [aggr_hp, 16), and finally writes these 32
// exponent maxima as one word at out_addr + 32 in the layout the LVC
// exponent table expects (bits 16r+7:16r and 16r+15:16r+8). This is how the
// intermediate L1 result gets the per-vector exponent maxima needed to align
// it for the L2 projection.
// The paper only names the "Aggr Core"; adding the two paths is what the
// SVD-based flow (Fig. 1a) requires, and the exponent-maximum side output,
// the memory layout and the write handshake are this design's choices.
// Interface: pulse `start`; each write is held on wr_* until `wr_gnt`;
// `done` pulses after the 33rd write is granted.
module aggr_core
  import sevedo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [10:0]       out_addr,
  input  logic              add_rmc,
  input  logic              add_lvc,
  input  logic [4:0]        aggr_hp,
  output logic [3:0]        rd_row,
  input  logic [31:0]       rmc_row [16],
  input  logic [31:0]       lvc_row [16],
  output logic              wr_req,
  output logic [10:0]       wr_addr,
  output logic [BUS_W-1:0]  wr_data,
  input  logic              wr_gnt,
  output logic              busy,
  output logic              done
);
  logic [5:0]       idx;          // 0..31 row words, 32 = exponent word
  logic [BUS_W-1:0] emax_word;
  logic [31:0]      sum [16];
  logic [15:0]      hp_mask;

  assign rd_row = idx[4:1];
  always_comb begin
    hp_mask = '0;
    for (int l = 0; l < 16; l++) hp_mask[l] = (5'(l) < aggr_hp);
    for (int l = 0; l < 16; l++)
      sum[l] = fp32_add(add_rmc ? rmc_row[l] : 32'd0, add_lvc ? lvc_row[l] : 32'd0);
    for (int l = 0; l < 8; l++)
      wr_data[32*l +: 32] = idx[5] ? emax_word[32*l +: 32] : sum[8*idx[0] + l];
    wr_addr = out_addr + 11'(idx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      idx       <= '0;
      emax_word <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        idx  <= '0;
      end else if (busy && wr_gnt) begin
        if (!idx[5] && !idx[0]) begin
          emax_word[16*idx[4:1] +: 8]     <= exp_max16(sum, hp_mask);
          emax_word[16*idx[4:1] + 8 +: 8] <= exp_max16(sum, ~hp_mask);
        end
        if (idx[5]) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        idx <= idx + 6'd1;
      end
    end
  end

  assign wr_req = busy;
endmodule

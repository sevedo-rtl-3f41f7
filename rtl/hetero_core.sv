// hetero_core: heterogeneous core = Residual Matrix Core + Low-rank Vector
// Core + aggregation core + controller.
//
// The RMC (INT4 residual path, HGQ) and the LVC (low-rank path, SVD-MP) run
// in parallel on the same layer, as in the paper; the controller starts both
// on `go`, waits until every enabled path has finished, then lets the
// aggregation core write the merged 16x16 FP32 tile (and the exponent-maximum
// word) to the cluster's IOMEM, and pulses `done`.
// Loads from the cluster arrive as (region, word offset, data) writes:
//   RG_RMC_WMEM offset k   -> RMC weight word k
//   RG_QC       offset 2b+h-> half h of Quant Cache word b
//   RG_LVC_WMEM offset 2g+h-> half h of LVC weight word g
//   RG_LVC_IA   offset j   -> IA buffer word j (8 FP32 entries)
//   RG_LVC_EMAX            -> exponent table
//   RG_CORE_CFG            -> core_cfg_t in bits [$bits(core_cfg_t)-1:0]
// The RMC's activation steps (`step`, `act_data`) come from the cluster,
// which broadcasts the same activation words to all four cores. The
// controller's sequencing is this design's; the paper names the block.
module hetero_core
  import sevedo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // loads
  input  logic              ld_we,
  input  region_e           ld_region,
  input  logic [17:0]       ld_addr,
  input  logic [BUS_W-1:0]  ld_data,
  // run
  input  logic              go,
  input  logic              rmc_en,
  input  logic              lvc_en,
  input  logic [5:0]        n_bg,
  input  logic              step,
  input  logic [BUS_W-1:0]  act_data,
  output logic              busy,
  output logic              done,
  // IOMEM write port
  output logic              wr_req,
  output logic [10:0]       wr_addr,
  output logic [BUS_W-1:0]  wr_data,
  input  logic              wr_gnt
);
  core_cfg_t cfg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                cfg <= '0;
    else if (ld_we && ld_region == RG_CORE_CFG) cfg <= core_cfg_t'(ld_data[$bits(core_cfg_t)-1:0]);
  end

  // ---------------- controller ----------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_AGGR} state_e;
  state_e     st;
  logic       rmc_pend, lvc_pend;
  logic       rmc_done, lvc_done, ag_done;
  logic       ag_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; rmc_pend <= 1'b0; lvc_pend <= 1'b0; ag_start <= 1'b0;
    end else begin
      ag_start <= 1'b0;
      case (st)
        S_IDLE: if (go) begin
          st       <= S_RUN;
          rmc_pend <= rmc_en;
          lvc_pend <= lvc_en;
        end
        S_RUN: begin
          if (rmc_done) rmc_pend <= 1'b0;
          if (lvc_done) lvc_pend <= 1'b0;
          if ((!rmc_pend || rmc_done) && (!lvc_pend || lvc_done)) begin
            st       <= S_AGGR;
            ag_start <= 1'b1;
          end
        end
        S_AGGR: if (ag_done) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
  assign done = ag_done;

  // ---------------- RMC ----------------
  logic [3:0]  rd_row;
  logic [31:0] rmc_row [16];
  logic [31:0] lvc_row [16];

  rmc u_rmc (
    .clk, .rst_n,
    .start(go && st == S_IDLE && rmc_en), .n_bg, .step, .act_data,
    .busy(), .done(rmc_done),
    .wmem_we(ld_we && ld_region == RG_RMC_WMEM), .wmem_addr(ld_addr[8:0]), .wmem_wdata(ld_data),
    .qc_we(ld_we && ld_region == RG_QC), .qc_addr(ld_addr[5:1]), .qc_half(ld_addr[0]),
    .qc_wdata(ld_data),
    .rd_row, .rd_data(rmc_row));

  // ---------------- LVC ----------------
  lvc u_lvc (
    .clk, .rst_n, .cfg,
    .start(go && st == S_IDLE && lvc_en), .busy(), .done(lvc_done),
    .wmem_we(ld_we && ld_region == RG_LVC_WMEM), .wmem_addr(ld_addr[4:1]), .wmem_half(ld_addr[0]),
    .ia_we(ld_we && ld_region == RG_LVC_IA), .ia_addr(ld_addr[4:0]),
    .emax_we(ld_we && ld_region == RG_LVC_EMAX), .wdata(ld_data),
    .rd_row, .rd_data(lvc_row));

  // ---------------- aggregation ----------------
  aggr_core u_aggr (
    .clk, .rst_n, .start(ag_start),
    .out_addr(cfg.out_addr), .add_rmc(cfg.add_rmc), .add_lvc(cfg.add_lvc), .aggr_hp(cfg.aggr_hp),
    .rd_row, .rmc_row, .lvc_row,
    .wr_req, .wr_addr, .wr_data, .wr_gnt,
    .busy(), .done(ag_done));
endmodule

// sevedo_top: the SeVeDo accelerator.
//
// Four core clusters (each: four heterogeneous cores and a shared 64 KB
// IOMEM), a 1.5 MB global memory (GMEM) and the top controller, joined by
// the NoC crossbar. NoC masters: 0 = top controller, 1 = external interface
// 0, 2 = external interface 1, 3 = SIMD core. The external interfaces and the
// SIMD core are not part of this RTL; their NoC master ports are the top's
// ports (`ext_*`, index 0..2 = EXT I/F 0, EXT I/F 1, SIMD core). NoC slaves:
// 0 = GMEM (addr[31:28] = 0, word address in addr[15:0]), 1..4 = clusters.
// A host loads GMEM through an external port, writes a descriptor program
// into GMEM and pulses `ctrl_start`; `ctrl_done` pulses at the END
// descriptor. Organisation and sizes follow the paper's overview (Fig. 2);
// the bus protocol and control scheme are this design's (see noc, top_ctrl).
module sevedo_top
  import sevedo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // top controller
  input  logic              ctrl_start,
  input  logic [ADDR_W-1:0] ctrl_desc_base,
  output logic              ctrl_busy,
  output logic              ctrl_done,
  // external NoC masters: EXT I/F 0, EXT I/F 1, SIMD core
  input  logic              ext_valid  [3],
  input  noc_req_t          ext_req    [3],
  output logic              ext_gnt    [3],
  output logic              ext_rvalid [3],
  output logic [BUS_W-1:0]  ext_rdata  [3],
  // activity counters
  output logic [15:0]       stall_cnt  [N_CLUSTERS],
  output logic [N_CLUSTERS-1:0] cl_done
);
  localparam int unsigned NM = 4;
  localparam int unsigned NS = 1 + N_CLUSTERS;

  logic              m_valid  [NM];
  noc_req_t          m_req    [NM];
  logic              m_gnt    [NM];
  logic              m_rvalid [NM];
  logic [BUS_W-1:0]  m_rdata  [NM];
  logic              s_valid  [NS];
  noc_req_t          s_req    [NS];
  logic [BUS_W-1:0]  s_rdata  [NS];

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      m_valid[i+1]  = ext_valid[i];
      m_req[i+1]    = ext_req[i];
      ext_gnt[i]    = m_gnt[i+1];
      ext_rvalid[i] = m_rvalid[i+1];
      ext_rdata[i]  = m_rdata[i+1];
    end
  end

  top_ctrl u_ctrl (
    .clk, .rst_n, .start(ctrl_start), .desc_base(ctrl_desc_base), .cl_done,
    .busy(ctrl_busy), .done(ctrl_done),
    .m_valid(m_valid[0]), .m_req(m_req[0]), .m_gnt(m_gnt[0]),
    .m_rvalid(m_rvalid[0]), .m_rdata(m_rdata[0]), .n_desc(), .n_words());

  noc #(.NM(NM), .NS(NS)) u_noc (
    .clk, .rst_n, .m_valid, .m_req, .m_gnt, .m_rvalid, .m_rdata, .s_valid, .s_req, .s_rdata);

  // global memory
  sram_sp #(.WIDTH(BUS_W), .DEPTH(GMEM_DEPTH)) u_gmem (
    .clk, .en(s_valid[0]), .we(s_req[0].we), .addr(s_req[0].addr[15:0]),
    .wdata(s_req[0].wdata), .wmask({BUS_W{1'b1}}), .rdata(s_rdata[0]));

  for (genvar c = 0; c < N_CLUSTERS; c++) begin : g_cl
    core_cluster u_cl (
      .clk, .rst_n, .s_valid(s_valid[c+1]), .s_req(s_req[c+1]), .s_rdata(s_rdata[c+1]),
      .done(cl_done[c]), .stall_cnt(stall_cnt[c]));
  end
endmodule

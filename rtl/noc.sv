// noc: on-chip interconnect between NoC masters (top controller, external
// interfaces, SIMD core) and slaves (GMEM and the four core clusters).
//
// A full crossbar: every slave has its own round-robin arbiter, so up to
// NS transfers of BUS_W bits proceed in the same cycle as long as they go to
// different slaves. A master holds `m_valid`/`m_req` until `m_gnt`; for a
// read, `m_rvalid` and `m_rdata` follow exactly one cycle after the grant
// (every slave answers in one cycle). addr[31:28] selects the slave
// (0 = GMEM, 1..4 = clusters); other values are granted at once, writes are
// dropped and reads return zero.
// The paper only names a high-bandwidth network-on-chip; the crossbar,
// arbitration and latency are this design's choices.
// The reset is also read by the `disable iff` of the embedded assertion; the
// resulting mixed sync/async-reset lint warning concerns only that
// simulation check, not the circuit, and is left as is.
module noc
  import sevedo_pkg::*;
#(
  parameter int unsigned NM = 4,
  parameter int unsigned NS = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              m_valid  [NM],
  input  noc_req_t          m_req    [NM],
  output logic              m_gnt    [NM],
  output logic              m_rvalid [NM],
  output logic [BUS_W-1:0]  m_rdata  [NM],
  output logic              s_valid  [NS],
  output noc_req_t          s_req    [NS],
  input  logic [BUS_W-1:0]  s_rdata  [NS]
);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  logic [3:0]    tgt [NM];
  logic [MW-1:0] rr  [NS];
  logic [MW-1:0] sel [NS];
  logic          hit [NS];

  always_comb begin
    for (int i = 0; i < NM; i++) tgt[i] = m_req[i].addr[31:28];
    for (int i = 0; i < NM; i++) m_gnt[i] = m_valid[i] && (32'(tgt[i]) >= NS);
    for (int j = 0; j < NS; j++) begin
      hit[j] = 1'b0;
      sel[j] = rr[j];
      for (int n = 0; n < NM; n++) begin
        int unsigned i;
        i = (32'(rr[j]) + 32'(n)) % NM;
        if (!hit[j] && m_valid[i] && 32'(tgt[i]) == j) begin
          hit[j] = 1'b1;
          sel[j] = MW'(i);
        end
      end
      s_valid[j] = hit[j];
      s_req[j]   = m_req[sel[j]];
      if (hit[j]) m_gnt[sel[j]] = 1'b1;
    end
  end

  // read return path
  logic          rd_pend [NM];
  logic          rd_ok   [NM];
  logic [SW-1:0] rd_src  [NM];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NM; i++) begin
        rd_pend[i] <= 1'b0; rd_ok[i] <= 1'b0; rd_src[i] <= '0;
      end
      for (int j = 0; j < NS; j++) rr[j] <= '0;
    end else begin
      for (int i = 0; i < NM; i++) begin
        rd_pend[i] <= m_gnt[i] && !m_req[i].we;
        rd_ok[i]   <= 32'(tgt[i]) < NS;
        rd_src[i]  <= SW'(tgt[i]);
      end
      for (int j = 0; j < NS; j++)
        if (hit[j]) rr[j] <= MW'((32'(sel[j]) + 1) % NM);
    end
  end

  always_comb
    for (int i = 0; i < NM; i++) begin
      m_rvalid[i] = rd_pend[i];
      m_rdata[i]  = (rd_pend[i] && rd_ok[i]) ? s_rdata[rd_src[i]] : '0;
    end

  // a granted read is answered in the next cycle
  for (genvar i = 0; i < NM; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     (m_gnt[i] && !m_req[i].we) |=> m_rvalid[i]);
  end
endmodule

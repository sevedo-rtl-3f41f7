// core_cluster: four heterogeneous cores sharing one 64 KB IOMEM.
//
// NoC side: a slave port that takes one request per cycle (`s_valid`,
// `s_req`) and, for reads, returns `s_rdata` in the next cycle. Inside the
// cluster, addr[23:20] selects the region (sevedo_pkg::region_e), addr[19:18]
// the core and addr[17:0] the word offset. IOMEM reads return data; reads of
// any other region return the cluster status word (bit 0 = busy).
// Writing a cl_cmd_t with `go` set to RG_CL_CMD starts all four cores at once.
// The cluster sequencer then streams n_bg*32 INT4 activation words from
// IOMEM[act_base...] and broadcasts each one to the four RMCs, so each core
// computes a different 16-output-channel tile of the same 16 tokens (this
// sharing of activations is how this design reads the paper's "sharing a
// 64KB IOMEM for activation management"). The single IOMEM port is given
// to, in order of priority: the NoC, the cores' result writes (round robin),
// the activation stream. A lost cycle stalls the stream (counted in
// `stall_cnt`). `done` pulses when all four cores have finished.
// The reset is also read by the `disable iff` of the embedded assertion; the
// resulting mixed sync/async-reset lint warning concerns only that
// simulation check, not the circuit, and is left as is.
module core_cluster
  import sevedo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  input  noc_req_t          s_req,
  output logic [BUS_W-1:0]  s_rdata,
  output logic              done,
  output logic [15:0]       stall_cnt
);
  // ---------------- decode ----------------
  region_e    rg;
  logic [1:0] core_sel;
  assign rg       = region_e'(s_req.addr[23:20]);
  assign core_sel = s_req.addr[19:18];

  logic     nb_iomem;
  assign nb_iomem = s_valid && rg == RG_IOMEM;

  // ---------------- command / sequencer ----------------
  logic [10:0] act_base;
  logic       streaming, cl_busy;
  logic [10:0] k, n_steps;
  logic [N_CORES-1:0] core_done_seen;
  logic [N_CORES-1:0] core_done;
  logic       go;

  cl_cmd_t    wcmd;
  assign wcmd = cl_cmd_t'(s_req.wdata[$bits(cl_cmd_t)-1:0]);
  assign go   = s_valid && s_req.we && rg == RG_CL_CMD && wcmd.go && !cl_busy;

  // ---------------- IOMEM port arbitration ----------------
  logic [N_CORES-1:0] wr_req, wr_gnt;
  logic [10:0]        wr_addr [N_CORES];
  logic [BUS_W-1:0]   wr_data [N_CORES];
  logic [1:0]         rr;            // round-robin pointer
  logic               any_wr;
  logic [1:0]         wsel;
  logic               step;

  always_comb begin
    any_wr = 1'b0;
    wsel   = rr;
    for (int i = 0; i < N_CORES; i++) begin
      if (!any_wr && wr_req[2'(rr + 2'(i))]) begin
        any_wr = 1'b1;
        wsel   = 2'(rr + 2'(i));
      end
    end
    wr_gnt = '0;
    if (!nb_iomem && any_wr) wr_gnt[wsel] = 1'b1;
    step = streaming && !nb_iomem && !any_wr;
  end

  logic              m_en, m_we;
  logic [10:0]       m_addr;
  logic [BUS_W-1:0]  m_wdata, m_rdata;
  always_comb begin
    m_en    = nb_iomem || any_wr || step;
    m_we    = nb_iomem ? s_req.we : any_wr;
    m_addr  = nb_iomem ? s_req.addr[10:0] : any_wr ? wr_addr[wsel] : act_base + k;
    m_wdata = nb_iomem ? s_req.wdata : wr_data[wsel];
  end

  sram_sp #(.WIDTH(BUS_W), .DEPTH(IOMEM_DEPTH)) u_iomem (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata),
    .wmask({BUS_W{1'b1}}), .rdata(m_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_base <= '0; streaming <= 1'b0; cl_busy <= 1'b0; k <= '0; n_steps <= '0;
      core_done_seen <= '0; done <= 1'b0; rr <= '0; stall_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (any_wr && !nb_iomem) rr <= wsel + 2'd1;
      if (go) begin
        act_base       <= wcmd.act_base;
        cl_busy        <= 1'b1;
        streaming      <= wcmd.rmc_en;
        k              <= '0;
        n_steps        <= {wcmd.n_bg, 5'd0};                 // n_bg * 32
        core_done_seen <= '0;
      end else begin
        if (step) begin
          k <= k + 11'd1;
          if (k + 11'd1 == n_steps) streaming <= 1'b0;
        end
        if (streaming && !step) stall_cnt <= stall_cnt + 16'd1;
        core_done_seen <= core_done_seen | core_done;
        if (cl_busy && (core_done_seen | core_done) == '1) begin
          cl_busy <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  // ---------------- NoC read return ----------------
  logic rd_iomem_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_iomem_q <= 1'b0;
    else        rd_iomem_q <= nb_iomem && !s_req.we;
  end
  assign s_rdata = rd_iomem_q ? m_rdata : BUS_W'(cl_busy);

  // ---------------- cores ----------------
  logic step_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) step_q <= 1'b0;
    else        step_q <= step;
  end

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    hetero_core u_core (
      .clk, .rst_n,
      .ld_we(s_valid && s_req.we && core_sel == 2'(c) && rg != RG_IOMEM && rg != RG_CL_CMD),
      .ld_region(rg), .ld_addr(s_req.addr[17:0]), .ld_data(s_req.wdata),
      .go, .rmc_en(wcmd.rmc_en), .lvc_en(wcmd.lvc_en), .n_bg(wcmd.n_bg),
      .step, .act_data(m_rdata),
      .busy(), .done(core_done[c]),
      .wr_req(wr_req[c]), .wr_addr(wr_addr[c]), .wr_data(wr_data[c]), .wr_gnt(wr_gnt[c]));
  end

  // step_q marks the cycle in which m_rdata holds a streamed activation word.
  // The cores time this themselves (one cycle after step); the assertion
  // checks that the IOMEM was not reused in between.
  assert property (@(posedge clk) disable iff (!rst_n) step_q |-> !$past(m_we));
endmodule

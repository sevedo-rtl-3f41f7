// tb_sevedo_top: the whole accelerator at its default size, end to end.
// A host model on external interface 0 fills the global memory with one
// layer tile per core (16 cores: shared INT4 activations per cluster, HGQ
// weights and scales, low-rank L2 data) and a descriptor program. The top
// controller copies everything into the clusters, starts the four clusters,
// waits for them and copies the 16 result tiles back to GMEM, which the host
// reads and compares with the real-valued layer model. External interface 1
// reads GMEM while the controller copies and a cluster's IOMEM while
// the layer runs. Counted mechanisms: NoC
// contention, IOMEM activation-stream stalls, contention of the cores'
// result writes, HGQ sub-groups with a non-zero exponent shift, and
// SVD-MP phase switches between high and low precision; each must occur.
module tb_sevedo_top;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  import tb_layer_pkg::*;
  localparam int NBG      = 2;
  localparam int DESC     = 40000;   // GMEM word address of the program
  localparam int RES      = 30000;   // results
  localparam int DATA     = 0;       // inputs
  logic clk = 0, rst_n = 0;
  logic ctrl_start, ctrl_busy, ctrl_done;
  logic [31:0] ctrl_desc_base;
  logic ext_valid [3], ext_gnt [3], ext_rvalid [3];
  noc_req_t ext_req [3];
  logic [255:0] ext_rdata [3];
  logic [15:0] stall_cnt [4];
  logic [3:0] cl_done;
  int checks = 0, failures = 0;

  sevedo_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int noc_conflicts = 0, wr_conflicts = 0, essf_shifts = 0, mode_switches = 0;
  always @(posedge clk) begin
    // two masters wanting the same slave in one cycle
    for (int i = 0; i < 4; i++)
      for (int j = i + 1; j < 4; j++)
        if (dut.m_valid[i] && dut.m_valid[j] &&
            dut.m_req[i].addr[31:28] == dut.m_req[j].addr[31:28]) noc_conflicts++;
    if ($countones(dut.g_cl[0].u_cl.wr_req) > 1) wr_conflicts++;
    if (dut.g_cl[0].u_cl.g_core[0].u_core.u_rmc.d1_valid &&
        dut.g_cl[0].u_cl.g_core[0].u_core.u_rmc.sg_last &&
        dut.g_cl[0].u_cl.g_core[0].u_core.u_rmc.essf[0] != 2'd0) essf_shifts++;
    if (dut.g_cl[0].u_cl.g_core[0].u_core.u_lvc.s1_v &&
        dut.g_cl[0].u_cl.g_core[0].u_core.u_lvc.s1_first) mode_switches++;
  end

  // ---------------- host port helpers (EXT I/F 0 and 1) ----------------
  task automatic ext_wr(input int p, input logic [31:0] a, input logic [255:0] d);
    @(negedge clk); ext_valid[p] = 1; ext_req[p].we = 1; ext_req[p].addr = a; ext_req[p].wdata = d;
    @(posedge clk); while (!ext_gnt[p]) @(posedge clk);
    @(negedge clk); ext_valid[p] = 0;
  endtask

  task automatic ext_rd(input int p, input logic [31:0] a, output logic [255:0] d);
    @(negedge clk); ext_valid[p] = 1; ext_req[p].we = 0; ext_req[p].addr = a;
    @(posedge clk); while (!ext_gnt[p]) @(posedge clk);
    @(negedge clk); ext_valid[p] = 0;
    while (!ext_rvalid[p]) @(negedge clk);
    d = ext_rdata[p];
  endtask

  function automatic logic [31:0] caddr(input int cl, input region_e rg, input int core, input int off);
    return {4'(cl + 1), 4'd0, rg, 2'(core), 18'(off)};
  endfunction

  logic [255:0] prog [$];
  function automatic void desc(input int op, input logic [31:0] src, input logic [31:0] dst,
                               input int len, input int mask);
    logic [255:0] d;
    d = '0;
    d[3:0] = 4'(op); d[35:4] = src; d[67:36] = dst; d[83:68] = 16'(len); d[87:84] = 4'(mask);
    prog.push_back(d);
  endfunction

  initial begin
    core_layer L [4][4];
    logic [255:0] act [4][];
    logic [255:0] d, outw [33];
    int gp;
    cl_cmd_t cmd;
    ctrl_start = 0; ctrl_desc_base = 0;
    for (int p = 0; p < 3; p++) begin ext_valid[p] = 0; ext_req[p] = '0; end
    for (int c = 0; c < 4; c++) begin
      gen_acts(NBG, act[c]);
      for (int k = 0; k < 4; k++) begin
        L[c][k] = new(NBG, 1000 + 40*k);
        L[c][k].compute(act[c]);
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // host: inputs into GMEM, program descriptors as it goes
    gp = DATA;
    for (int c = 0; c < 4; c++) begin
      foreach (act[c][k]) ext_wr(0, 32'(gp + k), act[c][k]);
      desc(1, 32'(gp), caddr(c, RG_IOMEM, 0, 0), act[c].size(), 0);
      gp += act[c].size();
      for (int k = 0; k < 4; k++) begin
        int i;
        i = 0;
        while (i < L[c][k].loads.size()) begin
          int j;
          j = i;
          while (j + 1 < L[c][k].loads.size() && L[c][k].loads[j+1].rg == L[c][k].loads[i].rg &&
                 L[c][k].loads[j+1].off == L[c][k].loads[j].off + 1) j++;
          for (int n = i; n <= j; n++) ext_wr(0, 32'(gp + n - i), L[c][k].loads[n].data);
          desc(1, 32'(gp), caddr(c, L[c][k].loads[i].rg, k, L[c][k].loads[i].off), j - i + 1, 0);
          gp += j - i + 1;
          i = j + 1;
        end
      end
      cmd = '0; cmd.go = 1; cmd.rmc_en = 1; cmd.lvc_en = 1; cmd.n_bg = 6'(NBG); cmd.act_base = 0;
      d = '0; d[$bits(cl_cmd_t)-1:0] = cmd;
      ext_wr(0, 32'(gp), d);
      desc(1, 32'(gp), caddr(c, RG_CL_CMD, 0, 0), 1, 0);
      gp += 1;
    end
    desc(2, 0, 0, 0, 4'hF);                                  // wait for all clusters
    for (int c = 0; c < 4; c++)
      for (int k = 0; k < 4; k++)
        desc(1, caddr(c, RG_IOMEM, 0, 1000 + 40*k), 32'(RES + 40*(4*c + k)), 33, 0);
    desc(0, 0, 0, 0, 0);
    foreach (prog[i]) ext_wr(0, 32'(DESC + i), prog[i]);
    $display("host: %0d input words, %0d descriptors", gp, prog.size());

    // run
    @(negedge clk); ctrl_start = 1; ctrl_desc_base = DESC;
    @(negedge clk); ctrl_start = 0;
    // external interface 1 reads cluster 3's IOMEM while it computes
    fork
      begin
        // GMEM reads compete with the controller's descriptor and data reads
        for (int i = 0; i < 16; i++) begin
          ext_rd(1, 32'(DATA + i), d);
          checks++; if (d != act[0][i]) failures++;
        end
        while (!(dut.g_cl[3].u_cl.streaming)) @(negedge clk);
        for (int i = 0; i < 8; i++) begin
          ext_rd(1, caddr(3, RG_IOMEM, 0, i), d);
          checks++; if (d != act[3][i]) failures++;
        end
      end
    join_none
    while (!ctrl_done) @(negedge clk);
    $display("layer done at %0t", $time);

    for (int c = 0; c < 4; c++)
      for (int k = 0; k < 4; k++) begin
        for (int j = 0; j < 33; j++) ext_rd(0, 32'(RES + 40*(4*c + k) + j), outw[j]);
        failures += L[c][k].check(outw, checks);
      end

    $display("mechanisms: noc_conflicts=%0d iomem_stalls=%0d/%0d/%0d/%0d result_write_conflicts=%0d essf_shifts=%0d precision_phase_starts=%0d",
             noc_conflicts, stall_cnt[0], stall_cnt[1], stall_cnt[2], stall_cnt[3],
             wr_conflicts, essf_shifts, mode_switches);
    checks++; if (noc_conflicts == 0) failures++;
    checks++; if (stall_cnt[3] == 0) failures++;
    checks++; if (wr_conflicts == 0) failures++;
    checks++; if (essf_shifts == 0) failures++;
    checks++; if (mode_switches < 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

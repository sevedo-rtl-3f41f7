// tb_core_cluster: a cluster of four heterogeneous cores driven through its
// NoC slave port. Activations (shared) go to the IOMEM, each core gets its
// own weights, scales, low-rank data and configuration; a cluster command
// starts all four. NoC reads of the IOMEM during the activation stream force
// stalls; the four cores' result writes contend for the IOMEM port. The
// results are read back over the NoC and compared with the layer model.
module tb_core_cluster;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  import tb_layer_pkg::*;
  localparam int NBG = 2;
  logic clk = 0, rst_n = 0;
  logic s_valid, done;
  noc_req_t s_req;
  logic [255:0] s_rdata;
  logic [15:0] stall_cnt;
  int checks = 0, failures = 0;

  core_cluster dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] caddr(input region_e rg, input int core, input int off);
    return {4'd1, 4'd0, rg, 2'(core), 18'(off)};
  endfunction

  task automatic wr(input logic [31:0] a, input logic [255:0] d);
    @(negedge clk); s_valid = 1; s_req.we = 1; s_req.addr = a; s_req.wdata = d;
    @(negedge clk); s_valid = 0; s_req.we = 0;
  endtask

  task automatic rd(input logic [31:0] a, output logic [255:0] d);
    @(negedge clk); s_valid = 1; s_req.we = 0; s_req.addr = a;
    @(negedge clk); s_valid = 0; d = s_rdata;
  endtask

  int done_cnt = 0;
  always @(posedge clk) if (done) done_cnt++;

  initial begin
    core_layer L [4];
    logic [255:0] act [];
    logic [255:0] d, outw [33];
    cl_cmd_t cmd;
    s_valid = 0; s_req = '0;
    gen_acts(NBG, act);
    for (int c = 0; c < 4; c++) begin
      L[c] = new(NBG, 1000 + 40*c);
      L[c].compute(act);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (act[k]) wr(caddr(RG_IOMEM, 0, k), act[k]);
    for (int c = 0; c < 4; c++)
      foreach (L[c].loads[i]) wr(caddr(L[c].loads[i].rg, c, L[c].loads[i].off), L[c].loads[i].data);
    cmd = '0; cmd.go = 1; cmd.rmc_en = 1; cmd.lvc_en = 1; cmd.n_bg = 6'(NBG); cmd.act_base = 0;
    d = '0; d[$bits(cl_cmd_t)-1:0] = cmd;
    wr(caddr(RG_CL_CMD, 0, 0), d);
    // read IOMEM while the activations stream: the stream must stall, data must be right
    for (int i = 0; i < 6; i++) begin
      rd(caddr(RG_IOMEM, 0, 5 + i), d);
      checks++; if (d != act[5 + i]) failures++;
    end
    // status reads report busy
    rd(caddr(RG_CL_CMD, 0, 0), d);
    checks++; if (d[0] !== 1'b1) failures++;
    // keep reading the IOMEM over the NoC while the cores write their results:
    // the NoC has priority and the core writes must wait, not get lost
    for (int i = 0; done_cnt == 0; i++) begin
      rd(caddr(RG_IOMEM, 0, i % act.size()), d);
      checks++; if (d != act[i % act.size()]) failures++;
    end
    checks++; if (stall_cnt == 0) begin failures++; $display("no stall seen"); end
    $display("cluster: %0d activation-stream stall cycles", stall_cnt);
    for (int c = 0; c < 4; c++) begin
      for (int j = 0; j < 33; j++) rd(caddr(RG_IOMEM, 0, 1000 + 40*c + j), outw[j]);
      failures += L[c].check(outw, checks);
    end
    checks++; if (done_cnt != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

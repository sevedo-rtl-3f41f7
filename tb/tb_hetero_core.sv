// tb_hetero_core: one heterogeneous core running a layer tile: the RMC
// (HGQ, 2 base groups) and the LVC (L2-like SVD-MP pass) in parallel, then
// the aggregation core writing residual + low-rank to the IOMEM port, with
// random stalls of the activation stream and of the write grant. The stream
// stalls are rare enough that the RMC finishes before the LVC, so the core
// must wait for the slower engine before aggregating. The 33
// written words are compared with the real-valued layer model.
module tb_hetero_core;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  import tb_layer_pkg::*;
  localparam int NBG = 2;
  logic clk = 0, rst_n = 0;
  logic ld_we;
  region_e ld_region;
  logic [17:0] ld_addr;
  logic [255:0] ld_data, act_data, wr_data;
  logic go, rmc_en, lvc_en, step, busy, done, wr_req, wr_gnt;
  logic [5:0] n_bg;
  logic [10:0] wr_addr;
  int checks = 0, failures = 0;
  logic [255:0] act [];
  logic [255:0] outw [33];
  int sidx, nwr;

  hetero_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (step) begin act_data <= act[sidx]; sidx <= sidx + 1; end
    if (wr_req && wr_gnt) begin
      if (wr_addr >= 11'd100 && wr_addr < 11'd133) outw[wr_addr - 11'd100] <= wr_data;
      else failures++;
      nwr <= nwr + 1;
    end
  end

  initial begin
    core_layer L;
    ld_we = 0; ld_region = RG_IOMEM; ld_addr = 0; ld_data = 0; act_data = 0;
    go = 0; rmc_en = 0; lvc_en = 0; step = 0; wr_gnt = 0; n_bg = 0; sidx = 0; nwr = 0;
    gen_acts(NBG, act);
    L = new(NBG, 100);
    L.compute(act);
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (L.loads[i]) begin
      @(negedge clk); ld_we = 1; ld_region = L.loads[i].rg; ld_addr = 18'(L.loads[i].off);
      ld_data = L.loads[i].data;
    end
    @(negedge clk); ld_we = 0;
    go = 1; rmc_en = 1; lvc_en = 1; n_bg = 6'(NBG);
    @(negedge clk); go = 0;
    for (int k = 0; k < NBG*32; k++) begin
      while ($urandom % 8 == 0) begin step = 0; @(negedge clk); end
      step = 1; @(negedge clk);
    end
    step = 0;
    while (!done) begin wr_gnt = 1'($urandom); @(negedge clk); end
    wr_gnt = 0;
    @(negedge clk);
    checks++; if (nwr != 33) begin failures++; $display("writes %0d", nwr); end
    checks++; if (busy) failures++;
    failures += L.check(outw, checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

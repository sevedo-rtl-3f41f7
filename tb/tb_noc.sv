// tb_noc: the NoC crossbar with four masters issuing random reads and writes
// to five memory slaves (behavioural one-cycle memories in this testbench)
// and to an unmapped target. Checks every read against a model, that each
// granted read returns exactly one cycle later, that no master starves, and
// that simultaneous transfers to different slaves are granted together.
module tb_noc;
  import sevedo_pkg::*;
  localparam int NM = 4, NS = 5;
  logic clk = 0, rst_n = 0;
  logic m_valid [NM], m_gnt [NM], m_rvalid [NM];
  noc_req_t m_req [NM];
  logic [255:0] m_rdata [NM];
  logic s_valid [NS];
  noc_req_t s_req [NS];
  logic [255:0] s_rdata [NS];
  int checks = 0, failures = 0;

  noc #(.NM(NM), .NS(NS)) dut (.*);
  always #5 clk = ~clk;

  // slave memories, 64 words each
  logic [255:0] smem [NS][64];
  always @(posedge clk)
    for (int j = 0; j < NS; j++)
      if (s_valid[j]) begin
        if (s_req[j].we) smem[j][s_req[j].addr[5:0]] <= s_req[j].wdata;
        else             s_rdata[j] <= smem[j][s_req[j].addr[5:0]];
      end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [255:0] model [NS][64];
  int grants [NM];
  int parallel = 0;
  always @(posedge clk) begin
    int n;
    n = 0;
    for (int j = 0; j < NS; j++) if (s_valid[j]) n++;
    if (n > 1) parallel++;
  end

  // each master: random traffic to its own address slice so the model is exact
  for (genvar i = 0; i < NM; i++) begin : g_m
    initial begin
      m_valid[i] = 0; m_req[i] = '0;
      @(posedge rst_n);
      for (int n = 0; n < 300; n++) begin
        int tgt;
        logic [5:0] a;
        // first 100 requests all go to slave 0 (heavy contention), then random
        tgt = (n < 100) ? 0 : int'($urandom % (NS + 1));   // NS = unmapped
        a   = {2'(i), 4'($urandom)};
        @(negedge clk);
        m_valid[i] = 1; m_req[i].addr = {4'(tgt), 22'd0, a};
        m_req[i].we = 1'($urandom); m_req[i].wdata = {8{$urandom}};
        begin
          int w;
          w = 0;
          @(posedge clk); while (!m_gnt[i]) begin w++; @(posedge clk); end
          // round robin: at most NM-1 other masters go first
          checks++; if (w > NM - 1) begin failures++; $display("m%0d waited %0d cycles", i, w); end
        end
        grants[i]++;
        if (m_req[i].we) begin
          if (tgt < NS) model[tgt][a] = m_req[i].wdata;
          @(negedge clk); m_valid[i] = 0;
        end else begin
          @(negedge clk); m_valid[i] = 0;
          checks++;
          if (!m_rvalid[i]) failures++;
          checks++;
          if (m_rdata[i] != ((tgt < NS) ? model[tgt][a] : '0)) begin
            failures++; $display("m%0d read t%0d a%0d mismatch", i, tgt, a);
          end
        end
      end
    end
  end

  initial begin
    for (int j = 0; j < NS; j++) for (int a = 0; a < 64; a++) begin smem[j][a] = '0; model[j][a] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (20000) @(posedge clk);
    for (int i = 0; i < NM; i++) begin checks++; if (grants[i] != 300) failures++; end
    checks++; if (parallel == 0) failures++;
    $display("parallel grant cycles: %0d", parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

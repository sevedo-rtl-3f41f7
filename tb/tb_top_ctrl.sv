// tb_top_ctrl: the top controller against a behavioural NoC memory with
// random grant delays. Runs a program of COPY, WAIT and END descriptors and
// checks the copied data, that WAIT holds until the selected clusters have
// reported done, the descriptor and word counters and the done pulse.
module tb_top_ctrl;
  import sevedo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, m_valid, m_gnt, m_rvalid;
  logic [31:0] desc_base;
  logic [3:0] cl_done;
  noc_req_t m_req;
  logic [255:0] m_rdata;
  logic [15:0] n_desc;
  logic [31:0] n_words;
  int checks = 0, failures = 0;

  top_ctrl dut (.*);
  always #5 clk = ~clk;

  logic [255:0] mem [1024];
  always @(posedge clk) begin
    m_rvalid <= m_valid && m_gnt && !m_req.we;
    if (m_valid && m_gnt) begin
      if (m_req.we) mem[m_req.addr[9:0]] <= m_req.wdata;
      else          m_rdata <= mem[m_req.addr[9:0]];
    end
  end
  always @(negedge clk) m_gnt = 1'($urandom);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [255:0] dsc(input int op, input int src, input int dst, input int len, input int mask);
    logic [255:0] d;
    d = '0; d[3:0] = 4'(op); d[35:4] = 32'(src); d[67:36] = 32'(dst); d[83:68] = 16'(len); d[87:84] = 4'(mask);
    return d;
  endfunction

  initial begin
    int t_wait_done, t_release;
    start = 0; desc_base = 0; cl_done = 0; m_rdata = 0;
    for (int i = 0; i < 1024; i++) mem[i] = {8{$urandom}};
    mem[900] = dsc(1, 100, 500, 20, 0);
    mem[901] = dsc(2, 0, 0, 0, 4'b0101);
    mem[902] = dsc(1, 200, 600, 5, 0);
    mem[903] = dsc(1, 0, 0, 0, 0);           // zero-length copy
    mem[904] = dsc(0, 0, 0, 0, 0);
    for (int i = 0; i < 20; i++) mem[500 + i] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; desc_base = 900;
    @(negedge clk); start = 0;
    // cluster 0 reports done early, cluster 2 much later
    repeat (50) @(negedge clk);
    cl_done = 4'b0001; @(negedge clk); cl_done = 0;
    repeat (300) @(negedge clk);
    checks++; if (n_words != 20) begin failures++; $display("words before wait %0d", n_words); end
    checks++; if (!busy) failures++;
    t_release = $time;
    cl_done = 4'b0100; @(negedge clk); cl_done = 0;
    while (!done) @(negedge clk);
    checks++; if (n_words != 25) failures++;
    checks++; if (n_desc != 5) failures++;
    for (int i = 0; i < 20; i++) begin checks++; if (mem[500 + i] != mem[100 + i]) failures++; end
    for (int i = 0; i < 5; i++)  begin checks++; if (mem[600 + i] != mem[200 + i]) failures++; end
    @(negedge clk);
    checks++; if (busy || done) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

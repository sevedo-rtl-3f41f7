// tb_rmc: end-to-end check of the Residual Matrix Core with HGQ.
// Loads random INT4 weights, random FP16 base scales and 2-bit exponent
// shifts into the Quant Cache, streams random INT4 activations with random
// gaps (stalls) and compares the 16x16 FP32 tile with a real-valued model of
// HGQ: sum over base groups of BSF * sum over sub-groups of
// (INT sub-group sum >> ESSF, with 3 fractional bits). A second run without
// gaps checks the rate: 32 steps per base group plus a fixed drain latency.
module tb_rmc;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  localparam int NBG = 3;
  logic clk = 0, rst_n = 0;
  logic start, step, busy, done;
  logic [5:0] n_bg;
  logic [255:0] act_data;
  logic wmem_we, qc_we, qc_half;
  logic [8:0] wmem_addr;
  logic [255:0] wmem_wdata, qc_wdata;
  logic [4:0] qc_addr;
  logic [3:0] rd_row;
  logic [31:0] rd_data [16];
  int checks = 0, failures = 0;

  logic [255:0] act [NBG*32];
  logic [255:0] wts [NBG*32];
  logic [15:0]  bsf [NBG][16];
  logic [1:0]   essf [NBG][16][4];
  real          ref_out [16][16];
  int           sidx;

  rmc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // activation word arrives the cycle after its step
  always @(posedge clk) if (step) begin act_data <= act[sidx]; sidx <= sidx + 1; end

  function automatic int a4(input logic [255:0] v, input int idx);
    logic signed [3:0] x; x = v[idx*4 +: 4]; return int'(x);
  endfunction

  task automatic run(input bit gaps, output int cycles);
    @(negedge clk); start = 1; n_bg = 6'(NBG);
    @(negedge clk); start = 0; sidx = 0;
    cycles = 1;
    for (int k = 0; k < NBG*32; k++) begin
      while (gaps && ($urandom % 4 == 0)) begin step = 0; @(negedge clk); cycles++; end
      step = 1; @(negedge clk); cycles++;
    end
    step = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_tile(input string tag);
    for (int r = 0; r < 16; r++) begin
      rd_row = 4'(r); #1;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (!near(f32_to_real(rd_data[c]), ref_out[r][c], 2e-6, 1e-6)) begin
          failures++;
          $display("%s r%0d c%0d got %g exp %g", tag, r, c, f32_to_real(rd_data[c]), ref_out[r][c]);
        end
      end
    end
  endtask

  initial begin
    int cyc;
    start = 0; step = 0; n_bg = 0; wmem_we = 0; qc_we = 0; qc_half = 0;
    wmem_addr = 0; wmem_wdata = 0; qc_wdata = 0; qc_addr = 0; rd_row = 0; act_data = 0; sidx = 0;
    for (int k = 0; k < NBG*32; k++) begin
      for (int j = 0; j < 8; j++) begin act[k][32*j +: 32] = $urandom; wts[k][32*j +: 32] = $urandom; end
      if (k < 8) act[k] = {64{4'h8}};          // -8 * w extremes in the first sub-group
    end
    for (int b = 0; b < NBG; b++)
      for (int r = 0; r < 16; r++) begin
        bsf[b][r] = rand_f16(8, 18, 1);
        for (int s = 0; s < 4; s++) essf[b][r][s] = 2'($urandom);
      end
    // reference
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        ref_out[r][c] = 0.0;
        for (int b = 0; b < NBG; b++) begin
          int itot;
          itot = 0;
          for (int s = 0; s < 4; s++) begin
            int ps;
            ps = 0;
            for (int k = b*32 + s*8; k < b*32 + s*8 + 8; k++)
              for (int i = 0; i < 4; i++) ps += a4(act[k], r*4 + i) * a4(wts[k], c*4 + i);
            itot += (ps * 8) >>> essf[b][r][s];
          end
          ref_out[r][c] += real'(itot) / 8.0 * f16_to_real(bsf[b][r]);
        end
      end
    repeat (3) @(posedge clk); rst_n = 1;
    // load weights and quant cache
    for (int k = 0; k < NBG*32; k++) begin
      @(negedge clk); wmem_we = 1; wmem_addr = 9'(k); wmem_wdata = wts[k];
    end
    @(negedge clk); wmem_we = 0;
    for (int b = 0; b < NBG; b++)
      for (int h = 0; h < 2; h++) begin
        @(negedge clk); qc_we = 1; qc_addr = 5'(b); qc_half = 1'(h);
        for (int rr = 0; rr < 8; rr++) begin
          int r; r = h*8 + rr;
          qc_wdata[32*rr +: 32] = {8'hA5, essf[b][r][3], essf[b][r][2], essf[b][r][1], essf[b][r][0], bsf[b][r]};
        end
      end
    @(negedge clk); qc_we = 0;
    run(1, cyc);
    check_tile("gaps");
    run(0, cyc);
    check_tile("nogap");
    checks++;
    // 1 start cycle + 32*NBG steps + drain of the last base group
    if (cyc < NBG*32 + 1 || cyc > NBG*32 + 22) begin
      failures++; $display("cycles %0d", cyc);
    end
    $display("RMC %0d base groups in %0d cycles", NBG, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

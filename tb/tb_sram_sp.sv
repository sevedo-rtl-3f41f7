// tb_sram_sp: self-checking test of the single-port memory: full and masked
// writes, one-cycle read latency, reads with `en` low keep the last data.
module tb_sram_sp;
  localparam int W = 64, D = 32;
  logic clk = 0, en, we;
  logic [4:0] addr;
  logic [W-1:0] wdata, wmask, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_sp #(.WIDTH(W), .DEPTH(D)) dut (.clk, .en, .we, .addr, .wdata, .wmask, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0; wmask = '1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 5'(i); wdata = {$urandom, $urandom}; wmask = '1;
      model[i] = wdata;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en = 1; addr = 5'($urandom); we = 1'($urandom);
      wdata = {$urandom, $urandom}; wmask = {$urandom, $urandom};
      if (we) model[addr] = (model[addr] & ~wmask) | (wdata & wmask);
      else begin
        logic [W-1:0] exp_v;
        exp_v = model[addr];
        @(posedge clk); #1;
        checks++;
        if (rdata !== exp_v) begin failures++; $display("read mismatch @%0d", addr); end
        // data must hold while en is low
        @(negedge clk); en = 0; we = 0;
        @(posedge clk); #1;
        checks++;
        if (rdata !== exp_v) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

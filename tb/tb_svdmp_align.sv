// tb_svdmp_align: checks exponent alignment of FP32 activations to INT16
// (sensitive channels) and INT8 against a real-valued reference, including
// values at the exponent maximum, far below it (flush to 0), zeros and
// values above it (saturation).
module tb_svdmp_align;
  import sevedo_pkg::*;
  import tb_ref_pkg::*;
  logic [31:0] x [4];
  logic [7:0]  emax;
  logic        hp;
  logic [15:0] q [4];
  int checks = 0, failures = 0;

  svdmp_align #(.N(4)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      emax = 8'(100 + $urandom % 40);
      hp   = 1'($urandom);
      for (int i = 0; i < 4; i++) begin
        int e;
        case ($urandom % 6)
          0: e = int'(emax);
          1: e = int'(emax) - 30;
          2: e = 0;
          3: e = int'(emax) + 1;
          default: e = int'(emax) - int'($urandom % 12);
        endcase
        x[i] = {1'($urandom), 8'(e), 23'($urandom)};
      end
      #1;
      for (int i = 0; i < 4; i++) begin
        int r;
        r = (x[i][30:23] > emax) ? (x[i][31] ? -(hp ? 32767 : 127) : (hp ? 32767 : 127))
                                 : align_ref(x[i], emax, hp);
        checks++;
        if (int'($signed(q[i])) != r) begin
          failures++;
          $display("x=%h emax=%0d hp=%0b got %0d exp %0d", x[i], emax, hp, $signed(q[i]), r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

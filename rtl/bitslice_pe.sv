// bitslice_pe: temporally reconfigurable bit-slice PE of the low-rank core.
//
// One output lane with fan-in 4. Each enabled cycle it multiplies four
// activation slices by four weight slices with 9-bit x 5-bit signed
// multipliers, shifts the sum left by the slice position and accumulates.
//   high precision (INT16 activation x INT8 weight), four cycles per group:
//     iter 0: IA[7:0]  x W[3:0]  << 0      iter 1: IA[7:0]  x W[7:4] << 4
//     iter 2: IA[15:8] x W[3:0]  << 8      iter 3: IA[15:8] x W[7:4] << 12
//   low precision (INT8 activation x INT4 weight), one cycle per group:
//     IA[7:0] x W[3:0] << 0
// The slice order and shift amounts are those printed in the paper's feeding
// diagram (Fig. 8). Every slice gets one extension bit in front, as the paper
// states; for the arithmetic to be exact this design fills it with the sign
// for MSB slices and low-precision operands and with 0 for LSB slices of the
// high-precision operands (the paper does not print the bit's value).
// `first` starts a new accumulation (the product replaces the accumulator).
// Timing: `acc` updates at the edge of each cycle with `en`.
module bitslice_pe
  import sevedo_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic                        first,
  input  logic                        hp,
  input  logic [1:0]                  iter,
  input  logic [HP_IA_W-1:0]          a [LVC_FANIN],   // INT16, or INT8 in bits 7:0
  input  logic [HP_W_W-1:0]           w [LVC_FANIN],   // INT8, or INT4 in bits 3:0
  output logic signed [LVC_ACC_W-1:0] acc
);
  logic signed [8:0]             a_sl [LVC_FANIN];
  logic signed [4:0]             w_sl [LVC_FANIN];
  logic signed [15:0]            dot;
  logic signed [LVC_ACC_W-1:0]   term;
  logic [3:0]                    sh;

  always_comb begin
    dot = '0;
    for (int i = 0; i < LVC_FANIN; i++) begin
      if (!hp) begin
        a_sl[i] = {a[i][7], a[i][7:0]};
        w_sl[i] = {w[i][3], w[i][3:0]};
      end else begin
        a_sl[i] = iter[1] ? {a[i][15], a[i][15:8]} : {1'b0, a[i][7:0]};
        w_sl[i] = iter[0] ? {w[i][7], w[i][7:4]}   : {1'b0, w[i][3:0]};
      end
      dot += 16'(a_sl[i] * w_sl[i]);
    end
    sh   = hp ? {iter, 2'b00} : 4'd0;
    term = LVC_ACC_W'(dot) <<< sh;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= first ? term : acc + term;
  end
endmodule

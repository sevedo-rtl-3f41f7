// rmc: Residual Matrix Core, the INT4 path of the SVD-decomposed layer.
//
// Computes a 16-token x 16-output-channel tile of X*R, where X is the INT4
// group-quantized activation and R the INT4 residual weight, over n_bg base
// groups of 128 input channels (K = 128*n_bg). Inside it:
//   * a 16x16 array of tensor_pe (fan-in 4): row r = token r, column c =
//     output channel c; one activation word (16 tokens x 4 channels x 4 bit)
//     and one weight word (16 columns x 4 channels x 4 bit) per step;
//   * the weight memory (16 KB, 512 x 256 bit, word k = channels 4k..4k+3);
//   * the Quant Cache (2 KB, 32 x 512 bit): word b holds, for each token r,
//     bits [32r+15:32r] = FP16 base scaling factor of base group b and
//     bits [32r+23:32r+16] = the four 2-bit exponent shifts of its
//     sub-groups (sub-group j at bits 2j+1:2j); bits [32r+31:32r+24] unused;
//   * the HGQ unit, converting each PE's INT22 base-group sum to FP32 times
//     the BSF, one tile row per cycle, and the FP32 accumulator.
// Sub-group INT accumulation with exponent shifts and one FP multiply per base
// group follow the paper (Fig. 4); the memory layouts, the row-serial FP
// drain and the step interface are this design's choices.
//
// Interface: pulse `start` with `n_bg` while idle (clears the accumulator).
// Each `step` pulse consumes one activation word, which must be on
// `act_data` in the cycle after the step (like a one-cycle memory read);
// 32*n_bg steps are needed, at most one per cycle, and gaps are allowed
// (that is how the cluster stalls the array). `done` pulses once the last base
// group has been drained into the accumulator. Memories are written through
// the `*_we` ports while the core is idle. Steady-state rate: 1024 INT4 MACs
// per cycle.
module rmc
  import sevedo_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // control
  input  logic                   start,
  input  logic [5:0]             n_bg,
  input  logic                   step,
  input  logic [BUS_W-1:0]       act_data,
  output logic                   busy,
  output logic                   done,
  // memory load
  input  logic                   wmem_we,
  input  logic [8:0]             wmem_addr,
  input  logic [RMC_WMEM_W-1:0]  wmem_wdata,
  input  logic                   qc_we,
  input  logic [4:0]             qc_addr,
  input  logic                   qc_half,      // 0: bits 255:0, 1: bits 511:256
  input  logic [BUS_W-1:0]       qc_wdata,
  // result
  input  logic [3:0]             rd_row,
  output logic [31:0]            rd_data [TPE_COLS]
);
  // ---------------- step counter ----------------
  logic [10:0] k, n_steps;          // step index, total steps
  logic        running;
  logic        d1_valid;            // data of the previous step is present now
  logic [10:0] k_d1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k        <= '0;
      n_steps  <= '0;
      running  <= 1'b0;
      d1_valid <= 1'b0;
      k_d1     <= '0;
    end else begin
      d1_valid <= running && step;
      if (running && step) k_d1 <= k;
      if (start && !busy) begin
        running <= 1'b1;
        k       <= '0;
        n_steps <= {n_bg, 5'd0};
      end else if (running && step) begin
        k <= k + 11'd1;
        if (k + 11'd1 == n_steps) running <= 1'b0;
      end
    end
  end

  // ---------------- memories ----------------
  logic [RMC_WMEM_W-1:0] w_word;
  logic [QC_W-1:0]       qc_word;
  logic                  rd_w;

  assign rd_w = running && step;

  sram_sp #(.WIDTH(RMC_WMEM_W), .DEPTH(RMC_WMEM_DEPTH)) u_wmem (
    .clk, .en(wmem_we || rd_w), .we(wmem_we && !busy),
    .addr(wmem_we ? wmem_addr : k[8:0]),
    .wdata(wmem_wdata), .wmask({RMC_WMEM_W{1'b1}}), .rdata(w_word));

  sram_sp #(.WIDTH(QC_W), .DEPTH(QC_DEPTH)) u_qc (
    .clk, .en(qc_we || (rd_w && k[4:0] == 5'd0)), .we(qc_we && !busy),
    .addr(qc_we ? qc_addr : k[9:5]),
    .wdata({qc_wdata, qc_wdata}),
    .wmask(qc_half ? {{BUS_W{1'b1}}, {BUS_W{1'b0}}} : {{BUS_W{1'b0}}, {BUS_W{1'b1}}}),
    .rdata(qc_word));

  // Quant Cache word of the current base group, held for its 32 steps
  logic [QC_W-1:0] qc_cur;
  logic [QC_W-1:0] qc_use;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                 qc_cur <= '0;
    else if (d1_valid && k_d1[4:0] == 5'd0)     qc_cur <= qc_word;
  end
  assign qc_use = (k_d1[4:0] == 5'd0) ? qc_word : qc_cur;

  // ---------------- PE array ----------------
  logic                     sg_last, bg_last;
  logic [1:0]               sg_idx;
  logic signed [3:0]        a_op [TPE_ROWS][TPE_FANIN];
  logic signed [3:0]        w_op [TPE_COLS][TPE_FANIN];
  logic [ESSF_W-1:0]        essf [TPE_ROWS];
  logic signed [IACC_W-1:0] hold [TPE_ROWS][TPE_COLS];
  logic                     hold_valid [TPE_ROWS][TPE_COLS];

  assign sg_last = (k_d1[2:0] == 3'd7);
  assign bg_last = (k_d1[4:0] == 5'd31);
  assign sg_idx  = k_d1[4:3];

  always_comb begin
    for (int r = 0; r < TPE_ROWS; r++) begin
      for (int i = 0; i < TPE_FANIN; i++) a_op[r][i] = act_data[(r*TPE_FANIN+i)*4 +: 4];
      essf[r] = qc_use[32*r + 16 + 2*sg_idx +: 2];
    end
    for (int c = 0; c < TPE_COLS; c++)
      for (int i = 0; i < TPE_FANIN; i++) w_op[c][i] = w_word[(c*TPE_FANIN+i)*4 +: 4];
  end

  for (genvar r = 0; r < TPE_ROWS; r++) begin : g_row
    for (genvar c = 0; c < TPE_COLS; c++) begin : g_col
      tensor_pe u_pe (
        .clk, .rst_n,
        .mac_en(d1_valid), .sg_last, .bg_last, .essf(essf[r]),
        .a(a_op[r]), .w(w_op[c]),
        .hold(hold[r][c]), .hold_valid(hold_valid[r][c]));
    end
  end

  // ---------------- base-group drain through the HGQ unit ----------------
  logic [15:0] bsf_hold [TPE_ROWS];
  logic [4:0]  drain;               // 16 = idle
  logic        last_bg_pending;     // the bg being drained is the final one
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain           <= 5'd16;
      last_bg_pending <= 1'b0;
      for (int r = 0; r < TPE_ROWS; r++) bsf_hold[r] <= '0;
    end else begin
      if (d1_valid && bg_last) begin
        for (int r = 0; r < TPE_ROWS; r++) bsf_hold[r] <= qc_use[32*r +: 16];
        last_bg_pending <= (k_d1 + 11'd1 == n_steps);
      end
      if (hold_valid[0][0])   drain <= 5'd0;
      else if (!drain[4])     drain <= drain + 5'd1;
    end
  end

  logic                     hq_valid, hq_out_valid;
  logic [3:0]               hq_out_row;
  logic [31:0]              hq_out [TPE_COLS];
  logic signed [IACC_W-1:0] hq_in [TPE_COLS];

  assign hq_valid = !drain[4];
  always_comb
    for (int c = 0; c < TPE_COLS; c++) hq_in[c] = hold[drain[3:0]][c];

  hgq_unit u_hgq (
    .clk, .rst_n,
    .in_valid(hq_valid), .in_row(drain[3:0]), .in_sum(hq_in), .bsf(bsf_hold[drain[3:0]]),
    .out_valid(hq_out_valid), .out_row(hq_out_row), .out(hq_out));

  fp_accum #(.ROWS(TPE_ROWS), .LANES(TPE_COLS)) u_acc (
    .clk, .rst_n,
    .clr(start && !busy), .add_en(hq_out_valid), .add_row(hq_out_row), .add_data(hq_out),
    .rd_row, .rd_data);

  // ---------------- status ----------------
  logic drain_busy;
  assign drain_busy = !drain[4] || hq_out_valid || d1_valid ||
                      (hold_valid[0][0]);
  assign busy = running || drain_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= hq_out_valid && hq_out_row == 4'd15 && last_bg_pending;
  end
endmodule

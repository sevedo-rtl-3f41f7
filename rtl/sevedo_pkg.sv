// sevedo_pkg: constants, types and arithmetic helpers shared by the SeVeDo RTL.
//
// Array sizes follow the published configuration: 4 clusters of 4
// heterogeneous cores, a 16x16 tensor PE array with fan-in 4 per core,
// 64 bit-slice multipliers in the low-rank core (16 lanes x fan-in 4), HGQ
// with 32-channel sub-groups inside 128-channel base groups, and the SVD-MP
// bit-slice schedule with shift amounts 0/4/8/12. Memory sizes are the
// published ones (IOMEM 64 KB, GMEM 1.5 MB, RMC WMEM 16 KB, LVC WMEM 1 KB,
// Quant Cache 2 KB).
//
// The floating-point helpers are this design's own: FP32 with truncation
// (round toward zero), denormals flushed to zero, no NaN/Inf handling and
// saturation to the largest finite value on overflow. They are pure
// combinational functions and synthesize to the usual
// align/add/normalize logic.
package sevedo_pkg;

  // ---------------- system organisation ----------------
  localparam int unsigned N_CLUSTERS = 4;
  localparam int unsigned N_CORES    = 4;       // cores per cluster
  localparam int unsigned BUS_W      = 256;     // NoC / IOMEM word width (bits)
  localparam int unsigned ADDR_W     = 32;

  // ---------------- residual matrix core (HGQ) ----------------
  localparam int unsigned TPE_ROWS   = 16;      // tokens
  localparam int unsigned TPE_COLS   = 16;      // output channels
  localparam int unsigned TPE_FANIN  = 4;       // INT4 products per PE per cycle
  localparam int unsigned SUBG       = 32;      // sub-group size (channels)
  localparam int unsigned BASEG      = 128;     // base-group size (channels)
  localparam int unsigned N_SUBG     = BASEG / SUBG;        // 4
  localparam int unsigned SG_CYC     = SUBG / TPE_FANIN;    // 8 cycles per sub-group
  localparam int unsigned PSUM_W     = 13;      // sub-group partial sum, INT13
  localparam int unsigned IACC_W     = 22;      // base-group INT accumulator, INT22
  localparam int unsigned ESSF_W     = 2;       // exponent shift 0..3 (E2)
  localparam int unsigned FRAC_W     = 3;       // fractional bits kept below the ESSF shift

  // ---------------- low-rank vector core (SVD-MP) ----------------
  localparam int unsigned LVC_LANES  = 16;      // output lanes (rank / output channels)
  localparam int unsigned LVC_FANIN  = 4;       // channels per lane per cycle
  localparam int unsigned LVC_ACC_W  = 40;      // per-phase integer accumulator
  localparam int unsigned IA_ENTRIES = 256;     // aligned activation entries in the IA buffer
  localparam int unsigned HP_IA_W    = 16;      // sensitive activations, INT16
  localparam int unsigned LP_IA_W    = 8;       // other activations, INT8
  localparam int unsigned HP_W_W     = 8;       // sensitive weights, INT8
  localparam int unsigned LP_W_W     = 4;       // other weights, INT4

  // ---------------- memories (bytes) ----------------
  localparam int unsigned IOMEM_BYTES    = 64 * 1024;
  localparam int unsigned GMEM_BYTES     = 1536 * 1024;
  localparam int unsigned RMC_WMEM_BYTES = 16 * 1024;
  localparam int unsigned LVC_WMEM_BYTES = 1024;
  localparam int unsigned QC_BYTES       = 2 * 1024;

  localparam int unsigned IOMEM_DEPTH    = IOMEM_BYTES * 8 / BUS_W;              // 2048
  localparam int unsigned GMEM_DEPTH     = GMEM_BYTES * 8 / BUS_W;               // 49152
  localparam int unsigned RMC_WMEM_W     = TPE_COLS * TPE_FANIN * 4;             // 256
  localparam int unsigned RMC_WMEM_DEPTH = RMC_WMEM_BYTES * 8 / RMC_WMEM_W;      // 512
  localparam int unsigned QC_W           = TPE_ROWS * 32;                        // 512
  localparam int unsigned QC_DEPTH       = QC_BYTES * 8 / QC_W;                  // 32
  localparam int unsigned LVC_WMEM_W     = LVC_LANES * LVC_FANIN * 8;            // 512
  localparam int unsigned LVC_WMEM_DEPTH = LVC_WMEM_BYTES * 8 / LVC_WMEM_W;      // 16

  // ---------------- NoC address map ----------------
  // addr[31:28] target: 0 = GMEM, 1..4 = cluster 0..3
  // inside a cluster: addr[23:20] region, addr[19:18] core, addr[17:0] word offset
  typedef enum logic [3:0] {
    RG_IOMEM    = 4'd0,
    RG_RMC_WMEM = 4'd1,
    RG_QC       = 4'd2,
    RG_LVC_WMEM = 4'd3,
    RG_LVC_IA   = 4'd4,
    RG_CORE_CFG = 4'd5,
    RG_LVC_EMAX = 4'd6,
    RG_CL_CMD   = 4'd7
  } region_e;

  // One NoC request (master -> interconnect).
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [BUS_W-1:0]  wdata;
  } noc_req_t;

  // Per-core configuration word (written to RG_CORE_CFG).
  typedef struct packed {
    logic [10:0] out_addr;     // IOMEM word address of the aggregated output
    logic        add_rmc;      // aggregator adds the RMC tile
    logic        add_lvc;      // aggregator adds the LVC result
    logic [4:0]  aggr_hp;      // lanes [0,aggr_hp) form the high-precision group of the output exp max
    logic        lvc_clear;    // clear the LVC accumulator before the pass
    logic [4:0]  lvc_ntok;     // tokens in this LVC pass (1..16)
    logic [8:0]  lvc_nch;      // channels per token (multiple of 4, n_tok*n_ch <= 256, <= 64)
    logic [8:0]  lvc_hpch;     // leading high-precision channels (multiple of 4)
    logic [15:0] lvc_ws_hp;    // FP16 weight scale of the INT8 weights
    logic [15:0] lvc_ws_lp;    // FP16 weight scale of the INT4 weights
  } core_cfg_t;

  // Cluster command word (written to RG_CL_CMD).
  typedef struct packed {
    logic        go;
    logic        rmc_en;
    logic        lvc_en;
    logic [5:0]  n_bg;         // base groups streamed through the RMC (1..32)
    logic [10:0] act_base;     // IOMEM word address of the first INT4 activation word
  } cl_cmd_t;

  // ---------------- floating point helpers ----------------

  // FP16 -> FP32, exact for normal numbers; denormals flush to zero.
  function automatic logic [31:0] fp16_to_fp32(input logic [15:0] h);
    logic [7:0] e;
    if (h[14:10] == 5'd0) return {h[15], 31'd0};
    e = 8'(h[14:10]) + 8'd112;
    return {h[15], e, h[9:0], 13'd0};
  endfunction

  // Signed integer (up to 64 bits) -> FP32, scaled by 2^scale, truncated.
  function automatic logic [31:0] int_to_fp32(input logic signed [63:0] v,
                                               input logic signed [9:0] scale);
    logic        s;
    logic [63:0] m;
    int          lz;
    int          e;
    s = v[63];
    m = s ? 64'(-v) : 64'(v);
    if (m == 64'd0) return 32'd0;
    lz = 0;
    for (int i = 63; i >= 0; i--) begin
      if (m[i]) begin lz = 63 - i; break; end
    end
    m = m << lz;                       // leading one at bit 63
    e = 127 + 63 - lz + int'(scale);
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFE, 23'h7FFFFF};
    return {s, 8'(e), m[62:40]};
  endfunction

  // FP32 multiply, truncated.
  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    int          e;
    logic [22:0] f;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin f = p[46:24]; e = e + 1; end
    else       f = p[45:23];
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFE, 23'h7FFFFF};
    return {s, 8'(e), f};
  endfunction

  // FP32 add, truncated.
  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [49:0] mx, my, r;
    int          d, lz, e;
    logic        sub;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d   = int'(x[30:23]) - int'(y[30:23]);
    mx  = {2'b00, 1'b1, x[22:0], 24'd0};
    my  = (d > 49) ? 50'd0 : ({2'b00, 1'b1, y[22:0], 24'd0} >> d);
    sub = x[31] ^ y[31];
    r   = sub ? (mx - my) : (mx + my);
    if (r == 50'd0) return 32'd0;
    lz = 0;
    for (int i = 49; i >= 0; i--) begin
      if (r[i]) begin lz = 49 - i; break; end
    end
    r = r << lz;                       // leading one at bit 49
    e = int'(x[30:23]) + 2 - lz;       // hidden bit of x sat at bit 47
    if (e <= 0)   return {x[31], 31'd0};
    if (e >= 255) return {x[31], 8'hFE, 23'h7FFFFF};
    return {x[31], 8'(e), r[48:26]};
  endfunction

  // Multiply an FP32 value by 2^k (exponent adjust).
  function automatic logic [31:0] fp32_scale2(input logic [31:0] a, input logic signed [9:0] k);
    int e;
    if (a[30:23] == 8'd0) return 32'd0;
    e = int'(a[30:23]) + int'(k);
    if (e <= 0)   return {a[31], 31'd0};
    if (e >= 255) return {a[31], 8'hFE, 23'h7FFFFF};
    return {a[31], 8'(e), a[22:0]};
  endfunction

  // Largest biased exponent among the 16 FP32 lanes selected by `mask`.
  function automatic logic [7:0] exp_max16(input logic [31:0] v [16], input logic [15:0] mask);
    logic [7:0] m;
    m = '0;
    for (int i = 0; i < 16; i++)
      if (mask[i] && v[i][30:23] > m) m = v[i][30:23];
    return m;
  endfunction

endpackage

// top_ctrl: top controller, a descriptor-driven sequencer and DMA engine.
//
// After `start` it fetches 256-bit descriptors from `desc_base` onwards over
// its NoC master port and executes them in order:
//   op 0 END  : pulse `done` and stop;
//   op 1 COPY : copy `len` words from `src` to `dst` (any NoC addresses, so
//               GMEM -> IOMEM / weight memories / command registers and
//               IOMEM -> GMEM), one read then one write per word;
//   op 2 WAIT : wait until every cluster in `mask` has reported done since
//               the last WAIT on it, then clear those flags.
// Descriptor layout: [3:0] op, [35:4] src, [67:36] dst, [83:68] len,
// [87:84] mask. Launching a layer is a COPY of a cl_cmd_t word into a
// cluster's command register. The paper names the top controller without
// describing it; all of this is this design's choice.
module top_ctrl
  import sevedo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] desc_base,
  input  logic [N_CLUSTERS-1:0] cl_done,
  output logic              busy,
  output logic              done,
  // NoC master
  output logic              m_valid,
  output noc_req_t          m_req,
  input  logic              m_gnt,
  input  logic              m_rvalid,
  input  logic [BUS_W-1:0]  m_rdata,
  output logic [15:0]       n_desc,
  output logic [31:0]       n_words
);
  typedef enum logic [2:0] {T_IDLE, T_FETCH, T_FWAIT, T_EXEC, T_RD, T_RWAIT, T_WR, T_WAIT} tstate_e;
  tstate_e st;

  logic [ADDR_W-1:0] pc, src, dst;
  logic [15:0]       cnt;
  logic [3:0]        op;
  logic [N_CLUSTERS-1:0] flags, mask;
  logic [BUS_W-1:0]  buf_q;

  always_comb begin
    m_valid       = (st == T_FETCH) || (st == T_RD) || (st == T_WR);
    m_req.we      = (st == T_WR);
    m_req.addr    = (st == T_FETCH) ? pc : (st == T_RD) ? src : dst;
    m_req.wdata   = buf_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; pc <= '0; src <= '0; dst <= '0; cnt <= '0; op <= '0;
      flags <= '0; mask <= '0; buf_q <= '0; done <= 1'b0; n_desc <= '0; n_words <= '0;
    end else begin
      done  <= 1'b0;
      flags <= flags | cl_done;
      case (st)
        T_IDLE:  if (start) begin pc <= desc_base; st <= T_FETCH; n_desc <= '0; n_words <= '0; end
        T_FETCH: if (m_gnt) st <= T_FWAIT;
        T_FWAIT: if (m_rvalid) begin
          op   <= m_rdata[3:0];
          src  <= m_rdata[35:4];
          dst  <= m_rdata[67:36];
          cnt  <= m_rdata[83:68];
          mask <= m_rdata[87:84];
          pc   <= pc + 1;
          n_desc <= n_desc + 16'd1;
          st   <= T_EXEC;
        end
        T_EXEC: begin
          case (op)
            4'd1:    st <= (cnt == 16'd0) ? T_FETCH : T_RD;
            4'd2:    st <= T_WAIT;
            default: begin st <= T_IDLE; done <= 1'b1; end
          endcase
        end
        T_RD:    if (m_gnt) st <= T_RWAIT;
        T_RWAIT: if (m_rvalid) begin buf_q <= m_rdata; st <= T_WR; end
        T_WR:    if (m_gnt) begin
          src <= src + 1;
          dst <= dst + 1;
          cnt <= cnt - 16'd1;
          n_words <= n_words + 32'd1;
          st  <= (cnt == 16'd1) ? T_FETCH : T_RD;
        end
        T_WAIT:  if (((flags | cl_done) & mask) == mask) begin
          flags <= (flags | cl_done) & ~mask;
          st    <= T_FETCH;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  assign busy = (st != T_IDLE);
endmodule

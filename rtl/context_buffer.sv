// context_buffer: the host-visible context buffers of one NMA.
//
// The paper maps 512 context buffers (64 per NMA) into the host address
// space; they hold the offload context, the query and output scratchpads
// and the doorbell. This block decodes host accesses to one NMA's 64
// buffers. Layout of context buffer p (4 KB each, own choice):
//   0x000-0x7FF  query scratchpad of engine p (element j at 2*j, bits 15:0)
//   0x800-0x8FF  output scratchpad of engine p (entry k at 0x800 + 8*k)
//   0xC00 B  0xC08 VD  0xC10 N  0xC18 number of queries  0xC20 doorbell
// The configuration registers are shared by the NMA and appear in every
// buffer. Writing a non-zero value to the doorbell starts an offload; the
// NMA writes it back to zero when the offload is complete, which is what a
// host blocked in umwait() on that cache line observes.
//
// Own choices: the coherent CXL cache line that carries the doorbell is
// reduced to a register; each host request is one 64-bit word, answered
// one cycle later (host_rsp.valid) for reads.
module context_buffer
  import iks_pkg::*;
#(
  parameter int unsigned NPE    = N_PE,
  parameter int unsigned QDEPTH = MAX_VD,
  parameter int unsigned K      = TOPK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  host_req_t                 host_req,
  output host_rsp_t                 host_rsp,
  // query scratchpads
  output logic [NPE-1:0]            qh_en,
  output logic                      qh_we,
  output logic [$clog2(QDEPTH)-1:0] qh_addr,
  output fp16_t                     qh_wdata,
  input  fp16_t [NPE-1:0]           qh_rdata,
  // output scratchpads
  output logic [NPE-1:0]            oh_en,
  output logic [$clog2(K)-1:0]      oh_idx,
  input  logic [NPE-1:0][63:0]      oh_rdata,
  // offload context and doorbell
  output offload_ctx_t              ctx,
  output logic                      doorbell,
  input  logic                      done
);

  typedef enum logic [1:0] {SEL_REG, SEL_QSP, SEL_OSP} sel_t;

  logic [5:0]  cb;
  logic [11:0] off;
  logic        pe_ok;
  logic        is_qsp, is_osp, is_reg;
  sel_t        sel_q;
  logic [5:0]  cb_q;
  logic [63:0] reg_rdata;
  logic        rd_q;

  always_comb begin
    cb     = host_req.addr[17:12];
    off    = host_req.addr[11:0];
    pe_ok  = 32'(cb) < NPE;
    is_qsp = off < CB_OSP_BASE;
    is_osp = (off >= CB_OSP_BASE) && (off < CB_REG_BASE);
    is_reg = off >= CB_REG_BASE;

    qh_we    = host_req.we;
    qh_addr  = off[$clog2(QDEPTH):1];
    qh_wdata = host_req.wdata[15:0];
    oh_idx   = off[$clog2(K)+2:3];
    qh_en    = '0;
    oh_en    = '0;
    if (host_req.valid && pe_ok) begin
      qh_en[cb[$clog2(NPE > 1 ? NPE : 2)-1:0]] = is_qsp;
      oh_en[cb[$clog2(NPE > 1 ? NPE : 2)-1:0]] = is_osp && !host_req.we;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctx       <= '0;
      doorbell  <= 1'b0;
      reg_rdata <= '0;
      rd_q      <= 1'b0;
      sel_q     <= SEL_REG;
      cb_q      <= '0;
    end else begin
      rd_q  <= host_req.valid && !host_req.we;
      sel_q <= is_qsp ? SEL_QSP : (is_osp ? SEL_OSP : SEL_REG);
      cb_q  <= cb;
      if (host_req.valid && host_req.we && is_reg) begin
        unique case (off)
          REG_BASE_ADDR: ctx.base <= host_req.wdata[ADDR_W-1:0];
          REG_VD:        ctx.vd   <= host_req.wdata[VD_W-1:0];
          REG_NVEC:      ctx.nvec <= host_req.wdata[NVEC_W-1:0];
          REG_NQ:        ctx.nq   <= host_req.wdata[NQ_W-1:0];
          REG_DOORBELL:  doorbell <= (host_req.wdata != '0);
          default: ;
        endcase
      end
      if (done) doorbell <= 1'b0;
      if (host_req.valid && !host_req.we && is_reg) begin
        unique case (off)
          REG_BASE_ADDR: reg_rdata <= 64'(ctx.base);
          REG_VD:        reg_rdata <= 64'(ctx.vd);
          REG_NVEC:      reg_rdata <= 64'(ctx.nvec);
          REG_NQ:        reg_rdata <= 64'(ctx.nq);
          REG_DOORBELL:  reg_rdata <= 64'(doorbell);
          default:       reg_rdata <= '0;
        endcase
      end
    end
  end

  always_comb begin
    host_rsp.valid = rd_q;
    host_rsp.rdata = '0;
    if (32'(cb_q) < NPE) begin
      unique case (sel_q)
        SEL_QSP: host_rsp.rdata = 64'(qh_rdata[cb_q[$clog2(NPE > 1 ? NPE : 2)-1:0]]);
        SEL_OSP: host_rsp.rdata = oh_rdata[cb_q[$clog2(NPE > 1 ? NPE : 2)-1:0]];
        default: host_rsp.rdata = reg_rdata;
      endcase
    end else if (sel_q == SEL_REG) begin
      host_rsp.rdata = reg_rdata;
    end
  end

endmodule

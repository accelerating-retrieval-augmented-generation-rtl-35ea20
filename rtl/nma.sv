// nma: near-memory accelerator placed beside one LPDDR5X package.
//
// Exact nearest-neighbour search of up to 64 query vectors at once over
// the embedding vectors stored in the local package. The host writes the
// query vectors and the offload context into the context buffers and rings
// the doorbell; the control unit then reads the embedding vectors row by
// row (68 FP16 elements = 136 bytes per row, block layout of the paper),
// the broadcast network hands every row to all active processing engines,
// each engine accumulates 68 dot products against its query vector and
// keeps its best K = 32 scores with their DRAM addresses. At the end the
// lists are copied to the output scratchpads and the doorbell is written
// back.
//
// Structure (paper's NMA figure): context buffers, control unit, broadcast
// network-on-chip, NPE processing engines. The LPDDR5X memory controllers
// and PHYs and the x2 PCIe uplink controller are not part of this module:
// their place is taken by a read-request/response port (mem_*) and a
// word-wide host port (host_req/host_rsp).
//
// Timing at full memory rate: one row per cycle; an offload over N vectors
// of dimension VD takes about ceil(N/68)*VD cycles plus the read-out of the
// last block (68 cycles) and a few cycles of control.
module nma
  import iks_pkg::*;
#(
  parameter int unsigned NPE          = N_PE,
  parameter int unsigned NLANES       = LANES,
  parameter int unsigned QDEPTH       = MAX_VD,
  parameter int unsigned K            = TOPK,
  parameter int unsigned MAX_OUT      = 32,
  parameter bit          KEEP_LARGEST = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host port (through PCIe uplink and CXL controller)
  input  host_req_t          host_req,
  output host_rsp_t          host_rsp,
  output logic               doorbell,
  // memory controller port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output addr_t              mem_req_addr,
  input  logic               mem_rsp_valid,
  output logic               mem_rsp_ready,
  input  fp16_t [NLANES-1:0] mem_rsp_data
);

  offload_ctx_t              ctx;
  logic                      done;
  logic [NPE-1:0]            qh_en;
  logic                      qh_we;
  logic [$clog2(QDEPTH)-1:0] qh_addr;
  fp16_t                     qh_wdata;
  fp16_t [NPE-1:0]           qh_rdata;
  logic [NPE-1:0]            oh_en;
  logic [$clog2(K)-1:0]      oh_idx;
  logic [NPE-1:0][63:0]      oh_rdata;

  beat_tag_t                 tag_head;
  logic                      tag_empty;
  logic                      tag_pop;
  logic [NPE-1:0]            pe_active;
  logic                      topk_clear;
  logic                      ospad_load;
  logic [NPE-1:0]            pe_busy;
  logic                      noc_busy;
  logic                      noc_stall;
  logic                      running;

  logic [NPE-1:0]            pe_valid;
  logic [NPE-1:0]            pe_ready;
  fp16_t [NLANES-1:0]        b_data;
  beat_tag_t                 b_tag;
  logic [$clog2(QDEPTH)-1:0] qv_raddr;
  logic [NPE-1:0]            sc_inserted;
  logic [NPE-1:0]            sc_ignored;

  context_buffer #(.NPE(NPE), .QDEPTH(QDEPTH), .K(K)) u_cb (
    .clk      (clk),
    .rst_n    (rst_n),
    .host_req (host_req),
    .host_rsp (host_rsp),
    .qh_en    (qh_en),
    .qh_we    (qh_we),
    .qh_addr  (qh_addr),
    .qh_wdata (qh_wdata),
    .qh_rdata (qh_rdata),
    .oh_en    (oh_en),
    .oh_idx   (oh_idx),
    .oh_rdata (oh_rdata),
    .ctx      (ctx),
    .doorbell (doorbell),
    .done     (done)
  );

  nma_control_unit #(.NPE(NPE), .NLANES(NLANES), .MAX_OUT(MAX_OUT)) u_ctrl (
    .clk           (clk),
    .rst_n         (rst_n),
    .ctx           (ctx),
    .doorbell      (doorbell),
    .done          (done),
    .mem_req_valid (mem_req_valid),
    .mem_req_ready (mem_req_ready),
    .mem_req_addr  (mem_req_addr),
    .tag_head      (tag_head),
    .tag_pop       (tag_pop),
    .tag_empty     (tag_empty),
    .pe_active     (pe_active),
    .topk_clear    (topk_clear),
    .ospad_load    (ospad_load),
    .pes_busy      (|pe_busy),
    .noc_busy      (noc_busy),
    .running       (running)
  );

  // A returning beat always has its tag queued: reads return in order.
  logic noc_in_ready;
  always_comb begin
    mem_rsp_ready = noc_in_ready;
    tag_pop       = mem_rsp_valid && noc_in_ready;
  end

  broadcast_noc #(.NPE(NPE), .NLANES(NLANES), .QDEPTH(QDEPTH)) u_noc (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (mem_rsp_valid),
    .in_ready  (noc_in_ready),
    .in_data   (mem_rsp_data),
    .in_tag    (tag_head),
    .pe_active (pe_active),
    .pe_valid  (pe_valid),
    .pe_ready  (pe_ready),
    .out_data  (b_data),
    .out_tag   (b_tag),
    .qv_raddr  (qv_raddr),
    .busy      (noc_busy),
    .stall     (noc_stall)
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    processing_engine #(
      .NLANES(NLANES), .QDEPTH(QDEPTH), .K(K), .KEEP_LARGEST(KEEP_LARGEST)
    ) u_pe (
      .clk         (clk),
      .rst_n       (rst_n),
      .qh_en       (qh_en[p]),
      .qh_we       (qh_we),
      .qh_addr     (qh_addr),
      .qh_wdata    (qh_wdata),
      .qh_rdata    (qh_rdata[p]),
      .oh_en       (oh_en[p]),
      .oh_idx      (oh_idx),
      .oh_rdata    (oh_rdata[p]),
      .beat_valid  (pe_valid[p]),
      .beat_ready  (pe_ready[p]),
      .beat_data   (b_data),
      .beat_tag    (b_tag),
      .qv_raddr    (qv_raddr),
      .topk_clear  (topk_clear),
      .ospad_load  (ospad_load),
      .busy        (pe_busy[p]),
      .sc_inserted (sc_inserted[p]),
      .sc_ignored  (sc_ignored[p])
    );
  end

  // Checks start one cycle after reset is released.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end

  a_beat_has_tag: assert property (@(posedge clk)
    chk_en |-> !(mem_rsp_valid && tag_empty))
    else $error("nma: DRAM beat returned without an outstanding read");

endmodule

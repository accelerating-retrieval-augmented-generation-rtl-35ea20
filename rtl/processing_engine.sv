// processing_engine: similarity search of one query vector against the
// embedding vectors streamed from DRAM.
//
// Holds, as in the paper's NMA figure, a query scratchpad, a dot-product
// unit (68 MAC units), a top-K unit and an output scratchpad. All engines
// of an NMA see the same DRAM beats from the broadcast network; each one
// multiplies them by its own query vector. The broadcast network gives the
// dimension of the next beat (qv_raddr) one cycle ahead so the query
// scratchpad's synchronous read lines up with the beat.
//
// Interface: host port into the query scratchpad (element granularity),
// read port of the output scratchpad, beat valid/ready input, control
// inputs topk_clear (start of offload) and ospad_load (end of offload),
// busy while scores are still pending or streaming into the top-K unit.
// sc_inserted/sc_ignored report top-K decisions (one pulse per score).
module processing_engine
  import iks_pkg::*;
#(
  parameter int unsigned NLANES       = LANES,
  parameter int unsigned QDEPTH       = MAX_VD,
  parameter int unsigned K            = TOPK,
  parameter bit          KEEP_LARGEST = 1'b1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host access to the query scratchpad
  input  logic                      qh_en,
  input  logic                      qh_we,
  input  logic [$clog2(QDEPTH)-1:0] qh_addr,
  input  fp16_t                     qh_wdata,
  output fp16_t                     qh_rdata,
  // host access to the output scratchpad
  input  logic                      oh_en,
  input  logic [$clog2(K)-1:0]      oh_idx,
  output logic [63:0]               oh_rdata,
  // broadcast DRAM beats
  input  logic                      beat_valid,
  output logic                      beat_ready,
  input  fp16_t [NLANES-1:0]        beat_data,
  input  beat_tag_t                 beat_tag,
  input  logic [$clog2(QDEPTH)-1:0] qv_raddr,
  // control
  input  logic                      topk_clear,
  input  logic                      ospad_load,
  output logic                      busy,
  output logic                      sc_inserted,
  output logic                      sc_ignored
);

  fp16_t               qv;
  logic                sc_valid;
  fp16_t               sc_score;
  addr_t               sc_addr;
  topk_entry_t [K-1:0] list;

  query_scratchpad #(.DEPTH(QDEPTH)) u_qsp (
    .clk      (clk),
    .h_en     (qh_en),
    .h_we     (qh_we),
    .h_addr   (qh_addr),
    .h_wdata  (qh_wdata),
    .h_rdata  (qh_rdata),
    .pe_addr  (qv_raddr),
    .pe_rdata (qv)
  );

  dot_product_unit #(.NLANES(NLANES)) u_dpu (
    .clk        (clk),
    .rst_n      (rst_n),
    .beat_valid (beat_valid),
    .beat_ready (beat_ready),
    .beat_data  (beat_data),
    .beat_tag   (beat_tag),
    .qv         (qv),
    .sc_valid   (sc_valid),
    .sc_score   (sc_score),
    .sc_addr    (sc_addr),
    .busy       (busy)
  );

  topk_unit #(.K(K), .KEEP_LARGEST(KEEP_LARGEST)) u_topk (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (topk_clear),
    .in_valid (sc_valid),
    .in_score (sc_score),
    .in_addr  (sc_addr),
    .list     (list),
    .inserted (sc_inserted),
    .ignored  (sc_ignored)
  );

  output_scratchpad #(.K(K)) u_osp (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (ospad_load),
    .list    (list),
    .rd_en   (oh_en),
    .rd_idx  (oh_idx),
    .rd_data (oh_rdata)
  );

endmodule

// dot_product_unit: 68 MAC units sharing one query element, plus the
// score-register read-out towards the top-K unit.
//
// Every accepted DRAM beat carries dimension j of 68 embedding vectors
// (EV[i..i+67][j]); all 68 MAC units multiply them by the same query
// element QV[PE][j]. After the beat with j = VD-1 (tag.last) the 68 sums
// are loaded into the score registers in the next cycle, and in the 68
// cycles after that the score registers are streamed out one per cycle
// through the SEL multiplexer, each with the DRAM address of its embedding
// vector. The MAC registers meanwhile work on the next block, so for
// VD >= 68 the read-out is fully hidden, as the paper states.
//
// Own choice: when VD < 68 the read-out would not finish before the next
// block's scores arrive. The unit then holds back (beat_ready = 0) the last
// beat of the next block until the score registers may be overwritten;
// this is counted as a stall by the testbenches.
//
// Interface: valid/ready beat input (data + beat_tag_t) with the matching
// query element qv presented in the same cycle; score output stream
// sc_valid/sc_score/sc_addr has no back-pressure (the top-K unit takes one
// entry per cycle). sc_valid is low for lanes past the last real vector
// (tag.nvalid). busy is high while scores are pending or streaming.
module dot_product_unit
  import iks_pkg::*;
#(
  parameter int unsigned NLANES = LANES
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   beat_valid,
  output logic                   beat_ready,
  input  fp16_t [NLANES-1:0]     beat_data,
  input  beat_tag_t              beat_tag,
  input  fp16_t                  qv,
  output logic                   sc_valid,
  output fp16_t                  sc_score,
  output addr_t                  sc_addr,
  output logic                   busy
);

  localparam int unsigned IDX_W = $clog2(NLANES);

  logic              accept;
  logic              load_pending;
  addr_t             pend_base, strm_base;
  logic [6:0]        pend_nvalid, strm_nvalid;
  logic              streaming;
  logic [IDX_W-1:0]  sidx;
  fp16_t [NLANES-1:0] scores;

  // A last beat may only be taken if its score-register write (one cycle
  // later) does not overtake the read-out of the previous block.
  always_comb begin
    beat_ready = !beat_tag.last ||
                 (!load_pending && (!streaming || 32'(sidx) >= NLANES - 2));
    accept     = beat_valid && beat_ready;
  end

  mac_array #(.NLANES(NLANES)) u_macs (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (accept),
    .first    (beat_tag.dim == '0),
    .qv       (qv),
    .ev       (beat_data),
    .score_we (load_pending),
    .mac_q    (),
    .score    (scores)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load_pending <= 1'b0;
      pend_base    <= '0;
      pend_nvalid  <= '0;
      streaming    <= 1'b0;
      sidx         <= '0;
      strm_base    <= '0;
      strm_nvalid  <= '0;
    end else begin
      load_pending <= accept && beat_tag.last;
      if (accept && beat_tag.last) begin
        pend_base   <= beat_tag.blk_base;
        pend_nvalid <= beat_tag.nvalid;
      end
      if (load_pending) begin
        streaming   <= 1'b1;
        sidx        <= '0;
        strm_base   <= pend_base;
        strm_nvalid <= pend_nvalid;
      end else if (streaming) begin
        if (32'(sidx) == NLANES - 1) streaming <= 1'b0;
        else                         sidx      <= sidx + 1'b1;
      end
    end
  end

  always_comb begin
    sc_valid = streaming && (7'(sidx) < strm_nvalid);
    sc_score = scores[sidx];
    sc_addr  = strm_base + ADDR_W'(2 * 32'(sidx));
    busy     = load_pending || streaming;
  end

endmodule

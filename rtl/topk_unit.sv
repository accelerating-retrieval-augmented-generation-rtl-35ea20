// topk_unit: ordered list of the K best similarity scores seen so far,
// each with the DRAM address of its embedding vector.
//
// The list is kept sorted, best entry at index 0, worst kept entry (the
// "head" the paper compares against) at index K-1. Every incoming score is
// compared with all entries in parallel (shift-and-compare unit): entries
// that are at least as good stay where they are, the new score takes the
// first slot whose entry it beats, and everything below moves down by one,
// dropping the old worst entry. A score that does not beat the head of a
// full list leaves the list unchanged (ignored). Ties keep the earlier
// score ahead. One score is taken per cycle, which matches the one-score-
// per-cycle read-out of the dot-product unit.
//
// Ordering: the paper's retrieval keeps the documents of highest inner
// product, but its description of this unit says an incoming score that
// is larger than the head is ignored. KEEP_LARGEST = 1 (default) keeps the
// largest scores, following the retrieval definition; KEEP_LARGEST = 0
// keeps the smallest, following the literal sentence.
//
// Interface: clear empties the list (start of an offload). in_valid with
// in_score/in_addr offers one score; list is the current list (registered).
// inserted/ignored pulse for a score that entered / did not enter.
module topk_unit
  import iks_pkg::*;
#(
  parameter int unsigned K            = TOPK,
  parameter bit          KEEP_LARGEST = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  in_valid,
  input  fp16_t                 in_score,
  input  addr_t                 in_addr,
  output topk_entry_t [K-1:0]   list,
  output logic                  inserted,
  output logic                  ignored
);

  logic [K-1:0]        keep;
  topk_entry_t [K-1:0] nxt;
  topk_entry_t         ent;

  function automatic logic better(fp16_t a, fp16_t b);
    return KEEP_LARGEST ? (fp16_key(a) > fp16_key(b)) : (fp16_key(a) < fp16_key(b));
  endfunction

  always_comb begin
    ent = '{valid: 1'b1, score: in_score, addr: in_addr};
    for (int i = 0; i < K; i++)
      keep[i] = list[i].valid && !better(in_score, list[i].score);
    for (int i = 0; i < K; i++) begin
      if (keep[i])                nxt[i] = list[i];
      else if (i == 0)            nxt[i] = ent;
      else if (keep[i-1])         nxt[i] = ent;
      else                        nxt[i] = list[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      list     <= '0;
      inserted <= 1'b0;
      ignored  <= 1'b0;
    end else begin
      inserted <= 1'b0;
      ignored  <= 1'b0;
      if (clear) begin
        list <= '0;
      end else if (in_valid) begin
        list     <= nxt;
        inserted <= !keep[K-1];
        ignored  <= keep[K-1];
      end
    end
  end

endmodule

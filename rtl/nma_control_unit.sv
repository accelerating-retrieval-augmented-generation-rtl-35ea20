// nma_control_unit: central control of one near-memory accelerator.
//
// Offload sequence (steps of the paper's CPU-IKS transaction figure):
//  IDLE   watch the doorbell; when the host has rung it (step 4), copy the
//         offload context (B, VD, N, number of queries) and activate one
//         processing engine per query vector.
//  CLEAR  one cycle: empty every top-K list.
//  RUN    issue one DRAM read per 136-byte row. With the block layout of
//         the paper's DRAM-layout figure, row j of block b lies at
//         B + b*136*VD + 136*j, so the reads walk linearly from B in steps
//         of 136 bytes for ceil(N/68) blocks. Every read pushes a tag
//         (dimension, last-dimension flag, block base, vectors in block)
//         into a FIFO that the broadcast network pairs with the returning
//         beat (reads return in order).
//  DRAIN  wait until every read has returned, the broadcast stage is empty
//         and no engine still streams scores into its top-K unit.
//  LOAD   one cycle: copy every top-K list into its output scratchpad.
//  DONE   one cycle: write the doorbell back (step 9), telling the host
//         the partial top-K lists are ready.
// An offload with N, VD or the number of queries equal to zero goes
// straight to LOAD.
//
// Own choices: request/response port of the memory controllers
// (valid/ready, in-order responses); at most MAX_OUT reads outstanding;
// the last block may be partly filled (its nvalid tells the engines how
// many of its 68 lanes are real vectors).
module nma_control_unit
  import iks_pkg::*;
#(
  parameter int unsigned NPE     = N_PE,
  parameter int unsigned NLANES  = LANES,
  parameter int unsigned MAX_OUT = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // context buffer
  input  offload_ctx_t       ctx,
  input  logic               doorbell,
  output logic               done,        // rings the doorbell back
  // memory controller read requests
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output addr_t              mem_req_addr,
  // tag queue, popped by the broadcast network with each returning beat
  output beat_tag_t          tag_head,
  input  logic               tag_pop,
  output logic               tag_empty,
  // processing engines
  output logic [NPE-1:0]     pe_active,
  output logic               topk_clear,
  output logic               ospad_load,
  input  logic               pes_busy,
  input  logic               noc_busy,
  output logic               running
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN, S_LOAD, S_DONE} state_t;

  localparam int unsigned ROW = 2 * NLANES;   // bytes per DRAM row

  state_t            state;
  offload_ctx_t      c;
  logic [VD_W-1:0]   dim;
  addr_t             row_addr;
  addr_t             blk_base;
  logic [NVEC_W-1:0] remaining;    // vectors not yet covered by issued blocks
  logic              fifo_full;
  logic              req_fire;
  beat_tag_t         tag_new;
  logic [6:0]        nvalid;

  always_comb begin
    nvalid        = (remaining >= NVEC_W'(NLANES)) ? 7'(NLANES) : 7'(remaining);
    tag_new       = '{dim: dim, last: (dim == c.vd - 1'b1), blk_base: blk_base, nvalid: nvalid};
    mem_req_valid = (state == S_RUN) && !fifo_full;
    mem_req_addr  = row_addr;
    req_fire      = mem_req_valid && mem_req_ready;
    topk_clear    = (state == S_CLEAR);
    ospad_load    = (state == S_LOAD);
    done          = (state == S_DONE);
    running       = (state != S_IDLE);
  end

  sync_fifo #(.WIDTH($bits(beat_tag_t)), .DEPTH(MAX_OUT)) u_tags (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (req_fire),
    .wdata (tag_new),
    .pop   (tag_pop),
    .rdata (tag_head),
    .empty (tag_empty),
    .full  (fifo_full),
    .count ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      dim       <= '0;
      row_addr  <= '0;
      blk_base  <= '0;
      remaining <= '0;
      pe_active <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (doorbell) begin
          c         <= ctx;
          dim       <= '0;
          row_addr  <= ctx.base;
          blk_base  <= ctx.base;
          remaining <= ctx.nvec;
          for (int p = 0; p < NPE; p++)
            pe_active[p] <= (32'(p) < 32'(ctx.nq));
          state     <= (ctx.nvec == '0 || ctx.vd == '0 || ctx.nq == '0) ? S_LOAD : S_CLEAR;
        end
        S_CLEAR: state <= S_RUN;
        S_RUN: if (req_fire) begin
          row_addr <= row_addr + ADDR_W'(ROW);
          if (tag_new.last) begin
            dim       <= '0;
            blk_base  <= row_addr + ADDR_W'(ROW);
            remaining <= remaining - 32'(nvalid);
            if (remaining <= NVEC_W'(NLANES)) state <= S_DRAIN;
          end else begin
            dim <= dim + 1'b1;
          end
        end
        S_DRAIN: if (tag_empty && !noc_busy && !pes_busy) state <= S_LOAD;
        S_LOAD:  state <= S_DONE;
        S_DONE: begin
          state     <= S_IDLE;
          pe_active <= '0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

// output_scratchpad: the final top-K list of one processing engine, as the
// host reads it after the offload.
//
// At the end of an offload the control unit pulses load and the whole
// ordered list of the top-K unit is copied in one cycle, so the top-K unit
// is free for the next offload while the host reads this copy. The host
// reads one entry per request, a 64-bit word:
//   bit 63 valid, bits 51:36 FP16 score, bits 35:0 embedding-vector address.
// Entry 0 is the best score.
//
// Timing: synchronous read, data one cycle after rd_en. The entry format
// and the copy-on-load are own choices; the paper only says the control
// unit loads the ordered list into the output scratchpad.
module output_scratchpad
  import iks_pkg::*;
#(
  parameter int unsigned K = TOPK
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  topk_entry_t [K-1:0]   list,
  input  logic                  rd_en,
  input  logic [$clog2(K)-1:0]  rd_idx,
  output logic [63:0]           rd_data
);

  topk_entry_t [K-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem     <= '0;
      rd_data <= '0;
    end else begin
      if (load) mem <= list;
      if (rd_en)
        rd_data <= {mem[rd_idx].valid, 11'd0, mem[rd_idx].score, mem[rd_idx].addr};
    end
  end

endmodule

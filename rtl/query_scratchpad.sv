// query_scratchpad: 2 KB SRAM holding the query vector of one processing
// engine (1024 FP16 dimensions, element j at byte offset 2*j as in the
// paper's query-scratchpad layout figure).
//
// Two ports. The host port (mapped into the host address space through the
// context buffer) writes or reads one element per cycle. The engine port
// reads one element per cycle for the dot-product unit; the broadcast
// network presents the dimension one cycle ahead, so the element arrives
// together with the DRAM beat that needs it.
//
// Timing: both reads are synchronous (data one cycle after the address).
// Own choices: element-wide host port; a host read returns the element
// in bits [15:0]. The contents are not reset (SRAM).
module query_scratchpad
  import iks_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_VD
) (
  input  logic                     clk,
  // host port
  input  logic                     h_en,
  input  logic                     h_we,
  input  logic [$clog2(DEPTH)-1:0] h_addr,
  input  fp16_t                    h_wdata,
  output fp16_t                    h_rdata,
  // engine read port
  input  logic [$clog2(DEPTH)-1:0] pe_addr,
  output fp16_t                    pe_rdata
);

  fp16_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (h_en && h_we) mem[h_addr] <= h_wdata;
    if (h_en && !h_we) h_rdata <= mem[h_addr];
    pe_rdata <= mem[pe_addr];
  end

endmodule

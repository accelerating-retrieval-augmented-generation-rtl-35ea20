// iks_top: Intelligent Knowledge Store device, the digital part.
//
// A CXL memory expander with eight near-memory accelerators (NMAs), each
// beside one LPDDR5X package and each searching only the embedding vectors
// stored in its own package. The host sees 512 context buffers of 4 KB
// (64 per NMA, one per processing engine) at the bottom of the device
// address space; host address bits [20:18] select the NMA, bits [17:12]
// the context buffer inside it. This module routes every host access to
// the owning NMA and returns its read data; each NMA rings its own
// doorbell, and the host merges the eight partial top-32 lists of each
// query itself.
//
// Not built here (no logic given in the paper): the x16 CXL controller
// with its coherent cache, the x2 PCIe uplinks, the LPDDR5X memory
// controllers, PHYs and packages. Their places are the host_* port (one
// 64-bit word per request, read data one cycle later) and one memory
// read port per NMA (mem_*), brought out as arrays.
module iks_top
  import iks_pkg::*;
#(
  parameter int unsigned NNMA         = N_NMA,
  parameter int unsigned NPE          = N_PE,
  parameter int unsigned NLANES       = LANES,
  parameter int unsigned QDEPTH       = MAX_VD,
  parameter int unsigned K            = TOPK,
  parameter int unsigned MAX_OUT      = 32,
  parameter bit          KEEP_LARGEST = 1'b1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  host_req_t                     host_req,
  output host_rsp_t                     host_rsp,
  output logic [NNMA-1:0]               doorbell,
  output logic [NNMA-1:0]               mem_req_valid,
  input  logic [NNMA-1:0]               mem_req_ready,
  output addr_t [NNMA-1:0]              mem_req_addr,
  input  logic [NNMA-1:0]               mem_rsp_valid,
  output logic [NNMA-1:0]               mem_rsp_ready,
  input  fp16_t [NNMA-1:0][NLANES-1:0]  mem_rsp_data
);

  host_req_t [NNMA-1:0] req;
  host_rsp_t [NNMA-1:0] rsp;
  logic [2:0]           sel;

  always_comb begin
    sel = host_req.addr[20:18];
    for (int n = 0; n < NNMA; n++) begin
      req[n]       = host_req;
      req[n].valid = host_req.valid && (32'(sel) == n);
    end
    host_rsp = '0;
    for (int n = 0; n < NNMA; n++)
      if (rsp[n].valid) host_rsp = rsp[n];
  end

  for (genvar n = 0; n < NNMA; n++) begin : g_nma
    nma #(
      .NPE(NPE), .NLANES(NLANES), .QDEPTH(QDEPTH), .K(K),
      .MAX_OUT(MAX_OUT), .KEEP_LARGEST(KEEP_LARGEST)
    ) u_nma (
      .clk           (clk),
      .rst_n         (rst_n),
      .host_req      (req[n]),
      .host_rsp      (rsp[n]),
      .doorbell      (doorbell[n]),
      .mem_req_valid (mem_req_valid[n]),
      .mem_req_ready (mem_req_ready[n]),
      .mem_req_addr  (mem_req_addr[n]),
      .mem_rsp_valid (mem_rsp_valid[n]),
      .mem_rsp_ready (mem_rsp_ready[n]),
      .mem_rsp_data  (mem_rsp_data[n])
    );
  end

endmodule

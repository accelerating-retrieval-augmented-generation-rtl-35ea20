// lpddr_model: behavioural read model of one LPDDR5X package together with
// its memory controllers, as seen by an NMA. Not synthesizable logic and
// not a model of LPDDR5X timing.
//
// Accepts one 136-byte row read per cycle (optionally refusing requests at
// random), returns rows in order after LAT cycles (optionally with random
// gaps). The stored data are computed from the address by ev_elem(), so no
// memory array is needed for a package of any size.
module lpddr_model
  import iks_pkg::*;
  import iks_tb_pkg::*;
#(
  parameter int NLANES  = 68,
  parameter int LAT     = 8,
  parameter int GAP_PCT = 0     // percent of cycles with no request/response
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  addr_t              req_addr,
  output logic               rsp_valid,
  input  logic               rsp_ready,
  output fp16_t [NLANES-1:0] rsp_data
);
  addr_t      q_addr[$];
  longint     q_time[$];
  longint     now;
  logic       gap_req, gap_rsp;

  always_comb begin
    req_ready = !gap_req;
    rsp_valid = (q_addr.size() > 0) && (q_time[0] <= now) && !gap_rsp;
    for (int l = 0; l < NLANES; l++)
      rsp_data[l] = (q_addr.size() > 0) ? ev_elem(q_addr[0], l) : 16'h0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now     <= 0;
      gap_req <= 1'b0;
      gap_rsp <= 1'b0;
      q_addr.delete();
      q_time.delete();
    end else begin
      now     <= now + 1;
      gap_req <= ($urandom_range(99) < GAP_PCT);
      gap_rsp <= ($urandom_range(99) < GAP_PCT);
      if (rsp_valid && rsp_ready) begin
        void'(q_addr.pop_front());
        void'(q_time.pop_front());
      end
      if (req_valid && req_ready) begin
        q_addr.push_back(req_addr);
        q_time.push_back(now + LAT);
      end
    end
  end
endmodule

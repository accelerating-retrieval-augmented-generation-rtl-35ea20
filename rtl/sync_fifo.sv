// sync_fifo: small single-clock first-in first-out queue.
//
// Used by the NMA control unit to remember, for every DRAM read it has
// issued, which dimension and block the returning beat belongs to (the
// memory controllers return reads in order). Registered storage, push and
// pop may happen in the same cycle; count gives the occupancy.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     pop,
  output logic [WIDTH-1:0]         rdata,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (32'(rptr) == DEPTH - 1) ? '0 : rptr + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(push) - ($clog2(DEPTH)+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wdata;
  end

  always_comb begin
    rdata = mem[rptr];
    empty = (count == '0);
    full  = (32'(count) == DEPTH);
  end

  // A correct user never pops an empty queue or pushes a full one.
  // Checks start one cycle after reset is released.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end

  a_no_underflow: assert property (@(posedge clk)
    chk_en |-> !(pop && empty)) else $error("sync_fifo: pop while empty");
  a_no_overflow: assert property (@(posedge clk)
    chk_en |-> !(push && full && !pop)) else $error("sync_fifo: push while full");

endmodule

// tb_nma_control_unit: runs the control unit against a simple responder
// and checks the offload sequence: start on the doorbell, one top-K clear,
// the DRAM row addresses B + 136*(b*VD + j) in order, the tags (dimension,
// last flag, block base, vectors per block, last block partly filled),
// engine activation from the number of queries, one output-scratchpad
// load after everything drained, then done. Also an empty offload (N = 0)
// that must finish without a single DRAM read.
module tb_nma_control_unit;
  import iks_pkg::*;
  localparam int NPE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  offload_ctx_t ctx;
  logic doorbell, done, mem_req_valid, mem_req_ready, tag_pop, tag_empty;
  addr_t mem_req_addr;
  beat_tag_t tag_head;
  logic [NPE-1:0] pe_active;
  logic topk_clear, ospad_load, pes_busy, noc_busy, running;
  nma_control_unit #(.NPE(NPE), .NLANES(68), .MAX_OUT(8)) dut (.*);
  int checks = 0, failures = 0, nreq = 0, npop = 0, nclear = 0, nload = 0;
  addr_t req_q [$];
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  // responder: pops one tag per cycle after a short delay
  always @(posedge clk) begin
    if (rst_n) begin
      if (mem_req_valid && mem_req_ready) begin
        chk(mem_req_addr == ctx.base + addr_t'(136 * nreq), $sformatf("address of read %0d", nreq));
        nreq++;
      end
      if (tag_pop) begin
        int b, j, nb, nv;
        b  = npop / int'(ctx.vd);
        j  = npop % int'(ctx.vd);
        nb = (int'(ctx.nvec) + 67) / 68;
        nv = (b == nb - 1) ? int'(ctx.nvec) - 68 * b : 68;
        chk(tag_head.dim == VD_W'(j) && tag_head.last == (j == int'(ctx.vd) - 1) &&
            tag_head.blk_base == ctx.base + addr_t'(136 * int'(ctx.vd) * b) &&
            tag_head.nvalid == 7'(nv), $sformatf("tag of beat %0d", npop));
        npop++;
      end
      if (topk_clear) nclear++;
      if (ospad_load) begin
        nload++;
        chk(npop == nreq && tag_empty, "load only after all beats returned");
      end
    end
  end
  logic pop_en = 1'b0, rdy_en = 1'b0;
  always @(negedge clk) begin
    pop_en <= ($urandom_range(3) != 0);
    rdy_en <= ($urandom_range(4) != 0);
  end
  always_comb begin
    tag_pop       = !tag_empty && pop_en;
    mem_req_ready = rdy_en;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    doorbell = 0; pes_busy = 0; noc_busy = 0;
    ctx = '{base: 36'h4_0000, vd: 11'd10, nvec: 32'd150, nq: 7'd3};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); doorbell = 1;
    @(negedge clk);
    @(negedge clk);
    chk(pe_active == 8'b0000_0111, "engines activated by number of queries");
    while (!done) @(negedge clk);
    doorbell = 0;
    chk(nreq == 3 * 10 && npop == 30, "reads for three blocks of VD = 10");
    chk(nclear == 1 && nload == 1, "one clear, one load");
    @(negedge clk);
    chk(pe_active == '0 && !running, "idle after done");
    ctx.nvec = 0; nreq = 0; npop = 0;
    @(negedge clk); doorbell = 1;
    while (!done) @(negedge clk);
    doorbell = 0;
    chk(nreq == 0 && nload == 2, "empty offload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_processing_engine: one engine end to end. The query vector is written
// through the host port, two blocks of 68 embedding vectors (VD = 70) are
// streamed in with the scratchpad address announced one cycle ahead (as
// the broadcast network does), then the output scratchpad is loaded and
// read. The 32 entries must be the 32 best reference scores of the 136
// vectors, best first, with their DRAM addresses.
module tb_processing_engine;
  import iks_pkg::*;
  import iks_tb_pkg::*;
  localparam int NL = 68, VD = 70, NV = 136, K = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic qh_en, qh_we, oh_en, beat_valid, beat_ready, topk_clear, ospad_load, busy;
  logic sc_inserted, sc_ignored;
  logic [9:0] qh_addr, qv_raddr;
  fp16_t qh_wdata, qh_rdata;
  logic [4:0] oh_idx;
  logic [63:0] oh_rdata;
  fp16_t [NL-1:0] beat_data;
  beat_tag_t beat_tag;
  processing_engine #(.NLANES(NL), .QDEPTH(1024), .K(K)) dut (.*);
  int checks = 0, failures = 0;
  logic [15:0] q [], e [NV][], sc [NV];
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ord [$];
    qh_en = 0; qh_we = 0; qh_addr = 0; qh_wdata = 0; oh_en = 0; oh_idx = 0;
    beat_valid = 0; beat_data = '0; beat_tag = '0; qv_raddr = 0; topk_clear = 0; ospad_load = 0;
    q = new[VD];
    for (int j = 0; j < VD; j++) q[j] = rand_fp16($urandom);
    for (int i = 0; i < NV; i++) begin
      e[i] = new[VD];
      for (int j = 0; j < VD; j++) e[i][j] = rand_fp16($urandom);
      sc[i] = ref_dot(q, e[i]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < VD; j++) begin
      @(negedge clk); qh_en = 1; qh_we = 1; qh_addr = 10'(j); qh_wdata = q[j];
    end
    @(negedge clk); qh_en = 0; topk_clear = 1; qv_raddr = 0;
    @(negedge clk); topk_clear = 0;
    for (int b = 0; b < 2; b++)
      for (int j = 0; j < VD; j++) begin
        beat_valid = 1;
        beat_tag = '{dim: VD_W'(j), last: (j == VD - 1), blk_base: addr_t'(136 * VD * b), nvalid: 7'd68};
        for (int l = 0; l < NL; l++) beat_data[l] = e[68 * b + l][j];
        qv_raddr = 10'((j + 1) % VD);
        @(posedge clk);
        checks++;
        if (!beat_ready) begin failures++; $display("FAIL stall with VD = 70"); end
        @(negedge clk);
      end
    beat_valid = 0;
    while (busy) @(negedge clk);
    ospad_load = 1;
    @(negedge clk); ospad_load = 0;
    for (int i = 0; i < NV; i++) begin
      int pos;
      pos = ord.size();
      for (int k = 0; k < ord.size(); k++)
        if (ref_better(sc[i], sc[ord[k]], 1'b1)) begin pos = k; break; end
      ord.insert(pos, i);
    end
    for (int k = 0; k < K; k++) begin
      @(negedge clk); oh_en = 1; oh_idx = 5'(k);
      @(negedge clk); oh_en = 0;
      checks++;
      if (oh_rdata !== {1'b1, 11'd0, sc[ord[k]], addr_t'(136 * VD * (ord[k] / 68) + 2 * (ord[k] % 68))}) begin
        failures++; $display("FAIL rank %0d: %h (exp score %h)", k, oh_rdata, sc[ord[k]]);
      end
    end
    @(negedge clk); qh_en = 1; qh_we = 0; qh_addr = 10'd7;
    @(negedge clk); qh_en = 0;
    checks++;
    if (qh_rdata !== q[7]) begin failures++; $display("FAIL query read-back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dot_product_unit: feeds three blocks of 68 embedding vectors (the last
// one only partly filled) dimension by dimension and checks the scores and
// addresses streamed to the top-K unit against reference dot products.
// Run 1: VD = 20 with random gaps, so the 68-cycle read-out is longer than
// a block and the unit must hold back beats (stall counted, required).
// Run 2: VD = 70 without gaps: no stall allowed and the unit must be idle
// exactly 3*VD + 69 cycles after the first beat (VD MAC cycles per block,
// one cycle to load the score registers, 68 read-out cycles).
module tb_dot_product_unit;
  import iks_pkg::*;
  import iks_tb_pkg::*;
  localparam int NL = 68;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic beat_valid, beat_ready, sc_valid, busy;
  fp16_t [NL-1:0] beat_data;
  beat_tag_t beat_tag;
  fp16_t qv, sc_score;
  addr_t sc_addr;
  dot_product_unit #(.NLANES(NL)) dut (.*);
  int checks = 0, failures = 0, stalls = 0;
  logic [15:0] got_s [$];
  addr_t       got_a [$];
  always @(posedge clk) begin
    if (rst_n && sc_valid) begin got_s.push_back(sc_score); got_a.push_back(sc_addr); end
    if (rst_n && beat_valid && !beat_ready) stalls++;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic run(int vd, int gap_pct, bit timed);
    logic [15:0] q [], e [3][NL][];
    int nv [3] = '{68, 68, 30};
    longint t0, t1;
    q = new[vd];
    for (int j = 0; j < vd; j++) q[j] = rand_fp16($urandom);
    for (int b = 0; b < 3; b++)
      for (int l = 0; l < NL; l++) begin
        e[b][l] = new[vd];
        for (int j = 0; j < vd; j++) e[b][l][j] = rand_fp16($urandom);
      end
    got_s.delete(); got_a.delete(); stalls = 0;
    t0 = -1;
    for (int b = 0; b < 3; b++)
      for (int j = 0; j < vd; j++) begin
        @(negedge clk);
        while ($urandom_range(99) < gap_pct) begin
          beat_valid = 0;
          @(negedge clk);
        end
        beat_valid = 1;
        beat_tag = '{dim: VD_W'(j), last: (j == vd - 1), blk_base: addr_t'(1000 * b), nvalid: 7'(nv[b])};
        qv = q[j];
        for (int l = 0; l < NL; l++) beat_data[l] = e[b][l][j];
        if (t0 < 0) t0 = $time;
        @(posedge clk);
        while (!beat_ready) @(posedge clk);
      end
    @(negedge clk);
    beat_valid = 0;
    while (busy) @(negedge clk);
    t1 = $time;
    for (int b = 0, k = 0; b < 3; b++)
      for (int l = 0; l < nv[b]; l++, k++) begin
        checks++;
        if (k >= got_s.size() || got_s[k] !== ref_dot(q, e[b][l]) || got_a[k] !== addr_t'(1000 * b + 2 * l)) begin
          failures++;
          $display("FAIL vd %0d block %0d lane %0d", vd, b, l);
        end
      end
    checks++;
    if (got_s.size() != 166) begin failures++; $display("FAIL %0d scores streamed", got_s.size()); end
    checks++;
    if (timed) begin
      $display("VD %0d: idle after %0d cycles, stalls %0d", vd, (t1 - t0) / 10, stalls);
      if ((t1 - t0) / 10 != 3 * vd + 69 || stalls != 0) begin failures++; $display("FAIL timing"); end
    end else begin
      $display("VD %0d: stalls %0d", vd, stalls);
      if (stalls == 0) begin failures++; $display("FAIL no stall for VD < 68"); end
    end
  endtask
  initial begin
    beat_valid = 0; beat_data = '0; beat_tag = '0; qv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(20, 20, 1'b0);
    run(70, 0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_broadcast_noc: sends 300 beats with random input gaps to four engines,
// two of them active, whose ready is random. Checks that every beat reaches
// the active engines once, in order, at the same time, never the inactive
// ones, and that qv_raddr announced each beat's dimension one cycle ahead.
module tb_broadcast_noc;
  import iks_pkg::*;
  localparam int NPE = 4, NL = 4, NB = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, busy, stall;
  fp16_t [NL-1:0] in_data, out_data;
  beat_tag_t in_tag, out_tag;
  logic [NPE-1:0] pe_active, pe_valid, pe_ready;
  logic [9:0] qv_raddr, raddr_q;
  broadcast_noc #(.NPE(NPE), .NLANES(NL), .QDEPTH(1024)) dut (.*);
  int checks = 0, failures = 0, nrx = 0, nstall = 0;
  always @(posedge clk) begin
    raddr_q <= qv_raddr;
    if (rst_n && stall) nstall++;
    if (rst_n && |pe_valid) begin
      checks++;
      if (pe_valid != 4'b0101 || out_data[1] !== 16'(nrx) || out_data[3] !== 16'(nrx * 3)
          || out_tag.dim !== VD_W'(nrx % 1000) || 10'(out_tag.dim) !== raddr_q) begin
        failures++;
        $display("FAIL beat %0d: valid %b data %h dim %0d raddr %0d", nrx, pe_valid, out_data[0], out_tag.dim, raddr_q);
      end
      nrx++;
    end
    pe_ready <= 4'($urandom);
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in_valid = 0; in_data = '0; in_tag = '0; pe_active = 4'b0101;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int l = 0; l < NL; l++) in_data[l] = 16'(b * l);
      in_tag = '{dim: VD_W'(b % 1000), last: 1'b0, blk_base: '0, nvalid: 7'd4};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (nrx != NB || nstall == 0) begin failures++; $display("FAIL received %0d stalls %0d", nrx, nstall); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

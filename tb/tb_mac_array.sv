// tb_mac_array: checks the 68-lane FP16 MAC bank against reference dot
// products computed on reals. Two blocks back to back: the score
// registers must hold block 0 while the MAC registers already sum block 1,
// and every score must appear exactly one cycle after score_we.
module tb_mac_array;
  import iks_pkg::*;
  import iks_tb_pkg::*;
  localparam int NL = 68;
  localparam int VD = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, first, score_we;
  fp16_t qv;
  fp16_t [NL-1:0] ev, mac_q, score;
  mac_array #(.NLANES(NL)) dut (.*);
  int checks = 0, failures = 0;
  logic [15:0] q [2][], e [2][NL][];
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    en = 0; first = 0; score_we = 0; qv = 0; ev = '0;
    for (int b = 0; b < 2; b++) begin
      q[b] = new[VD];
      for (int j = 0; j < VD; j++) q[b][j] = rand_fp16($urandom);
      for (int l = 0; l < NL; l++) begin
        e[b][l] = new[VD];
        for (int j = 0; j < VD; j++) e[b][l][j] = rand_fp16($urandom);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      for (int j = 0; j < VD; j++) begin
        @(negedge clk);
        en = 1; first = (j == 0); qv = q[b][j];
        for (int l = 0; l < NL; l++) ev[l] = e[b][l][j];
        score_we = (b == 1 && j == 0);   // load block 0 while block 1 starts
        if (b == 1 && j == 1) begin
          // scores of block 0 visible now
          for (int l = 0; l < NL; l++) begin
            checks++;
            if (score[l] !== ref_dot(q[0], e[0][l])) begin
              failures++;
              $display("FAIL block0 lane %0d: %h vs %h", l, score[l], ref_dot(q[0], e[0][l]));
            end
          end
        end
      end
    end
    @(negedge clk);
    en = 0; score_we = 1;
    @(negedge clk);
    score_we = 0;
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (score[l] !== ref_dot(q[1], e[1][l])) begin
        failures++;
        $display("FAIL block1 lane %0d: %h vs %h", l, score[l], ref_dot(q[1], e[1][l]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

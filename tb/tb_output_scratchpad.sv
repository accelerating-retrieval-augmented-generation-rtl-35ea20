// tb_output_scratchpad: loads a random list, reads every entry through the
// host port (word format: valid, score, address), then checks that a new
// list only replaces the contents on load.
module tb_output_scratchpad;
  import iks_pkg::*;
  localparam int K = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, rd_en;
  topk_entry_t [K-1:0] list;
  logic [4:0] rd_idx;
  logic [63:0] rd_data;
  output_scratchpad #(.K(K)) dut (.*);
  int checks = 0, failures = 0;
  topk_entry_t [K-1:0] a;
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    load = 0; rd_en = 0; rd_idx = 0;
    for (int k = 0; k < K; k++) a[k] = '{valid: k < 20, score: 16'($urandom), addr: addr_t'({$urandom, $urandom})};
    list = a;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    list = '0;   // the list changes; the copy must not
    for (int k = 0; k < K; k++) begin
      @(negedge clk); rd_en = 1; rd_idx = 5'(k);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== {a[k].valid, 11'd0, a[k].score, a[k].addr}) begin
        failures++; $display("FAIL entry %0d: %h", k, rd_data);
      end
    end
    @(negedge clk); load = 1;
    @(negedge clk); load = 0; rd_en = 1; rd_idx = 0;
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data !== 64'd0) begin failures++; $display("FAIL reload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

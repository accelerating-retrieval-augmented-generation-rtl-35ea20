// tb_query_scratchpad: fills the 1024-entry scratchpad through the host
// port, then reads every element back through both ports and checks the
// one-cycle read latency of the engine port.
module tb_query_scratchpad;
  import iks_pkg::*;
  localparam int D = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic h_en, h_we;
  logic [9:0] h_addr, pe_addr;
  fp16_t h_wdata, h_rdata, pe_rdata;
  query_scratchpad #(.DEPTH(D)) dut (.*);
  int checks = 0, failures = 0;
  logic [15:0] ref_m [D];
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    h_en = 0; h_we = 0; h_addr = 0; h_wdata = 0; pe_addr = 0;
    for (int i = 0; i < D; i++) ref_m[i] = 16'($urandom);
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      h_en = 1; h_we = 1; h_addr = 10'(i); h_wdata = ref_m[i];
    end
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      h_en = 1; h_we = 0; h_addr = 10'(i); pe_addr = 10'(D - 1 - i);
      @(negedge clk);
      h_en = 0;
      checks += 2;
      if (h_rdata !== ref_m[i]) begin failures++; $display("FAIL host read %0d", i); end
      if (pe_rdata !== ref_m[D-1-i]) begin failures++; $display("FAIL engine read %0d", D-1-i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
